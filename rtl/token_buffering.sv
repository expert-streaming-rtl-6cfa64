// token_buffering: per-request deferral at an MoE layer boundary.
//
// Each request r has a QoS timer T(r) and a forward-pass counter C(r).
// C(r) counts forward passes (iterations) in which the request took part;
// when it has reached n_threshold at a layer evaluation, T(r) gains one and
// C(r) restarts, so a request earns one deferral per n_threshold passes.
// At the evaluation (eval pulse), after gating and before the layer's
// experts are scheduled, a request is deferred when one of the experts it
// activates is cold (fewer tokens than the hot threshold) and T(r) > 0;
// the deferral costs one unit of T(r). A deferred request keeps its
// activations and resumes at the same layer in a later iteration.
// The slack a request gets (the 10/20/30 % levels) is set by software
// through n_threshold.
//
// cold_keep[e] tells the pairing unit which cold experts must still run:
// those activated by an active request that was not deferred.
//
// Timing: eval updates T, C and defer at the next clock edge; defer and
// cold_keep are valid from the cycle after eval until the next eval.
// fwd_pass adds one to C(r) of every active request that was not deferred
// by the latest evaluation. Counters saturate. Reset clears everything.
//
// From the paper: the two timer rules and the deferral condition, in the
// paper's order (grant, then defer). The counter widths, saturation and
// which passes count are this design's choices.
module token_buffering #(
  parameter int unsigned NUM_REQ     = 16,
  parameter int unsigned NUM_EXPERTS = 128,
  parameter int unsigned TQ_W        = 8,
  parameter int unsigned CFW_W       = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   fwd_pass,
  input  logic                   eval,
  input  logic [CFW_W-1:0]       n_threshold,
  input  logic [NUM_REQ-1:0]     req_active,
  input  logic [NUM_EXPERTS-1:0] req_experts [NUM_REQ],
  input  logic [NUM_EXPERTS-1:0] expert_cold,
  output logic [NUM_REQ-1:0]     defer,
  output logic [NUM_EXPERTS-1:0] cold_keep,
  output logic [TQ_W-1:0]        tqos [NUM_REQ],
  output logic [CFW_W-1:0]       cfw  [NUM_REQ]
);

  logic [NUM_REQ-1:0] grant, cold_hit, defer_n;
  logic [TQ_W-1:0]    tq_g [NUM_REQ];

  always_comb begin
    for (int unsigned r = 0; r < NUM_REQ; r++) begin
      grant[r]    = req_active[r] && (cfw[r] >= n_threshold);
      tq_g[r]     = (grant[r] && tqos[r] != '1) ? tqos[r] + 1'b1 : tqos[r];
      cold_hit[r] = |(req_experts[r] & expert_cold);
      defer_n[r]  = req_active[r] && cold_hit[r] && (tq_g[r] != '0);
    end
  end

  always_comb begin
    cold_keep = '0;
    for (int unsigned r = 0; r < NUM_REQ; r++)
      if (req_active[r] && !defer[r]) cold_keep = cold_keep | req_experts[r];
    cold_keep = cold_keep & expert_cold;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      defer <= '0;
      for (int unsigned r = 0; r < NUM_REQ; r++) begin
        tqos[r] <= '0;
        cfw[r]  <= '0;
      end
    end else if (eval) begin
      defer <= defer_n;
      for (int unsigned r = 0; r < NUM_REQ; r++) begin
        tqos[r] <= defer_n[r] ? tq_g[r] - 1'b1 : tq_g[r];
        if (grant[r]) cfw[r] <= '0;
      end
    end else if (fwd_pass) begin
      for (int unsigned r = 0; r < NUM_REQ; r++)
        if (req_active[r] && !defer[r] && cfw[r] != '1) cfw[r] <= cfw[r] + 1'b1;
    end
  end

endmodule
