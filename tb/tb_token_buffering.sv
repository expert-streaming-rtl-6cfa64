// tb_token_buffering: random request activity, activation masks and cold
// sets over many iterations, compared with a reference model of the two
// timer rules and the deferral condition (grant when C >= N_threshold, then
// defer when a cold expert is hit and T > 0). Also checks cold_keep.
module tb_token_buffering;
  localparam int unsigned R = 8, E = 32;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic fwd_pass = 0, eval = 0;
  logic [7:0] n_threshold = 8'd3;
  logic [R-1:0] req_active = '0, defer;
  logic [E-1:0] req_experts [R];
  logic [E-1:0] expert_cold = '0, cold_keep;
  logic [7:0] tqos [R];
  logic [7:0] cfw [R];
  int rt [R], rc [R];
  logic [R-1:0] rdef;
  int n_def = 0;
  token_buffering #(.NUM_REQ(R), .NUM_EXPERTS(E), .TQ_W(8), .CFW_W(8)) dut (.*);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (req_experts[r]) req_experts[r] = '0;
    foreach (rt[r]) begin rt[r] = 0; rc[r] = 0; end
    rdef = '0;
    @(negedge clk); rst_n = 1; @(negedge clk);
    for (int it = 0; it < 400; it++) begin
      logic [E-1:0] keep;
      // forward passes
      req_active = R'($urandom);
      repeat ($urandom % 3) begin
        fwd_pass = 1; @(negedge clk); fwd_pass = 0;
        for (int r = 0; r < R; r++) if (req_active[r] && !rdef[r] && rc[r] < 255) rc[r]++;
      end
      // a layer boundary
      n_threshold = 8'(1 + $urandom % 4);
      expert_cold = E'($urandom) & E'($urandom);
      for (int r = 0; r < R; r++) req_experts[r] = E'($urandom) & E'($urandom) & E'($urandom);
      for (int r = 0; r < R; r++) begin
        bit g;
        g = req_active[r] && rc[r] >= n_threshold;
        if (g) begin if (rt[r] < 255) rt[r]++; rc[r] = 0; end
        rdef[r] = req_active[r] && ((req_experts[r] & expert_cold) != 0) && rt[r] > 0;
        if (rdef[r]) rt[r]--;
      end
      eval = 1; @(negedge clk); eval = 0;
      keep = '0;
      for (int r = 0; r < R; r++) if (req_active[r] && !rdef[r]) keep |= req_experts[r];
      keep &= expert_cold;
      n_def += $countones(rdef);
      checks++;
      if (defer !== rdef || cold_keep !== keep) begin
        failures++; $display("FAIL it %0d: defer %b/%b keep %h/%h", it, defer, rdef, cold_keep, keep);
      end
      for (int r = 0; r < R; r++) begin
        checks++;
        if (tqos[r] != 8'(rt[r]) || cfw[r] != 8'(rc[r])) begin
          failures++; $display("FAIL it %0d r %0d: T %0d/%0d C %0d/%0d", it, r, tqos[r], rt[r], cfw[r], rc[r]);
        end
      end
    end
    checks++; if (n_def == 0) begin failures++; $display("FAIL no deferral seen"); end
    $display("deferrals: %0d", n_def);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
