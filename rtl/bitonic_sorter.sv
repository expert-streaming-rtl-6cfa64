// bitonic_sorter: sorts all experts of a layer by token count, largest first.
//
// Entries (key = token count, id = expert id) are written one per clock
// through the load port into NUM_EXPERTS registers. A start pulse then runs
// the bitonic sorting network over them. The network is folded in time: one
// stage, NUM_EXPERTS/2 compare-exchange units working in parallel, is applied
// per clock, so a full sort takes log2(E)*(log2(E)+1)/2 clocks (28 for 128
// experts, 21 for 64). done is high from the clock after the last stage until
// the next start or load; sorted_key/sorted_id hold the list, index 0 being
// the expert with the most tokens.
//
// NUM_EXPERTS must be a power of two. The paper names a bitonic sorter that
// sorts all experts in parallel; folding it to one stage per clock is this
// design's choice. Equal keys keep no particular order.
module bitonic_sorter #(
  parameter int unsigned NUM_EXPERTS = 128,
  parameter int unsigned CNT_W       = 11,
  localparam int unsigned AW = (NUM_EXPERTS > 1) ? $clog2(NUM_EXPERTS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [AW-1:0]    load_idx,
  input  logic [CNT_W-1:0] load_key,
  input  logic [AW-1:0]    load_id,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [CNT_W-1:0] sorted_key [NUM_EXPERTS],
  output logic [AW-1:0]    sorted_id  [NUM_EXPERTS]
);

  localparam int unsigned LG = AW;

  // Stage counters: the block size k = 2^kl (kl = 1..LG) and the compare
  // distance j = 2^jl (jl = kl-1 .. 0).
  logic [$clog2(LG+1)-1:0] kl, jl;

  logic [CNT_W-1:0] nkey [NUM_EXPERTS];
  logic [AW-1:0]    nid  [NUM_EXPERTS];

  // One bitonic stage. Pair (i, i^j) with i < i^j; blocks with bit k of i
  // clear are put in descending order, the others ascending, so that the last
  // merge (k = NUM_EXPERTS) leaves the whole list descending.
  always_comb begin
    int unsigned j, k, l;
    logic swap;
    swap = 1'b0;
    j = 1 << jl;
    k = 1 << kl;
    for (int unsigned i = 0; i < NUM_EXPERTS; i++) begin
      nkey[i] = sorted_key[i];
      nid[i]  = sorted_id[i];
    end
    for (int unsigned i = 0; i < NUM_EXPERTS; i++) begin
      l = i ^ j;
      swap = 1'b0;
      if (l > i) begin
        if ((i & k) == 0) swap = sorted_key[i] < sorted_key[l];
        else              swap = sorted_key[i] > sorted_key[l];
        if (swap) begin
          nkey[i] = sorted_key[l];  nid[i] = sorted_id[l];
          nkey[l] = sorted_key[i];  nid[l] = sorted_id[i];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      kl   <= '0;
      jl   <= '0;
      for (int unsigned i = 0; i < NUM_EXPERTS; i++) begin
        sorted_key[i] <= '0;
        sorted_id[i]  <= AW'(i);
      end
    end else if (load) begin
      sorted_key[load_idx] <= load_key;
      sorted_id[load_idx]  <= load_id;
      done <= 1'b0;
    end else if (start) begin
      busy <= (NUM_EXPERTS > 1);
      done <= (NUM_EXPERTS <= 1);
      kl   <= 1;
      jl   <= 0;
    end else if (busy) begin
      for (int unsigned i = 0; i < NUM_EXPERTS; i++) begin
        sorted_key[i] <= nkey[i];
        sorted_id[i]  <= nid[i];
      end
      if (jl == 0) begin
        if (32'(kl) == LG) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          kl <= kl + 1'b1;
          jl <= kl;          // next block size 2^(kl+1) starts at distance 2^kl
        end
      end else begin
        jl <= jl - 1'b1;
      end
    end
  end

  initial assert (NUM_EXPERTS >= 2 && (NUM_EXPERTS & (NUM_EXPERTS - 1)) == 0)
    else $error("bitonic_sorter: NUM_EXPERTS must be a power of two");

endmodule
