// tb_nop_xbar: every chiplet sends a stream of headers to random
// destinations while the receivers stall at random. Checks that each header
// arrives once, at the chiplet it names, in the order its sender issued it,
// and that with receivers always ready the round-robin arbiter serves a
// waiting sender within NUM_CHIPLETS clocks.
module tb_nop_xbar;
  import fse_pkg::*;
  localparam int unsigned N = 4, PER = 300;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  cid_t   tx_dst [N];
  mshdr_t tx_hdr [N];
  mshdr_t rx_hdr [N];
  nop_xbar #(.NUM_CHIPLETS(N)) dut (.*);
  // expert = sequence number, visits = sender, ms = destination
  int seq [N], wait_c [N], got [N][$];
  int delivered = 0, max_wait = 0, contended = 0;
  bit strict = 1;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic new_hdr(int s);
    tx_dst[s] = cid_t'($urandom % N);
    tx_hdr[s] = '{expert: eid_t'(seq[s]), ms: msi_t'(tx_dst[s]), visits: vis_t'(s)};
  endtask
  // receivers
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < N; d++) if (rx_valid[d] && rx_ready[d]) begin
      int s; s = int'(rx_hdr[d].visits);
      checks++;
      if (int'(rx_hdr[d].ms) != d) begin failures++; $display("FAIL wrong destination %0d for %0d", d, rx_hdr[d].ms); end
      checks++;
      if (int'(rx_hdr[d].expert) != (got[s].size() % 256)) begin
        failures++; $display("FAIL order from %0d: got %0d want %0d", s, rx_hdr[d].expert, got[s].size() % 256);
      end
      got[s].push_back(d);
      delivered++;
    end
    if ($countones(tx_valid) > 1) contended++;
  end
  initial begin
    tx_valid = '0; rx_ready = '1;
    for (int s = 0; s < N; s++) begin seq[s] = 0; wait_c[s] = 0; new_hdr(s); end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 40000; cyc++) begin
      @(posedge clk); #0;
      // what the DUT saw at this edge
      for (int s = 0; s < N; s++) begin
        if (tx_valid[s] && tx_ready[s]) begin
          seq[s]++; wait_c[s] = 0;
        end else if (tx_valid[s]) begin
          wait_c[s]++;
          if (wait_c[s] > max_wait) max_wait = wait_c[s];
          if (strict && wait_c[s] >= N) begin failures++; $display("FAIL sender %0d waited %0d", s, wait_c[s]); end
        end
      end
      @(negedge clk);
      if (cyc == 20000) strict = 0;
      rx_ready = strict ? '1 : N'($urandom);
      for (int s = 0; s < N; s++) begin
        if (tx_valid[s] && wait_c[s] == 0 && seq[s] > 0 && tx_hdr[s].expert != eid_t'(seq[s])) tx_valid[s] = 0;
        if (!tx_valid[s] && seq[s] < PER * 2 && ($urandom % 4 != 0)) begin new_hdr(s); tx_valid[s] = 1; end
        else if (tx_valid[s] && tx_hdr[s].expert != eid_t'(seq[s])) begin
          if (seq[s] < PER * 2) new_hdr(s); else tx_valid[s] = 0;
        end
      end
    end
    rx_ready = '1; repeat (10) @(negedge clk);
    for (int s = 0; s < N; s++) begin
      checks++;
      if (got[s].size() != seq[s]) begin failures++; $display("FAIL sender %0d sent %0d delivered %0d", s, seq[s], got[s].size()); end
    end
    checks++; if (contended == 0 || delivered < N * PER) begin failures++; $display("FAIL coverage %0d %0d", contended, delivered); end
    $display("delivered %0d, max wait %0d, contended clocks %0d", delivered, max_wait, contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
