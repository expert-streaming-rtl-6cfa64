// tb_idle_chiplet_vector: random allocations and releases against a
// reference vector (idle = (idle | release) & ~alloc), plus reset to all idle.
module tb_idle_chiplet_vector;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic alloc = 0;
  logic [N-1:0] alloc_mask = '0, release_mask = '0, idle, ref_idle;
  idle_chiplet_vector #(.NUM_CHIPLETS(N)) dut (.*);
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    @(negedge clk); rst_n = 1; @(negedge clk);
    checks++; if (idle !== '1) begin failures++; $display("FAIL reset %b", idle); end
    ref_idle = '1;
    for (int i = 0; i < 500; i++) begin
      alloc = 1'($urandom); alloc_mask = N'($urandom); release_mask = N'($urandom) & N'($urandom);
      ref_idle = (ref_idle | release_mask) & ~(alloc ? alloc_mask : '0);
      @(negedge clk);
      checks++; if (idle !== ref_idle) begin failures++; $display("FAIL %0d: %b vs %b", i, idle, ref_idle); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
