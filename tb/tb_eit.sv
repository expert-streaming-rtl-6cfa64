// tb_eit: writes every entry of the Expert Information Table, including the
// example rows (expert 0: 28 tokens, 1: 32, 2: 16, last: 27), then reads them
// back checking the one-clock read latency and read-before-write behaviour.
module tb_eit;
  localparam int unsigned E = 128, N = 4, CW = 11;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [CW-1:0] wcount = '0, rcount;
  logic [N-1:0] wtraj = '0, rtraj;
  eit #(.NUM_EXPERTS(E), .NUM_CHIPLETS(N), .CNT_W(CW)) dut (.*);

  function automatic logic [CW-1:0] cnt_of(input int e);
    case (e)
      0: return 28; 1: return 32; 2: return 16; E-1: return 27;
      default: return CW'((e * 37 + 5) % 300);
    endcase
  endfunction
  function automatic logic [N-1:0] traj_of(input int e);
    return N'((e * 5 + 3) % 15 + 1);
  endfunction

  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    @(negedge clk);
    for (int e = 0; e < E; e++) begin
      we = 1; waddr = 7'(e); wcount = cnt_of(e); wtraj = traj_of(e);
      @(negedge clk);
    end
    we = 0;
    for (int e = E - 1; e >= 0; e--) begin
      raddr = 7'(e);
      @(negedge clk);
      checks++;
      if (rcount !== cnt_of(e) || rtraj !== traj_of(e)) begin
        failures++; $display("FAIL entry %0d: %0d/%b", e, rcount, rtraj);
      end
    end
    // read and write the same entry in one cycle: old data comes out
    raddr = 7'd5; we = 1; waddr = 7'd5; wcount = 11'd999; wtraj = 4'b1001;
    @(negedge clk);
    we = 0;
    checks++; if (rcount !== cnt_of(5)) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk);
    checks++; if (rcount !== 11'd999 || rtraj !== 4'b1001) begin failures++; $display("FAIL new data"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
