// tb_ec_matcher: random idle vectors, context and buffer flags and queue
// windows against a reference: the first window entry whose trajectory meets
// the idle set (and whose chiplets all have a context) starts at the lowest
// idle chiplet of its trajectory; failing that, and with some chiplet idle,
// the first entry not yet pre-loaded goes to the lowest chiplet of its
// trajectory with a context and room.
module tb_ec_matcher;
  localparam int unsigned N = 4, W = 8;
  int checks = 0, failures = 0, n_match = 0, n_pre = 0;
  logic [N-1:0] idle, ctx_free, slot_room;
  logic [W-1:0] win_valid;
  logic [N-1:0] win_traj [W];
  logic [N-1:0] win_pre [W];
  logic match, pre;
  logic [2:0] match_pos, pre_pos;
  logic [N-1:0] cstar, pre_chiplet;
  ec_matcher #(.NUM_CHIPLETS(N), .QWIN(W)) dut (.*);
  function automatic logic [N-1:0] low(input logic [N-1:0] m);
    for (int c = 0; c < N; c++) if (m[c]) return N'(1) << c;
    return '0;
  endfunction
  initial begin
    for (int i = 0; i < 5000; i++) begin
      bit em, ep; int mp, pp; logic [N-1:0] ec, epc;
      idle = N'($urandom) & N'($urandom); ctx_free = N'($urandom) | N'($urandom); slot_room = N'($urandom);
      win_valid = W'($urandom);
      for (int k = 0; k < W; k++) begin
        win_traj[k] = N'($urandom); if (win_traj[k] == 0) win_traj[k] = 1;
        win_pre[k] = ($urandom % 4 == 0) ? low(win_traj[k]) : '0;
      end
      #1;
      em = 0; ep = 0; mp = 0; pp = 0; ec = '0; epc = '0;
      for (int k = 0; k < W && !em; k++)
        if (win_valid[k] && (win_traj[k] & idle) != 0 && (win_traj[k] & ~ctx_free & ~win_pre[k]) == 0) begin
          em = 1; mp = k; ec = low(win_traj[k] & idle);
        end
      if (!em && idle != 0)
        for (int k = 0; k < W && !ep; k++)
          if (win_valid[k] && win_pre[k] == 0 && (win_traj[k] & ctx_free & slot_room) != 0) begin
            ep = 1; pp = k; epc = low(win_traj[k] & ctx_free & slot_room);
          end
      n_match += int'(em); n_pre += int'(ep);
      checks++;
      if (match !== em || (em && (match_pos != 3'(mp) || cstar != ec)) ||
          pre !== ep || (ep && (pre_pos != 3'(pp) || pre_chiplet != epc))) begin
        failures++;
        $display("FAIL %0d: match %b/%b pos %0d/%0d c* %b/%b pre %b/%b pos %0d/%0d chip %b/%b",
                 i, match, em, match_pos, mp, cstar, ec, pre, ep, pre_pos, pp, pre_chiplet, epc);
      end
    end
    checks++; if (n_match == 0 || n_pre == 0) begin failures++; $display("FAIL coverage %0d %0d", n_match, n_pre); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
