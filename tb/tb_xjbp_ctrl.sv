// tb_xjbp_ctrl: cycle-by-cycle test of the round-trip scheduler (N = 16,
// M = 4, at most 5 iterations). For every clock after start it predicts the
// step (L sweep over columns 3..0, R sweep over columns 0..3, check on column
// 4), the iteration number and the done/converged outputs; the early-
// termination input is raised in a chosen iteration, or never, to reach the
// limit. A start while busy must be ignored.
module tb_xjbp_ctrl;
  import xjbp_pkg::*;

  localparam int N = 16, M = 4, MAX_ITER = 5;
  localparam int CW = $clog2(M + 1), IW = $clog2(MAX_ITER + 1);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, et_pass = 1'b0;
  logic busy, load, l_step, r_step, check, done, converged;
  logic [CW-1:0] col;
  logic [IW-1:0] iter;

  xjbp_ctrl #(.N(N), .MAX_ITER(MAX_ITER)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .et_pass(et_pass), .busy(busy),
    .load(load), .l_step(l_step), .r_step(r_step), .check(check), .col(col),
    .iter(iter), .done(done), .converged(converged));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_state(bit el, bit er, bit ec, int ecol, int eit, bit edone, bit econv);
    checks++;
    if (l_step !== el || r_step !== er || check !== ec || int'(col) != ecol ||
        int'(iter) != eit || done !== edone || converged !== econv || busy !== 1'b1) begin
      failures++;
      $display("FAIL t=%0t: l%0d r%0d c%0d col %0d iter %0d done %0d conv %0d; expected l%0d r%0d c%0d col %0d iter %0d done %0d conv %0d",
               $time, l_step, r_step, check, col, iter, done, converged,
               el, er, ec, ecol, eit, edone, econv);
    end
  endtask

  // Run one decoding; et_pass is raised during the check of iteration pass_it
  // (0 = never).
  task automatic run(int pass_it, bit poke);
    int last;
    @(negedge clk);
    checks++;
    if (busy || load) begin failures++; $display("FAIL: not idle before start"); end
    start = 1'b1;
    #1;
    checks++;
    if (!load) begin failures++; $display("FAIL: load not raised with start"); end
    @(negedge clk);
    start = poke;   // a start while busy
    last = (pass_it == 0) ? MAX_ITER : pass_it;
    for (int it = 1; it <= last; it++) begin
      for (int s = M - 1; s >= 0; s--) begin
        expect_state(1, 0, 0, s, it, 0, 0);
        checks++;
        if (load) begin failures++; $display("FAIL: load while busy"); end
        @(negedge clk);
        start = 1'b0;
      end
      for (int s = 0; s < M; s++) begin
        expect_state(0, 1, 0, s, it, 0, 0);
        @(negedge clk);
      end
      et_pass = (it == pass_it);
      #1;
      expect_state(0, 0, 1, M, it, it == last, it == pass_it);
      @(negedge clk);
      et_pass = 1'b0;
    end
    checks++;
    if (busy) begin failures++; $display("FAIL: still busy after done"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(1, 1'b0);
    run(3, 1'b1);
    run(0, 1'b0);
    run(MAX_ITER, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
