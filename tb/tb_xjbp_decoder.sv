// tb_xjbp_decoder: end-to-end test of the XJ-BP decoder at N = 64.
//
// Builds frozen sets for several code rates (Bhattacharyya bound on a BEC with
// erasure probability 0.3), encodes random messages, sends them over a
// quantised BPSK/AWGN channel and decodes them. Every frame is compared bit
// for bit with the reference model (codeword, message, convergence flag and
// iteration count), and the start-to-done time must be 1 + iters*(2M+1)
// clocks. It also counts the mechanisms of the design and fails if one never
// happened: early termination, the iteration limit, roots of each of the four
// constituent-code kinds, switched-off PEs, a start ignored while busy and a
// change of code rate.
module tb_xjbp_decoder;
  import xjbp_pkg::*;
  import tb_xjbp_model::*;

  localparam int N        = 64;
  localparam int M        = 6;
  localparam int MAX_ITER = 60;
  localparam int MIN_LOG  = 2;
  localparam int IW       = $clog2(MAX_ITER + 1);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0, start = 1'b0;
  logic cfg_frozen [N];
  llr_t llr_in [N];
  logic busy, done, converged;
  logic [IW-1:0] iters;
  logic x_hat [N], u_hat [N];

  xjbp_decoder #(.N(N), .MAX_ITER(MAX_ITER), .MIN_LOG(MIN_LOG)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_frozen(cfg_frozen),
    .start(start), .llr_in(llr_in), .busy(busy), .done(done),
    .converged(converged), .iters(iters), .x_hat(x_hat), .u_hat(u_hat));

  always #5 clk = ~clk;

  int n_early = 0, n_limit = 0, n_ignored = 0, n_rates = 0, n_pe_off = 0;
  int n_kind [5] = '{0, 0, 0, 0, 0};

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic configure(barr_t fr);
    @(negedge clk);
    for (int i = 0; i < N; i++) cfg_frozen[i] = fr[i];
    cfg_we = 1'b1;
    @(negedge clk);
    cfg_we = 1'b0;
    n_rates++;
    for (int c = 0; c <= M; c++)
      for (int i = 0; i < N; i++) begin
        int r;
        r = node_role(fr, c, i, MIN_LOG);
        if (r != 0 && (i % (1 << c)) == 0) n_kind[r]++;
      end
    for (int s = 0; s < M; s++)
      for (int p = 0; p < N / 2; p++) if (!pe_on(fr, s, p, MIN_LOG)) n_pe_off++;
  endtask

  task automatic run_frame(barr_t fr, real sigma, bit poke_start);
    barr_t u, x, xr, ur;
    int    llr[], it_ref, ops, cyc;
    bit    conv_ref;
    u = new[N]; llr = new[N];
    for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'($urandom_range(0, 1));
    x = polar_encode(u);
    for (int i = 0; i < N; i++) llr[i] = channel_llr(x[i], sigma, 4.0);
    it_ref = decode(llr, fr, MAX_ITER, MIN_LOG, xr, ur, conv_ref, ops);
    @(negedge clk);
    for (int i = 0; i < N; i++) llr_in[i] = llr_t'(llr[i]);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    if (poke_start) begin
      // a second start while busy must change nothing
      for (int i = 0; i < N; i++) llr_in[i] = llr_t'(-llr[i]);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc++;
      n_ignored++;
    end
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(converged == conv_ref, $sformatf("converged %0d ref %0d", converged, conv_ref));
    check(int'(iters) == it_ref, $sformatf("iters %0d ref %0d", iters, it_ref));
    check(cyc == 1 + it_ref * (2 * M + 1),
          $sformatf("latency %0d clocks, expected %0d", cyc, 1 + it_ref * (2 * M + 1)));
    begin
      int bad_x, bad_u;
      bad_x = 0; bad_u = 0;
      for (int i = 0; i < N; i++) begin
        if (x_hat[i] != xr[i]) bad_x++;
        if (u_hat[i] != ur[i]) bad_u++;
      end
      check(bad_x == 0, $sformatf("%0d codeword bits differ from the model", bad_x));
      check(bad_u == 0, $sformatf("%0d message bits differ from the model", bad_u));
    end
    check(busy == 1'b0, "busy after done");
    if (conv_ref && it_ref < MAX_ITER) n_early++;
    if (!conv_ref) n_limit++;
  endtask

  initial begin
    barr_t fr_half, fr_78, fr_14;
    for (int i = 0; i < N; i++) begin
      cfg_frozen[i] = 1'b0;
      llr_in[i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fr_half = frozen_bec(N, N / 2, 0.3);
    fr_78   = frozen_bec(N, 56, 0.3);
    fr_14   = frozen_bec(N, 16, 0.3);

    configure(fr_half);
    for (int f = 0; f < 30; f++) run_frame(fr_half, 0.60, f == 3);
    for (int f = 0; f < 6; f++)  run_frame(fr_half, 1.30, 1'b0);   // very noisy
    configure(fr_78);
    for (int f = 0; f < 15; f++) run_frame(fr_78, 0.45, 1'b0);
    configure(fr_14);
    for (int f = 0; f < 15; f++) run_frame(fr_14, 0.90, 1'b0);

    $display("early terminations %0d, iteration limit %0d, ignored starts %0d, rates %0d",
             n_early, n_limit, n_ignored, n_rates);
    $display("roots N0 %0d N1 %0d REP %0d SPC %0d, switched-off PEs %0d",
             n_kind[1], n_kind[2], n_kind[3], n_kind[4], n_pe_off);
    check(n_early > 0, "early termination never happened");
    check(n_limit > 0, "iteration limit never reached");
    check(n_ignored > 0, "start while busy never tried");
    check(n_rates > 1, "code rate never changed");
    for (int k = 1; k <= 4; k++) check(n_kind[k] > 0, $sformatf("no root of kind %0d", k));
    check(n_pe_off > 0, "no PE switched off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
