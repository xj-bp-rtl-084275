// tb_xjbp_decoder_rates: the default-size decoder (N = 1024, 60 iterations)
// on the code rates 1/2, 2/3, 3/4, 5/6 and 7/8 and on a batch of (1024,512)
// frames at Eb/N0 = 3.5 dB.
//
// For every rate a frozen set is built (Bhattacharyya bound on a BEC with
// erasure probability 0.3), loaded through the configuration port, and frames
// at 4.5 dB are decoded; every result must equal the reference model, and the
// clock count must be 1 + iters*21. The 3.5 dB batch reports the average
// number of iterations, which must lie between 2 and 6 (roughly 4 is the
// expected figure for round-trip scheduling at this SNR).
module tb_xjbp_decoder_rates;
  import xjbp_pkg::*;
  import tb_xjbp_model::*;

  localparam int N = 1024, M = 10, MAX_ITER = 60, MIN_LOG = 2;
  int K = 512;
  localparam int IW = $clog2(MAX_ITER + 1);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0, start = 1'b0;
  logic cfg_frozen [N];
  llr_t llr_in [N];
  logic busy, done, converged;
  logic [IW-1:0] iters;
  logic x_hat [N], u_hat [N];
  int   total_iters = 0, frames = 0;

  xjbp_decoder dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_frozen(cfg_frozen),
    .start(start), .llr_in(llr_in), .busy(busy), .done(done),
    .converged(converged), .iters(iters), .x_hat(x_hat), .u_hat(u_hat));

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_frame(barr_t fr, real ebn0_db, bit must_decode);
    barr_t u, x, xr, ur;
    int    llr[], it_ref, ops, cyc, bad_x, bad_u, err;
    bit    conv_ref;
    real   sigma;
    sigma = $sqrt(1.0 / (2.0 * (real'(K) / real'(N)) * (10.0 ** (ebn0_db / 10.0))));
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
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    bad_x = 0; bad_u = 0; err = 0;
    for (int i = 0; i < N; i++) begin
      if (x_hat[i] != xr[i]) bad_x++;
      if (u_hat[i] != ur[i]) bad_u++;
      if (x_hat[i] != x[i]) err++;
    end
    $display("frame %0d at %0.1f dB: %0d iterations, converged %0d, %0d clocks, %0d bit errors",
             frames, ebn0_db, iters, converged, cyc, err);
    check(converged == conv_ref, "convergence flag differs from the model");
    check(int'(iters) == it_ref, $sformatf("iters %0d, model %0d", iters, it_ref));
    check(cyc == 1 + it_ref * (2 * M + 1), $sformatf("latency %0d clocks", cyc));
    check(bad_x == 0, $sformatf("%0d codeword bits differ from the model", bad_x));
    check(bad_u == 0, $sformatf("%0d message bits differ from the model", bad_u));
    if (must_decode) check(err == 0 && converged, "frame at high SNR not decoded");
    total_iters += int'(iters);
    frames++;
  endtask

  task automatic configure(barr_t fr);
    for (int i = 0; i < N; i++) cfg_frozen[i] = fr[i];
    @(negedge clk);
    cfg_we = 1'b1;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    barr_t fr;
    int    ks [5] = '{512, 683, 768, 853, 896};
    real   avg;
    for (int i = 0; i < N; i++) llr_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 5; r++) begin
      K  = ks[r];
      fr = frozen_bec(N, K, 0.3);
      configure(fr);
      for (int f = 0; f < 2; f++) run_frame(fr, 4.5, 1'b0);
    end
    K  = 512;
    fr = frozen_bec(N, K, 0.3);
    configure(fr);
    total_iters = 0; frames = 0;
    for (int f = 0; f < 20; f++) run_frame(fr, 3.5, 1'b0);
    avg = real'(total_iters) / frames;
    $display("average iterations at 3.5 dB: %0.2f over %0d frames", avg, frames);
    check(avg >= 2.0 && avg <= 6.0, "average iteration count out of range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
