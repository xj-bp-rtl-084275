// tb_xjbp_decoder_full: the XJ-BP decoder at its default size, the (1024,512)
// polar code with at most 60 iterations.
//
// The frozen set is the Bhattacharyya construction on a BEC with erasure
// probability 0.3. Random messages are encoded and sent over BPSK/AWGN at
// Eb/N0 = 3.5 dB (and one frame at 1.0 dB), the channel LLRs are quantised to
// the decoder's word and each frame is decoded. Codeword, message,
// convergence flag and iteration count must equal the reference model, the
// start-to-done time must be 1 + iters*21 clocks, and at 3.5 dB every frame
// must decode to the transmitted codeword.
module tb_xjbp_decoder_full;
  import xjbp_pkg::*;
  import tb_xjbp_model::*;

  localparam int N = 1024, K = 512, M = 10, MAX_ITER = 60, MIN_LOG = 2;
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
    repeat (20000) @(posedge clk);
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

  initial begin
    barr_t fr;
    for (int i = 0; i < N; i++) llr_in[i] = '0;
    fr = frozen_bec(N, K, 0.3);
    for (int i = 0; i < N; i++) cfg_frozen[i] = fr[i];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_we = 1'b1;
    @(negedge clk);
    cfg_we = 1'b0;
    for (int f = 0; f < 4; f++) run_frame(fr, 3.5, 1'b1);
    run_frame(fr, 1.0, 1'b0);
    $display("average iterations %0.2f over %0d frames", real'(total_iters) / frames, frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
