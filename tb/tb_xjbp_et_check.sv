// tb_xjbp_et_check: test of the hard decision and codeword test at N = 64.
//
// Random messages of a rate-1/2 code are encoded; LLRs that agree with the
// codeword must give pass = 1 with x_hat equal to the codeword and u_hat equal
// to the message. With one or two codeword bits turned over (the sign of R+L
// flipped), the expected pass flag comes from re-encoding the flipped word in
// the model. A zero LLR must decide 1, as the hard-decision rule says.
module tb_xjbp_et_check;
  import xjbp_pkg::*;
  import tb_xjbp_model::*;

  localparam int N = 64;

  int checks = 0, failures = 0;
  llr_t r_col [N], l_col [N];
  logic frozen [N], x_hat [N], u_hat [N], pass;
  int   n_pass = 0, n_fail = 0;

  xjbp_et_check #(.N(N)) dut (.r_col(r_col), .l_col(l_col), .frozen(frozen),
                              .x_hat(x_hat), .u_hat(u_hat), .pass(pass));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    barr_t fr, u, x, xf, uf;
    fr = frozen_bec(N, N / 2, 0.3);
    for (int i = 0; i < N; i++) frozen[i] = fr[i];
    u = new[N];
    for (int t = 0; t < 400; t++) begin
      int nflip;
      bit exp_pass;
      for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'($urandom_range(0, 1));
      x  = polar_encode(u);
      xf = new[N];
      foreach (x[i]) xf[i] = x[i];
      nflip = t % 3;
      for (int f = 0; f < nflip; f++) begin
        int p;
        p = int'($urandom_range(0, N - 1));
        xf[p] = !xf[p];
      end
      for (int i = 0; i < N; i++) begin
        int mag, lv, rv;
        mag = int'($urandom_range(0, 10));
        // R + L has the sign of the (flipped) bit; 0 stands for bit 1
        lv = int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX;
        rv = clampi((xf[i] ? -mag : (mag == 0 ? 1 : mag)) - lv);
        if (clampi(rv + lv) > 0 == xf[i] || (clampi(rv + lv) <= 0) != xf[i]) begin
          lv = 0;
          rv = xf[i] ? -mag : (mag == 0 ? 1 : mag);
        end
        l_col[i] = llr_t'(lv);
        r_col[i] = llr_t'(rv);
      end
      uf = polar_encode(xf);
      exp_pass = 1'b1;
      for (int i = 0; i < N; i++) if (fr[i] && uf[i]) exp_pass = 1'b0;
      #1;
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (x_hat[i] != xf[i]) failures++;
        if (u_hat[i] != uf[i]) failures++;
      end
      checks++;
      if (pass != exp_pass) begin
        failures++;
        $display("FAIL t=%0d flips %0d: pass %0d expected %0d", t, nflip, pass, exp_pass);
      end
      if (pass) n_pass++; else n_fail++;
    end
    checks++;
    if (n_pass == 0 || n_fail == 0) begin
      failures++;
      $display("FAIL: pass %0d times, fail %0d times", n_pass, n_fail);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
