// tb_xjbp_pe: self-checking test of the one-direction processing element.
//
// Drives random and extreme LLRs in both directions and compares both outputs
// with an integer model of the min-sum update equations:
//   L: top = G(a, b+d), bot = G(c, a) + b
//   R: top = G(c, b+d), bot = G(c, a) + d
// with a = L(i,j+1), b = L(i+h,j+1), c = R(i,j), d = R(i+h,j) and every sum
// clamped to +-LLR_MAX.
module tb_xjbp_pe;
  import xjbp_pkg::*;

  int checks = 0, failures = 0;
  pe_dir_e dir;
  llr_t a, b, c, d, o_top, o_bot;

  xjbp_pe dut (.dir(dir), .l_top_r(a), .l_bot_r(b), .r_top_l(c), .r_bot_l(d),
               .o_top(o_top), .o_bot(o_bot));

  function automatic int clampi(int v);
    return (v > LLR_MAX) ? LLR_MAX : (v < -LLR_MAX) ? -LLR_MAX : v;
  endfunction
  function automatic int gi(int x, int y);
    int m, ax, ay;
    ax = (x < 0) ? -x : x;
    ay = (y < 0) ? -y : y;
    m  = (ax < ay) ? ax : ay;
    return ((x < 0) != (y < 0)) ? -m : m;
  endfunction
  function automatic int rnd_llr();
    int r;
    r = int'($urandom_range(0, 7));
    if (r == 0) return LLR_MAX;
    if (r == 1) return -LLR_MAX;
    if (r == 2) return 0;
    return int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int ia, ib, ic, id, et, eb;
      ia = rnd_llr(); ib = rnd_llr(); ic = rnd_llr(); id = rnd_llr();
      a = llr_t'(ia); b = llr_t'(ib); c = llr_t'(ic); d = llr_t'(id);
      dir = (n % 2 == 0) ? DIR_L : DIR_R;
      #1;
      if (dir == DIR_L) begin
        et = gi(ia, clampi(ib + id));
        eb = clampi(gi(ic, ia) + ib);
      end else begin
        et = gi(ic, clampi(ib + id));
        eb = clampi(gi(ic, ia) + id);
      end
      checks += 2;
      if (int'(o_top) != et || int'(o_bot) != eb) begin
        failures++;
        if (failures < 10)
          $display("mismatch dir=%0d a=%0d b=%0d c=%0d d=%0d: top %0d/%0d bot %0d/%0d",
                   dir, ia, ib, ic, id, o_top, et, o_bot, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
