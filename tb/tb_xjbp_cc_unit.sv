// tb_xjbp_cc_unit: test of the constituent-code unit at N = 64.
//
// For every column and both settings of `dyn`, random L and R columns are
// applied together with a random role per block (N0, N1, REP, SPC or none).
// The expected R of every node is computed directly: constants for N0/N1, the
// stored R for ordinary nodes (and for REP/SPC when dyn = 0), the clamped
// sum of the other L of the block for REP and the sign product and minimum
// magnitude of the other L for SPC.
module tb_xjbp_cc_unit;
  import xjbp_pkg::*;
  import tb_xjbp_model::*;

  localparam int N = 64, M = 6, CW = 3;

  int checks = 0, failures = 0;
  logic [CW-1:0] col;
  logic dyn;
  cc_type_e ntype [N];
  llr_t l_col [N], r_col [N], r_eff [N];
  logic dyn_root [N];

  xjbp_cc_unit #(.N(N)) dut (.col(col), .dyn(dyn), .ntype(ntype), .l_col(l_col),
                             .r_col(r_col), .r_eff(r_eff), .dyn_root(dyn_root));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      int c, sz, kinds[N];
      c  = t % (M + 1);
      sz = 1 << c;
      col = CW'(c);
      dyn = 1'((t / (M + 1)) % 2);
      for (int b = 0; b < N / sz; b++) begin
        int k;
        k = int'($urandom_range(0, 4));
        for (int i = b * sz; i < (b + 1) * sz; i++) kinds[i] = k;
      end
      for (int i = 0; i < N; i++) begin
        int r;
        ntype[i] = cc_type_e'(kinds[i]);
        r = int'($urandom_range(0, 9));
        // small values make REP sums stay in range; extremes test saturation
        l_col[i] = llr_t'((t % 4 == 0) ? (int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX)
                                       : (r == 0 ? 0 : int'($urandom_range(0, 16)) - 8));
        r_col[i] = llr_t'(int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        int e, lo, acc, mn, ng;
        lo = (i / sz) * sz;
        case (kinds[i])
          1: e = LLR_MAX;
          2: e = 0;
          3: begin
            acc = 0;
            for (int k = lo; k < lo + sz; k++) if (k != i) acc += int'(l_col[k]);
            e = dyn ? clampi(acc) : int'(r_col[i]);
          end
          4: begin
            mn = LLR_MAX; ng = 0;
            for (int k = lo; k < lo + sz; k++)
              if (k != i) begin
                int a;
                a = (l_col[k] < 0) ? -int'(l_col[k]) : int'(l_col[k]);
                if (a < mn) mn = a;
                if (l_col[k] < 0) ng ^= 1;
              end
            e = dyn ? ((ng != 0) ? -mn : mn) : int'(r_col[i]);
          end
          default: e = int'(r_col[i]);
        endcase
        checks += 2;
        if (int'(r_eff[i]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d dyn %0d node %0d kind %0d: %0d expected %0d",
                                      c, dyn, i, kinds[i], r_eff[i], e);
        end
        if (dyn_root[i] != (kinds[i] == 3 || kinds[i] == 4)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
