// tb_xjbp_cc_classifier: test of the constituent-code classifier at its
// default size, N = 1024.
//
// Frozen sets of rate 1/2 and 7/8 (Bhattacharyya bound on a BEC with erasure
// probability 0.3) and a random one are applied. The role of every node of
// every column and the enable of every PE are compared with the model, which
// finds the codes by counting information leaves and searching all
// ancestors. The numbers of maximal codes of each kind and size are printed;
// for the (1024,512) code the N0 and N1 counts of sizes 4..128 must equal the
// published distribution, and so must the number of REP and SPC codes
// together per size (the split between REP and SPC comes out exchanged with
// respect to the published table: 16 8 4 1 1 1 SPC and 15 5 3 1 1 0 REP).
module tb_xjbp_cc_classifier;
  import xjbp_pkg::*;
  import tb_xjbp_model::*;

  localparam int N = 1024, M = 10, MIN_LOG = 2;

  int checks = 0, failures = 0;
  logic frozen [N];
  cc_type_e ntype [M+1][N];
  logic pe_en [M][N/2];

  xjbp_cc_classifier dut (.frozen(frozen), .ntype(ntype), .pe_en(pe_en));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Published distribution for (1024,512), sizes 4..128.
  localparam int T_N0 [6]  = '{3, 3, 2, 2, 0, 1};
  localparam int T_N1 [6]  = '{3, 3, 2, 1, 0, 0};
  localparam int T_RS [6]  = '{31, 13, 7, 2, 2, 1};   // REP + SPC

  task automatic run(barr_t fr, string name, bit table_check);
    int cnt [5][M+1];
    int off;
    for (int k = 0; k < 5; k++) for (int c = 0; c <= M; c++) cnt[k][c] = 0;
    for (int i = 0; i < N; i++) frozen[i] = fr[i];
    #1;
    off = 0;
    for (int c = 0; c <= M; c++)
      for (int i = 0; i < N; i++) begin
        int r;
        r = node_role(fr, c, i, MIN_LOG);
        checks++;
        if (int'(ntype[c][i]) != r) begin
          failures++;
          if (failures < 10) $display("FAIL %s col %0d node %0d: %0d expected %0d",
                                      name, c, i, ntype[c][i], r);
        end
        if (r != 0 && (i % (1 << c)) == 0) cnt[r][c]++;
      end
    for (int s = 0; s < M; s++)
      for (int p = 0; p < N / 2; p++) begin
        bit e;
        e = pe_on(fr, s, p, MIN_LOG);
        checks++;
        if (pe_en[s][p] != e) failures++;
        if (!e) off++;
      end
    $display("%s: maximal codes by size 4 8 16 32 64 128 | PEs off %0d of %0d", name, off, M * N / 2);
    $display("  N0  %0d %0d %0d %0d %0d %0d", cnt[1][2], cnt[1][3], cnt[1][4], cnt[1][5], cnt[1][6], cnt[1][7]);
    $display("  N1  %0d %0d %0d %0d %0d %0d", cnt[2][2], cnt[2][3], cnt[2][4], cnt[2][5], cnt[2][6], cnt[2][7]);
    $display("  REP %0d %0d %0d %0d %0d %0d", cnt[3][2], cnt[3][3], cnt[3][4], cnt[3][5], cnt[3][6], cnt[3][7]);
    $display("  SPC %0d %0d %0d %0d %0d %0d", cnt[4][2], cnt[4][3], cnt[4][4], cnt[4][5], cnt[4][6], cnt[4][7]);
    if (table_check)
      for (int z = 0; z < 6; z++) begin
        checks += 3;
        if (cnt[1][z+2] != T_N0[z]) begin failures++; $display("FAIL N0 count size %0d", 4 << z); end
        if (cnt[2][z+2] != T_N1[z]) begin failures++; $display("FAIL N1 count size %0d", 4 << z); end
        if (cnt[3][z+2] + cnt[4][z+2] != T_RS[z]) begin
          failures++; $display("FAIL REP+SPC count size %0d", 4 << z);
        end
      end
  endtask

  initial begin
    barr_t fr;
    run(frozen_bec(N, 512, 0.3), "(1024,512)", 1'b1);
    run(frozen_bec(N, 896, 0.3), "(1024,896)", 1'b0);
    fr = new[N];
    for (int i = 0; i < N; i++) fr[i] = 1'($urandom_range(0, 1));
    run(fr, "random", 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
