// xjbp_cc_classifier: finds the constituent codes that XJ-BP decodes directly.
//
// Column c of the factor graph (c = 0 is the leaf column u, c = M the codeword
// column x; the paper numbers them 1..m+1) splits into blocks of 2^c nodes.
// Each block is the root of a constituent polar code whose leaves are
// u[b*2^c .. (b+1)*2^c-1]. From the frozen mask the block is tagged, bottom-up:
//   N0  : all leaves frozen            n0  = n0(left)  & n0(right)
//   N1  : all leaves information       n1  = n1(left)  & n1(right)
//   REP : only the last leaf is info   rep = n0(left)  & rep(right)
//   SPC : only the first leaf frozen   spc = spc(left) & n1(right)
// A tagged block is "special"; a special block with no special ancestor is a
// root and gives all its nodes its type (N0 before N1 before REP before SPC);
// every other node of that column is CC_NONE. Every processing element whose
// polarization unit lies in_cc a special block is switched off (pe_en = 0):
// that part of the factor graph is never visited again.
//
// The four code types and their meaning are the paper's. How they are found,
// the minimum sizes (N0/N1 from a single leaf, so that every frozen leaf gets
// its +inf message the same way; REP/SPC from 2^MIN_LOG = 4 nodes, the
// smallest size the paper counts) and the priority are choices of this design.
// Purely combinational; the frozen mask is static for a code, so its delay is
// not on the decoding path.
//
// Outputs: ntype[c][i]  role of node i of column c
//          pe_en[s][p]  enable of PE p at stage s (s = 0..M-1 joins columns s
//                       and s+1; PE p serves nodes i and i+2^s with
//                       i = {p >> s, 1'b0, p[s-1:0]})
module xjbp_cc_classifier
  import xjbp_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned MIN_LOG = 2,
  localparam int unsigned M      = $clog2(N)
) (
  input  logic     frozen [N],
  output cc_type_e ntype  [M+1][N],
  output logic     pe_en  [M][N/2]
);

  logic n0     [M+1][N];
  logic n1     [M+1][N];
  logic rep    [M+1][N];
  logic spc    [M+1][N];
  logic spec   [M+1][N];
  logic in_cc [M+1][N];
  cc_type_e btype [M+1][N];

  always_comb begin
    for (int c = 0; c <= M; c++) begin
      for (int b = 0; b < N; b++) begin
        n0[c][b] = 1'b0; n1[c][b] = 1'b0; rep[c][b] = 1'b0; spc[c][b] = 1'b0;
      end
    end
    // Leaves.
    for (int b = 0; b < N; b++) begin
      n0[0][b]  = frozen[b];
      n1[0][b]  = !frozen[b];
      rep[0][b] = !frozen[b];
      spc[0][b] = frozen[b];
    end
    // Blocks of 2^c leaves, merged from their two halves.
    for (int c = 1; c <= M; c++) begin
      for (int b = 0; b < (N >> c); b++) begin
        n0[c][b]  = n0[c-1][2*b]  && n0[c-1][2*b+1];
        n1[c][b]  = n1[c-1][2*b]  && n1[c-1][2*b+1];
        rep[c][b] = n0[c-1][2*b]  && rep[c-1][2*b+1];
        spc[c][b] = spc[c-1][2*b] && n1[c-1][2*b+1];
      end
    end
  end

  always_comb begin
    for (int c = 0; c <= M; c++) begin
      for (int b = 0; b < N; b++) begin
        spec[c][b] = 1'b0;
        in_cc[c][b] = 1'b0;
        btype[c][b] = CC_NONE;
      end
    end
    for (int c = 0; c <= M; c++) begin
      for (int b = 0; b < (N >> c); b++) begin
        spec[c][b] = n0[c][b] || n1[c][b] ||
                     ((c >= MIN_LOG) && (rep[c][b] || spc[c][b]));
      end
    end
    // Top-down: a block is in_cc a constituent code if it or an ancestor is special.
    in_cc[M][0] = spec[M][0];
    if (spec[M][0]) btype[M][0] = n0[M][0] ? CC_N0 : n1[M][0] ? CC_N1 :
                                   rep[M][0] ? CC_REP : CC_SPC;
    for (int c = M - 1; c >= 0; c--) begin
      for (int b = 0; b < (N >> c); b++) begin
        in_cc[c][b] = spec[c][b] || in_cc[c+1][b/2];
        if (spec[c][b] && !in_cc[c+1][b/2])
          btype[c][b] = n0[c][b] ? CC_N0 : n1[c][b] ? CC_N1 :
                        rep[c][b] ? CC_REP : CC_SPC;
      end
    end
  end

  always_comb begin
    for (int c = 0; c <= M; c++)
      for (int i = 0; i < N; i++)
        ntype[c][i] = btype[c][i >> c];
    for (int s = 0; s < M; s++)
      for (int p = 0; p < N / 2; p++)
        pe_en[s][p] = !in_cc[s+1][p >> s];
  end

endmodule
