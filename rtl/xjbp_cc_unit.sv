// xjbp_cc_unit: constituent-code message update for one column.
//
// For the column `col` (blocks of 2^col nodes) it returns, per node, the R
// message that the rest of the decoder must see:
//   CC_NONE : the stored R (an ordinary node, updated by the PEs)
//   CC_N0   : +LLR_MAX, the "infinite" belief of an all-frozen code
//   CC_N1   : 0, an all-information code receives no belief from the left
//   CC_REP  : R_i = sum_{k!=i} L_k                               (paper Eq. 6)
//   CC_SPC  : R_i = prod_{k!=i} sgn(L_k) * min_{k!=i} |L_k|      (paper Eq. 7)
// The REP and SPC rules are computed only when `dyn` is set (the left-to-right
// pass, after the L messages of the column are fresh); otherwise the stored
// R, written back from the previous pass, is returned. `dyn_root[i]` marks the
// REP/SPC nodes whose result must be written back.
//
// How: one segmented reduction tree over the whole column gives, for every
// block size 2^l, the block's sum, sign product, smallest and second smallest
// magnitude; each node picks level `col` of its block. "Sum of the others" is
// the block sum minus the node's own L; "min of the others" is the second
// minimum where the node itself holds the minimum. The sum is kept at full
// width and saturated only at the end. Sharing one tree among all columns and
// code sizes is a choice of this design (the paper notes that the constituent
// code rules use the same additions and comparisons as the PEs). Purely
// combinational.
module xjbp_cc_unit
  import xjbp_pkg::*;
#(
  parameter int unsigned N   = 1024,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned CW = $clog2(M + 1),
  localparam int unsigned SW = LLR_W + M + 1
) (
  input  logic [CW-1:0] col,
  input  logic          dyn,
  input  cc_type_e      ntype    [N],
  input  llr_t          l_col    [N],
  input  llr_t          r_col    [N],
  output llr_t          r_eff    [N],
  output logic          dyn_root [N]
);

  typedef logic [LLR_W-2:0] mag_t;

  logic signed [SW-1:0] sum  [M+1][N];
  logic                 sgn  [M+1][N];
  mag_t                 min1 [M+1][N];
  mag_t                 min2 [M+1][N];

  always_comb begin
    for (int l = 0; l <= M; l++) begin
      for (int b = 0; b < N; b++) begin
        sum[l][b] = '0; sgn[l][b] = 1'b0; min1[l][b] = '0; min2[l][b] = '0;
      end
    end
    for (int b = 0; b < N; b++) begin
      sum[0][b]  = SW'(l_col[b]);
      sgn[0][b]  = l_col[b][LLR_W-1];
      min1[0][b] = mag_llr(l_col[b]);
      min2[0][b] = mag_t'(LLR_MAX);
    end
    for (int l = 1; l <= M; l++) begin
      for (int b = 0; b < (N >> l); b++) begin
        sum[l][b] = sum[l-1][2*b] + sum[l-1][2*b+1];
        sgn[l][b] = sgn[l-1][2*b] ^ sgn[l-1][2*b+1];
        if (min1[l-1][2*b] <= min1[l-1][2*b+1]) begin
          min1[l][b] = min1[l-1][2*b];
          min2[l][b] = (min1[l-1][2*b+1] < min2[l-1][2*b]) ? min1[l-1][2*b+1]
                                                          : min2[l-1][2*b];
        end else begin
          min1[l][b] = min1[l-1][2*b+1];
          min2[l][b] = (min1[l-1][2*b] < min2[l-1][2*b+1]) ? min1[l-1][2*b]
                                                          : min2[l-1][2*b+1];
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [SW-1:0] bsum, rsum;
      logic                 bsgn;
      mag_t                 bmin1, bmin2, mself, mo;
      int unsigned          blk;  // block index, below N
      blk   = i >> col;
      bsum  = sum[col][blk];
      bsgn  = sgn[col][blk];
      bmin1 = min1[col][blk];
      bmin2 = min2[col][blk];
      mself = mag_llr(l_col[i]);
      rsum  = bsum - SW'(l_col[i]);
      mo    = (mself == bmin1) ? bmin2 : bmin1;
      dyn_root[i] = (ntype[i] == CC_REP) || (ntype[i] == CC_SPC);
      unique case (ntype[i])
        CC_N0:   r_eff[i] = llr_t'(LLR_MAX);
        CC_N1:   r_eff[i] = '0;
        CC_REP:  r_eff[i] = !dyn ? r_col[i] :
                            (rsum > SW'(LLR_MAX))  ? llr_t'(LLR_MAX) :
                            (rsum < -SW'(LLR_MAX)) ? llr_t'(-LLR_MAX) : llr_t'(rsum);
        CC_SPC:  r_eff[i] = !dyn ? r_col[i] :
                            ((bsgn ^ l_col[i][LLR_W-1]) ? -llr_t'({1'b0, mo})
                                                        :  llr_t'({1'b0, mo}));
        default: r_eff[i] = r_col[i];
      endcase
    end
  end

endmodule
