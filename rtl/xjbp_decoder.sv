// xjbp_decoder: XJ-BP (express-journey belief propagation) polar decoder.
//
// Decodes an (N, K) polar code with min-sum belief propagation on a factor
// graph that is cut short wherever a constituent code of a known kind begins:
// all-frozen (N0) and all-information (N1) codes get constant messages, and
// repetition (REP) and single-parity-check (SPC) codes are updated by one
// direct rule instead of log2(size) stages of processing elements. Messages
// are refreshed in round trips (L leftwards, then R rightwards) and decoding
// stops once the hard decision is a codeword, or after MAX_ITER iterations.
//
// Structure (all of it follows the paper's algorithm; the architecture is a
// choice of this design): one row of N/2 one-direction processing elements is
// shared by all M stages and processes one stage per clock; the L and R
// messages of all M+1 columns are kept in two register stores; a single
// constituent-code unit serves the column of the current stage; the
// classifier derives node roles and PE enables from the frozen mask, and the
// early-termination block re-encodes the hard decision. Disabled PEs (inside
// a constituent code) write nothing.
//
// Interface:
//   cfg_we/cfg_frozen  load the frozen-bit mask (1 = frozen), only when idle
//   start/llr_in       start decoding the channel LLRs llr_in (sampled in the
//                      start clock; positive = bit 0 more likely); ignored
//                      while busy
//   done               one-clock pulse, registered from the last check; with
//                      it x_hat (codeword), u_hat (message incl. frozen
//                      positions), converged (x_hat is a codeword) and iters
//                      are valid and hold until the next decoding ends
// Timing: done rises at the clock edge 1 + iters*(2*M+1) edges after the edge
// that takes start (1 load clock, then 2M+1 clocks per iteration), that is 23
// clocks per iteration at N = 1024. One codeword is decoded at a time.
module xjbp_decoder
  import xjbp_pkg::*;
#(
  parameter int unsigned N        = 1024,
  parameter int unsigned MAX_ITER = 60,
  parameter int unsigned MIN_LOG  = 2,
  localparam int unsigned M       = $clog2(N),
  localparam int unsigned CW      = $clog2(M + 1),
  localparam int unsigned IW      = $clog2(MAX_ITER + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic          cfg_frozen [N],
  input  logic          start,
  input  llr_t          llr_in     [N],
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [IW-1:0] iters,
  output logic          x_hat      [N],
  output logic          u_hat      [N]
);

  // ---------------------------------------------------------------- config
  logic frozen_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) frozen_q[i] <= 1'b0;
    end else if (cfg_we && !busy) begin
      for (int i = 0; i < N; i++) frozen_q[i] <= cfg_frozen[i];
    end
  end

  cc_type_e ntype [M+1][N];
  logic     pe_en [M][N/2];

  xjbp_cc_classifier #(.N(N), .MIN_LOG(MIN_LOG)) u_cls (
    .frozen (frozen_q),
    .ntype  (ntype),
    .pe_en  (pe_en)
  );

  // ---------------------------------------------------------------- control
  logic          load, l_step, r_step, check, ctl_done, ctl_conv, et_pass;
  logic [CW-1:0] col;
  logic [IW-1:0] iter;

  xjbp_ctrl #(.N(N), .MAX_ITER(MAX_ITER)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .et_pass   (et_pass),
    .busy      (busy),
    .load      (load),
    .l_step    (l_step),
    .r_step    (r_step),
    .check     (check),
    .col       (col),
    .iter      (iter),
    .done      (ctl_done),
    .converged (ctl_conv)
  );

  // Column of the right side of the current stage (clamped at the check).
  logic [CW-1:0] col_r;
  assign col_r = (col == CW'(M)) ? CW'(M) : col + 1'b1;

  // ---------------------------------------------------------------- stores
  llr_t l_right [N];   // L of column col+1
  llr_t l_left  [N];   // L of column col
  llr_t r_left  [N];   // stored R of column col
  llr_t r_eff   [N];   // R of column col as the PEs must see it
  logic dyn_root [N];

  logic pe_mask [N];   // per node of the written column: its PE is enabled
  llr_t pe_wdata [N];  // per node of the written column: its PE's result
  logic all_ones [N];

  always_comb begin
    for (int i = 0; i < N; i++) all_ones[i] = 1'b1;
  end

  xjbp_msg_mem #(.N(N), .COLS(M + 1)) u_lmem (
    .clk      (clk),
    .clear    (1'b0),
    .rd_col_a (col_r),
    .rd_a     (l_right),
    .rd_col_b (col),
    .rd_b     (l_left),
    .we0      (l_step),
    .wr_col0  (col),
    .wr_mask0 (pe_mask),
    .wr_data0 (pe_wdata),
    .we1      (load),
    .wr_col1  (CW'(M)),
    .wr_mask1 (all_ones),
    .wr_data1 (llr_in)
  );

  xjbp_msg_mem #(.N(N), .COLS(M + 1)) u_rmem (
    .clk      (clk),
    .clear    (load),
    .rd_col_a (col),
    .rd_a     (r_left),
    .rd_col_b (col_r),
    .rd_b     (),
    .we0      (r_step),
    .wr_col0  (col),
    .wr_mask0 (dyn_root),
    .wr_data0 (r_eff),
    .we1      (r_step),
    .wr_col1  (col_r),
    .wr_mask1 (pe_mask),
    .wr_data1 (pe_wdata)
  );

  // ---------------------------------------------------------------- constituent codes
  cc_type_e ntype_col [N];
  logic     pe_en_col [N/2];

  always_comb begin
    for (int i = 0; i < N; i++) ntype_col[i] = ntype[col][i];
    for (int p = 0; p < N / 2; p++)
      pe_en_col[p] = (32'(col) < M) ? pe_en[col][p] : 1'b0;
  end

  xjbp_cc_unit #(.N(N)) u_cc (
    .col      (col),
    .dyn      (r_step || check),
    .ntype    (ntype_col),
    .l_col    (l_left),
    .r_col    (r_left),
    .r_eff    (r_eff),
    .dyn_root (dyn_root)
  );

  // ---------------------------------------------------------------- PE row
  llr_t    pe_a [N/2], pe_b [N/2], pe_c [N/2], pe_d [N/2];
  llr_t    pe_top [N/2], pe_bot [N/2];
  pe_dir_e dir;

  assign dir = r_step ? DIR_R : DIR_L;

  // Pair p of stage col serves nodes i = {p >> col, 0, p[col-1:0]} and i + 2^col.
  always_comb begin
    for (int p = 0; p < N / 2; p++) begin
      int unsigned i, h;
      h = 1 << col;
      i = ((p >> col) << (col + 1)) | (p & (h - 1));
      pe_a[p] = l_right[i];
      pe_b[p] = l_right[i + h];
      pe_c[p] = r_eff[i];
      pe_d[p] = r_eff[i + h];
    end
    for (int n = 0; n < N; n++) begin
      int unsigned p, h;
      h = 1 << col;
      p = ((n >> (col + 1)) << col) | (n & (h - 1));
      pe_mask[n]  = pe_en_col[p];
      pe_wdata[n] = ((n & h) != 0) ? pe_bot[p] : pe_top[p];
    end
  end

  for (genvar g = 0; g < N / 2; g++) begin : g_pe
    xjbp_pe u_pe (
      .dir     (dir),
      .l_top_r (pe_a[g]),
      .l_bot_r (pe_b[g]),
      .r_top_l (pe_c[g]),
      .r_bot_l (pe_d[g]),
      .o_top   (pe_top[g]),
      .o_bot   (pe_bot[g])
    );
  end

  // ---------------------------------------------------------------- early termination
  logic xh [N], uh [N];

  xjbp_et_check #(.N(N)) u_et (
    .r_col  (r_eff),
    .l_col  (l_left),
    .frozen (frozen_q),
    .x_hat  (xh),
    .u_hat  (uh),
    .pass   (et_pass)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done      <= 1'b0;
      converged <= 1'b0;
      iters     <= '0;
      for (int i = 0; i < N; i++) begin
        x_hat[i] <= 1'b0;
        u_hat[i] <= 1'b0;
      end
    end else begin
      done <= ctl_done;
      if (ctl_done) begin
        converged <= ctl_conv;
        iters     <= iter;
        for (int i = 0; i < N; i++) begin
          x_hat[i] <= xh[i];
          u_hat[i] <= uh[i];
        end
      end
    end
  end

endmodule
