// tb_xjbp_msg_mem: random test of the two-port message store (N = 8 words per
// column, 4 columns) against a shadow array: masked writes on both ports,
// port 1 winning a collision, the synchronous clear and both read ports.
module tb_xjbp_msg_mem;
  import xjbp_pkg::*;

  localparam int N = 8, COLS = 4, CW = 2;

  int checks = 0, failures = 0;
  logic clk = 1'b0, clear = 1'b0, we0 = 1'b0, we1 = 1'b0;
  logic [CW-1:0] rd_col_a = '0, rd_col_b = '0, wr_col0 = '0, wr_col1 = '0;
  llr_t rd_a [N], rd_b [N], wr_data0 [N], wr_data1 [N];
  logic wr_mask0 [N], wr_mask1 [N];
  int shadow [COLS][N];

  xjbp_msg_mem #(.N(N), .COLS(COLS)) dut (
    .clk(clk), .clear(clear), .rd_col_a(rd_col_a), .rd_a(rd_a),
    .rd_col_b(rd_col_b), .rd_b(rd_b), .we0(we0), .wr_col0(wr_col0),
    .wr_mask0(wr_mask0), .wr_data0(wr_data0), .we1(we1), .wr_col1(wr_col1),
    .wr_mask1(wr_mask1), .wr_data1(wr_data1));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      wr_mask0[i] = 1'b0; wr_mask1[i] = 1'b0; wr_data0[i] = '0; wr_data1[i] = '0;
    end
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int c = 0; c < COLS; c++) for (int i = 0; i < N; i++) shadow[c][i] = 0;
    for (int t = 0; t < 2000; t++) begin
      we0 = 1'($urandom_range(0, 1));
      we1 = 1'($urandom_range(0, 1));
      clear = ($urandom_range(0, 30) == 0);
      wr_col0 = CW'($urandom_range(0, COLS - 1));
      wr_col1 = (t % 3 == 0) ? wr_col0 : CW'($urandom_range(0, COLS - 1));
      for (int i = 0; i < N; i++) begin
        wr_mask0[i] = 1'($urandom_range(0, 1));
        wr_mask1[i] = 1'($urandom_range(0, 1));
        wr_data0[i] = llr_t'(int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX);
        wr_data1[i] = llr_t'(int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX);
      end
      @(negedge clk);
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < N; i++) begin
          if (we1 && int'(wr_col1) == c && wr_mask1[i]) shadow[c][i] = int'(wr_data1[i]);
          else if (we0 && int'(wr_col0) == c && wr_mask0[i]) shadow[c][i] = int'(wr_data0[i]);
          else if (clear) shadow[c][i] = 0;
        end
      we0 = 1'b0; we1 = 1'b0; clear = 1'b0;
      rd_col_a = CW'($urandom_range(0, COLS - 1));
      rd_col_b = CW'($urandom_range(0, COLS - 1));
      #1;
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (int'(rd_a[i]) != shadow[rd_col_a][i]) failures++;
        if (int'(rd_b[i]) != shadow[rd_col_b][i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
