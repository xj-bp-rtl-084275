// xjbp_ctrl: round-trip scheduler of the XJ-BP decoder.
//
// One iteration is a round trip through the factor graph (paper Sec. IV-A):
// first the L messages are refreshed stage by stage from the codeword column
// towards the leaves (stage M-1 down to 0, one stage per clock), then the R
// messages are refreshed back from the leaves to the codeword column (stage 0
// up to M-1), and one more clock applies the early-termination test on the
// codeword column. Decoding ends when the test passes or after MAX_ITER
// iterations (the paper's limit is 60).
//
// Timing: `start` is taken in PH_IDLE only; that clock is the load clock
// (`load` high: the channel LLRs are written, the R store is cleared). Each
// iteration then takes 2*M+1 clocks; `done` is high for the one PH_CHECK clock
// that ends the decoding, so start-to-done is 1 + iters*(2*M+1) clocks. `col` is the left
// column of the stage being processed (M during PH_CHECK), `iter` the number
// of the current iteration counted from 1. The state encoding and handshake
// are choices of this design.
module xjbp_ctrl
  import xjbp_pkg::*;
#(
  parameter int unsigned N        = 1024,
  parameter int unsigned MAX_ITER = 60,
  localparam int unsigned M       = $clog2(N),
  localparam int unsigned CW      = $clog2(M + 1),
  localparam int unsigned IW      = $clog2(MAX_ITER + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          et_pass,
  output logic          busy,
  output logic          load,
  output logic          l_step,
  output logic          r_step,
  output logic          check,
  output logic [CW-1:0] col,
  output logic [IW-1:0] iter,
  output logic          done,
  output logic          converged
);

  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_L     = 3'd2,
    PH_R     = 3'd3,
    PH_CHECK = 3'd4
  } phase_e;

  phase_e        ph;
  logic [CW-1:0] stage;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph    <= PH_IDLE;
      stage <= '0;
      iter  <= '0;
    end else begin
      unique case (ph)
        PH_IDLE: if (start) begin
          ph    <= PH_L;
          stage <= CW'(M - 1);
          iter  <= IW'(1);
        end
        PH_L: begin
          if (stage == '0) ph <= PH_R;
          else             stage <= stage - 1'b1;
        end
        PH_R: begin
          if (stage == CW'(M - 1)) ph <= PH_CHECK;
          else                     stage <= stage + 1'b1;
        end
        PH_CHECK: begin
          if (et_pass || iter == IW'(MAX_ITER)) begin
            ph <= PH_IDLE;
          end else begin
            ph    <= PH_L;
            stage <= CW'(M - 1);
            iter  <= iter + 1'b1;
          end
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (ph != PH_IDLE);
    load      = (ph == PH_IDLE) && start;
    l_step    = (ph == PH_L);
    r_step    = (ph == PH_R);
    check     = (ph == PH_CHECK);
    col       = check ? CW'(M) : stage;
    done      = check && (et_pass || iter == IW'(MAX_ITER));
    converged = done && et_pass;
  end

  // The stage index never leaves the factor graph and the iteration count
  // never passes its limit.
  a_stage_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  (l_step || r_step) |-> (stage < CW'(M)))
    else $error("stage index out of range");
  a_iter_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy |-> (iter >= 1 && iter <= IW'(MAX_ITER)))
    else $error("iteration count out of range");

endmodule
