// xjbp_et_check: codeword estimate and early-termination test.
//
// LLR_x(i) = R(i,m+1) + L(i,m+1) (paper Eq. 4); the hard decision is x_i = 0
// when LLR_x(i) > 0 and 1 otherwise (paper Eq. 10). The paper stops decoding
// once x H = 0 (Eq. 9), H being a parity-check matrix of the code. This block
// makes the same test without storing H: the transform G = F^(xm) is its own
// inverse over GF(2), so x is a codeword exactly when u = x G has zeros at
// every frozen position. u is formed by the m butterfly stages of the polar
// encoder (stage s: u[i] ^= u[i+2^s] in the upper half of every 2^(s+1) block,
// as in the factor graph), and it is also the decoded message. Purely
// combinational.
module xjbp_et_check
  import xjbp_pkg::*;
#(
  parameter int unsigned N  = 1024,
  localparam int unsigned M = $clog2(N)
) (
  input  llr_t r_col  [N],   // R(i,m+1)
  input  llr_t l_col  [N],   // L(i,m+1), the channel LLRs
  input  logic frozen [N],
  output logic x_hat  [N],
  output logic u_hat  [N],
  output logic pass
);

  logic v [M+1][N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      llr_t llr_x;
      llr_x      = add_llr(r_col[i], l_col[i]);
      x_hat[i]   = !(llr_x > 0);
      v[0][i]    = x_hat[i];
    end
    for (int s = 0; s < M; s++) begin
      for (int i = 0; i < N; i++) begin
        if (((i >> s) & 1) == 0) v[s+1][i] = v[s][i] ^ v[s][i + (1 << s)];
        else                     v[s+1][i] = v[s][i];
      end
    end
    pass = 1'b1;
    for (int i = 0; i < N; i++) begin
      u_hat[i] = v[M][i];
      if (frozen[i] && v[M][i]) pass = 1'b0;
    end
  end

endmodule
