// sr_psu: shift-register partial sums unit (SR-PSU).
//
// A W-bit register R_0..R_{W-1}. At each step the newly decided bit u is
// shifted in:
//   R_0 <= u AND c_{i,0}
//   R_k <= R_{k-1} XOR (u AND c_{i,k})    for k > 0
// with the control row c_i supplied by the matrix generation unit
// (matrix_gen). In an SC decoder of code length N the width is W = N/2. After
// step t (t bits decided) with j = number of trailing zeros of t, the partial
// sums S_{t-2^j+m, j} needed by the g functions of stage j sit in
// R_{2^j-1-m}, m = 0..2^j-1, so processing element p always reads R_p and no
// routing multiplexers are needed. With W = N the same structure is a
// sequential encoder: after N steps R_k = x_{N-1-k}.
//
// Interface: `en` shifts `u_hat` in at the clock edge; `clear` (synchronous,
// priority) and the asynchronous active-low reset empty R and return the
// matrix generation unit to row 0. `psum` is the register, valid from the
// edge after each shift. The AND on R_0 is kept for the regular structure
// even though c_{i,0} is always 1. Clear and reset are this design's choices.
module sr_psu #(
  parameter int unsigned W = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic         u_hat,
  output logic [W-1:0] psum
);

  logic [W-1:0] c;
  logic [W-1:0] r_q;
  logic [W-1:0] r_d;

  matrix_gen #(.W(W)) u_mgu (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(clear),
    .en   (en),
    .c    (c)
  );

  always_comb begin
    r_d[0] = u_hat & c[0];
    for (int unsigned k = 1; k < W; k++)
      r_d[k] = r_q[k-1] ^ (u_hat & c[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     r_q <= '0;
    else if (clear) r_q <= '0;
    else if (en)    r_q <= r_d;
  end

  assign psum = r_q;

endmodule
