// polar_encoder: sequential polar encoder built from the shift-register
// partial sums structure.
//
// The extended information vector U (information bits on the reliable
// positions, frozen positions 0) enters one bit per clock, u_0 first. The
// bits go through an N-bit sr_psu whose matrix generation unit produces the
// rows of kappa^{(x) n}; after N shifts register bit R_k holds x_{N-1-k} of
// X = U * kappa^{(x) n}. The structure costs N flip-flops for R, N for the
// matrix generation unit, N AND and N-1 XOR gates. Both registers come back
// to their start state by themselves after N bits, so codewords can follow
// each other with no gap.
//
// Interface: `u_valid`/`u` present one bit per cycle. `x_valid` rises at the
// edge that takes in bit u_{N-1} and stays high until the first bit of the
// next word is taken; `x[i]` is codeword bit x_i while it is high. `clear`
// (synchronous) restarts a word. The bit counter, x_valid and clear are this
// design's own framing; the paper gives only the register structure.
module polar_encoder #(
  parameter int unsigned N = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         u_valid,
  input  logic         u,
  output logic         x_valid,
  output logic [N-1:0] x
);

  localparam int unsigned NB = $clog2(N);

  logic [N-1:0]  r;
  logic [NB-1:0] cnt_q;

  sr_psu #(.W(N)) u_sr (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(clear),
    .en   (u_valid),
    .u_hat(u),
    .psum (r)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      x_valid <= 1'b0;
    end else if (clear) begin
      cnt_q   <= '0;
      x_valid <= 1'b0;
    end else if (u_valid) begin
      cnt_q   <= cnt_q + 1'b1;          // wraps after N bits
      x_valid <= (cnt_q == NB'(N - 1));
    end
  end

  // R_k holds x_{N-1-k}: reverse the register into natural order.
  always_comb
    for (int unsigned k = 0; k < N; k++)
      x[k] = r[N-1-k];

endmodule
