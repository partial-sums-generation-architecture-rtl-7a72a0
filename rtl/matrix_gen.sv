// matrix_gen: matrix generation unit of the shift-register partial sums unit.
//
// Produces, one row per step, the control matrix C = [K; K] with
// K = kappa^{(x) log2(W)} (kappa = [1 0; 1 1]), so row i of the output is row
// (i mod W) of K. It is the LFSR-like register of the paper: M_0 is loaded with
// 1 and every other M_k with M_k XOR M_{k-1}. Row i of K is the binary
// Pascal row, c_{i,k} = binomial(i,k) mod 2; after W steps the register wraps
// back to row 0 by itself, so C is produced with no counter.
//
// Interface: `c[k]` is the control bit c_{i,k} of the current step i. `en`
// advances to the next row at the clock edge. `clear` (synchronous, has
// priority) and the active-low asynchronous reset load row 0 = 1,0,...,0.
// The reset value and the clear input are this design's choices; the paper
// does not state how the register is initialised.
module matrix_gen #(
  parameter int unsigned W = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [W-1:0] c
);

  localparam logic [W-1:0] ROW0 = W'(1);

  logic [W-1:0] m_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     m_q <= ROW0;
    else if (clear) m_q <= ROW0;
    else if (en)    m_q <= {m_q[W-1:1] ^ m_q[W-2:0], 1'b1};
  end

  assign c = m_q;

endmodule
