// processing_unit: the P processing elements of a line SC decoder.
//
// P = N/2 PEs work in parallel on one stage of the factor graph: in each
// cycle all of them compute f, or all of them compute g (`sel_g`), because
// every node of a stage block is of the same kind. PE p takes its partial sum
// straight from bit R_p of the shift-register partial sums unit (`psum[p]`),
// the fixed one-to-one connection the shift-register structure allows.
// Combinational; at stage j only PEs 0..2^j-1 produce used results.
module processing_unit
  import polar_pkg::*;
#(
  parameter int unsigned P = 512
) (
  input  llr_t         a    [P],
  input  llr_t         b    [P],
  input  logic [P-1:0] psum,
  input  logic         sel_g,
  output llr_t         y    [P]
);

  for (genvar p = 0; p < P; p++) begin : g_pe
    processing_element u_pe (
      .a    (a[p]),
      .b    (b[p]),
      .s    (psum[p]),
      .sel_g(sel_g),
      .y    (y[p])
    );
  end

endmodule
