// polar_codec: polar code encoder and successive cancellation decoder built
// on the shift-register partial sums structure.
//
// The same AND/XOR shift register serves both directions. As an N-bit
// register it is the sequential encoder (polar_encoder): the extended
// information vector U goes in serially and the code word X = U kappa^{(x) n}
// is in the register after N clocks. As an N/2-bit register it is the partial
// sums unit of the line SC decoder (sc_decoder), which estimates U from the N
// channel LLRs in 2N-2 cycles of computation. The two paths are independent
// and can run at the same time; they share only clock and reset.
//
// Interface: encoder side `enc_*` as in polar_encoder, decoder side `dec_*`
// as in sc_decoder. Putting both in one top is this design's packaging.
module polar_codec
  import polar_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // encoder
  input  logic                 enc_clear,
  input  logic                 enc_u_valid,
  input  logic                 enc_u,
  output logic                 enc_x_valid,
  output logic [N-1:0]         enc_x,
  // decoder
  input  logic                 dec_start,
  input  llr_t                 dec_llr [N],
  input  logic [N-1:0]         dec_frozen,
  output logic                 dec_busy,
  output logic                 dec_done,
  output logic                 dec_u_valid,
  output logic                 dec_u_bit,
  output logic [$clog2(N)-1:0] dec_u_idx,
  output logic [N-1:0]         dec_u_hat
);

  polar_encoder #(.N(N)) u_encoder (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (enc_clear),
    .u_valid(enc_u_valid),
    .u      (enc_u),
    .x_valid(enc_x_valid),
    .x      (enc_x)
  );

  sc_decoder #(.N(N)) u_decoder (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (dec_start),
    .llr_in (dec_llr),
    .frozen (dec_frozen),
    .busy   (dec_busy),
    .done   (dec_done),
    .u_valid(dec_u_valid),
    .u_bit  (dec_u_bit),
    .u_idx  (dec_u_idx),
    .u_hat  (dec_u_hat)
  );

endmodule
