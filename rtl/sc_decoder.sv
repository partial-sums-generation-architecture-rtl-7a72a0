// sc_decoder: line successive cancellation decoder around the
// shift-register partial sums unit.
//
// The decoder has the three units named in the literature: a processing
// unit of N/2 PEs (f and g functions), a memory unit of LLR register banks,
// and the partial sums unit, here the shift-register SR-PSU of width N/2
// whose bit R_p is wired directly to PE p. A controller walks the stages in
// SC order (see sc_controller). At stage 0 PE 0 delivers lambda_{i,0}; the
// bit is u_i = 0 if i is frozen, else 0 when lambda_{i,0} > 0 and 1
// otherwise, and it is shifted into the SR-PSU in the same cycle, so the
// partial sums for the next g functions are ready one clock later.
//
// Interface: pulse `start` with the N channel LLRs on `llr_in`
// (llr_in[i] = lambda_i, positive favours 0) and the frozen mask on
// `frozen` (1 = frozen bit); both are captured. Decided bits stream out on
// `u_valid`/`u_bit`/`u_idx`, and `u_hat` holds the whole estimate when
// `done` pulses, 2N-1 cycles after start. Output ordering, the captured
// frozen mask and the handshake are this design's choices.
module sc_decoder
  import polar_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  llr_t                 llr_in [N],
  input  logic [N-1:0]         frozen,
  output logic                 busy,
  output logic                 done,
  output logic                 u_valid,
  output logic                 u_bit,
  output logic [$clog2(N)-1:0] u_idx,
  output logic [N-1:0]         u_hat
);

  localparam int unsigned NS = $clog2(N);
  localparam int unsigned P  = N / 2;

  logic          load, psu_clear, sel_g, mu_we, decide;
  logic [NS-1:0] stage, bit_idx;
  logic [P-1:0]  psum;
  logic [N-1:0]  frozen_q;
  llr_t          pe_a [P];
  llr_t          pe_b [P];
  llr_t          pe_y [P];
  logic          u_dec;

  sc_controller #(.N(N)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .load     (load),
    .psu_clear(psu_clear),
    .busy     (busy),
    .stage    (stage),
    .sel_g    (sel_g),
    .bit_idx  (bit_idx),
    .mu_we    (mu_we),
    .decide   (decide),
    .done     (done)
  );

  memory_unit #(.N(N)) u_mu (
    .clk   (clk),
    .load  (load),
    .llr_in(llr_in),
    .stage (stage),
    .we    (mu_we),
    .wdata (pe_y),
    .a     (pe_a),
    .b     (pe_b)
  );

  processing_unit #(.P(P)) u_pu (
    .a    (pe_a),
    .b    (pe_b),
    .psum (psum),
    .sel_g(sel_g),
    .y    (pe_y)
  );

  sr_psu #(.W(P)) u_psu (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(psu_clear),
    .en   (decide),
    .u_hat(u_dec),
    .psum (psum)
  );

  // Hard decision on lambda_{i,0}, forced to 0 on frozen positions.
  assign u_dec   = !frozen_q[bit_idx] && llr_decide(pe_y[0]);
  assign u_valid = decide;
  assign u_bit   = u_dec;
  assign u_idx   = bit_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frozen_q <= '0;
      u_hat    <= '0;
    end else if (load) begin
      frozen_q <= frozen;
    end else if (decide) begin
      u_hat[bit_idx] <= u_dec;
    end
  end

endmodule
