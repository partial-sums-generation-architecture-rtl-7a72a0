// sc_controller: schedule of the line successive cancellation decoder.
//
// Bits u_0..u_{N-1} are estimated in order. Before bit i is decided the
// stages j = J(i) down to 0 are recomputed, one stage per clock, where
// J(0) = n-1 and J(i) = min(ctz(i), n-1) otherwise (ctz: trailing zeros).
// Stage j computes the f function when bit j of i is 0 (B(i,j) = 0) and the
// g function when it is 1. At stage 0 the bit is decided and shifted into
// the partial sums unit. A code word takes
//   sum_i (J(i) + 1) = 2N - 2 clock cycles
// of computation; one more cycle loads the channel LLRs.
//
// Interface: `start` (ignored while busy) loads the LLRs (`load`) and clears
// the partial sums unit (`psu_clear`) in the same cycle. While `busy`,
// `stage`, `sel_g` and `bit_idx` describe the current cycle; `mu_we` writes
// the PE results of stages j >= 1, `decide` marks the stage-0 cycle in which
// u_{bit_idx} is decided. `done` pulses for one cycle after the last bit.
// The paper describes the SC order and the f/g rule; the one-stage-per-cycle
// timing and this handshake are this design's choices.
module sc_controller
  import polar_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 load,
  output logic                 psu_clear,
  output logic                 busy,
  output logic [$clog2(N)-1:0] stage,
  output logic                 sel_g,
  output logic [$clog2(N)-1:0] bit_idx,
  output logic                 mu_we,
  output logic                 decide,
  output logic                 done
);

  localparam int unsigned NS = $clog2(N);

  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t        state_q;
  logic [NS-1:0] i_q, j_q;
  logic [NS-1:0] i_next;

  assign busy      = (state_q == S_RUN);
  assign load      = (state_q == S_IDLE) && start;
  assign psu_clear = load;
  assign stage     = j_q;
  assign bit_idx   = i_q;
  assign sel_g     = i_q[j_q[$clog2(NS)-1:0]];  // bit j of i: B(i,j)
  assign mu_we     = busy && (j_q != '0);
  assign decide    = busy && (j_q == '0);
  assign i_next    = i_q + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      i_q     <= '0;
      j_q     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_RUN;
          i_q     <= '0;
          j_q     <= NS'(NS - 1);
        end
        S_RUN: begin
          if (j_q != '0) begin
            j_q <= j_q - 1'b1;
          end else if (i_q == NS'(N - 1)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            i_q <= i_next;
            j_q <= NS'(ctz_lim(32'(i_next), NS - 1));
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rules: a word is loaded only while idle, decisions happen only
  // while busy, and done follows the return to idle. (rst_n is also used
  // here to mask the checks while the flops are being reset.)
  a_load_idle:  assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);
  a_decide_run: assert property (@(posedge clk) disable iff (!rst_n) decide |-> busy);
  a_done_idle:  assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy);
  a_stage_rng:  assert property (@(posedge clk) disable iff (!rst_n) busy |-> (j_q < NS'(NS)));

endmodule
