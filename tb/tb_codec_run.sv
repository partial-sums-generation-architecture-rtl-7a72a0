// tb_codec_run: encode/channel/decode loop for one code length, used by
// tb_sc_workloads.
//
// Runs WORDS words per Eb/N0 point for the 7 points 0, 0.5, ..., 3 dB
// through a polar_codec of length N (rate 1/2): hardware encoder checked
// against the reference encoder, BPSK/AWGN channel, hardware decoder
// checked bit for bit against the reference SC decoder and for its 2N-1
// cycle latency. Reports its counts on the output ports and raises
// `finished` at the end.
module tb_codec_run #(
  parameter int unsigned N     = 16,
  parameter int          WORDS = 10
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   words,
  output int   word_errors,
  output logic finished
);
  import polar_pkg::*;
  import tb_polar_ref_pkg::*;

  localparam int unsigned NS = $clog2(N);

  logic rst_n = 1'b0;
  logic enc_u_valid = 1'b0, enc_u = 1'b0, enc_x_valid;
  logic [N-1:0] enc_x;
  logic dec_start = 1'b0, dec_busy, dec_done, dec_u_valid, dec_u_bit;
  llr_t dec_llr [N];
  logic [N-1:0] dec_frozen, dec_u_hat;
  logic [NS-1:0] dec_u_idx;

  polar_codec #(.N(N)) dut (
    .clk, .rst_n, .enc_clear(1'b0), .enc_u_valid, .enc_u, .enc_x_valid, .enc_x,
    .dec_start, .dec_llr, .dec_frozen, .dec_busy, .dec_done, .dec_u_valid,
    .dec_u_bit, .dec_u_idx, .dec_u_hat);

  function automatic logic [N-1:0] pack(input bit v[]);
    logic [N-1:0] r;
    for (int i = 0; i < N; i++) r[i] = v[i];
    return r;
  endfunction

  initial begin
    bit fz [];
    bit u [];
    bit xr [];
    bit uref [];
    int ch [];
    checks = 0;
    failures = 0;
    words = 0;
    word_errors = 0;
    finished = 1'b0;
    ref_frozen(NS, N / 2, fz);
    for (int i = 0; i < N; i++) dec_frozen[i] = fz[i];
    u = new[N];
    ch = new[N];
    @(negedge clk) rst_n = 1'b1;
    for (int p = 0; p < 7; p++) begin
      for (int w = 0; w < WORDS; w++) begin
        automatic int cyc = 1;
        automatic bit wrong = 0;
        for (int i = 0; i < N; i++) u[i] = fz[i] ? 1'b0 : 1'($urandom);
        ref_encode(NS, u, xr);
        for (int i = 0; i < N; i++) begin
          enc_u_valid = 1'b1;
          enc_u = u[i];
          @(negedge clk);
        end
        enc_u_valid = 1'b0;
        checks++;
        if (!enc_x_valid || enc_x !== pack(xr)) begin
          failures++;
          $display("FAIL N=%0d encoder word %0d", N, words);
        end
        for (int i = 0; i < N; i++) begin
          ch[i] = awgn_llr(enc_x[i], 0.5 * p, 0.5);
          dec_llr[i] = llr_t'(ch[i]);
        end
        ref_sc_decode(NS, ch, fz, uref);
        dec_start = 1'b1;
        @(negedge clk) dec_start = 1'b0;
        while (!dec_done) begin
          @(negedge clk);
          cyc++;
        end
        checks += 2;
        if (cyc != 2 * N - 1) failures++;
        if (dec_u_hat !== pack(uref)) begin
          failures++;
          $display("FAIL N=%0d decoder word %0d", N, words);
        end
        if (dec_u_hat !== pack(u)) word_errors++;
        words++;
      end
    end
    finished = 1'b1;
  end

endmodule
