// tb_polar_codec: end-to-end test of the encoder and decoder at the default
// code length N = 1024 (rate 1/2, frozen set from BEC Bhattacharyya
// parameters).
//
// For each of 7 Eb/N0 points from 0 dB to 3 dB in 0.5 dB steps, words are
// encoded by the hardware encoder (bit-serial, back to back), checked
// against the reference encoder, sent over BPSK/AWGN, and decoded by the
// hardware decoder, whose estimate must equal the reference SC decoder bit
// for bit with a start-to-done latency of 2N-1 cycles. Decoding of one word
// overlaps the encoding of the next. The testbench counts each mechanism of
// the design and fails if one never happens: f stages, g stages, g with a
// partial sum of 1, frozen and information decisions, partial sums unit
// shifts and clears, back-to-back encoder words, encoder/decoder overlap.
module tb_polar_codec;
  import polar_pkg::*;
  import tb_polar_ref_pkg::*;

  localparam int unsigned N     = 1024;
  localparam int unsigned NS    = $clog2(N);
  localparam int          WORDS = 2;        // per Eb/N0 point

  logic clk = 1'b0, rst_n = 1'b0;
  logic enc_clear = 1'b0, enc_u_valid = 1'b0, enc_u = 1'b0, enc_x_valid;
  logic [N-1:0] enc_x;
  logic dec_start = 1'b0, dec_busy, dec_done, dec_u_valid, dec_u_bit;
  llr_t dec_llr [N];
  logic [N-1:0] dec_frozen, dec_u_hat;
  logic [NS-1:0] dec_u_idx;
  int checks = 0, failures = 0;

  polar_codec dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, sampled from the decoder's internal control.
  int n_f = 0, n_g = 0, n_g_s1 = 0, n_frozen = 0, n_info = 0, n_shift = 0, n_clear = 0;
  int n_b2b = 0, n_overlap = 0;
  always @(posedge clk) begin
    if (dut.u_decoder.busy && dut.u_decoder.sel_g)  n_g++;
    if (dut.u_decoder.busy && !dut.u_decoder.sel_g) n_f++;
    if (dut.u_decoder.busy && dut.u_decoder.sel_g && |dut.u_decoder.psum) n_g_s1++;
    if (dut.u_decoder.decide) begin
      n_shift++;
      if (dut.u_decoder.frozen_q[dut.u_decoder.bit_idx]) n_frozen++;
      else n_info++;
    end
    if (dut.u_decoder.psu_clear) n_clear++;
    if (dec_busy && enc_u_valid) n_overlap++;
  end

  bit fz [];

  // Encode one word through the hardware encoder, back to back with the
  // previous one when `b2b`, and check it.
  task automatic encode(input bit u[], output bit x[]);
    bit xr [];
    ref_encode(NS, u, xr);
    for (int i = 0; i < N; i++) begin
      enc_u_valid = 1'b1;
      enc_u = u[i];
      @(negedge clk);
    end
    enc_u_valid = 1'b0;
    checks++;
    if (!enc_x_valid) begin
      failures++;
      $display("FAIL encoder x_valid");
    end
    x = new[N];
    for (int i = 0; i < N; i++) begin
      x[i] = enc_x[i];
      checks++;
      if (enc_x[i] !== xr[i]) begin
        failures++;
        if (failures < 10) $display("FAIL encoder bit %0d", i);
      end
    end
  endtask

  task automatic decode(input int ch[], input bit u[], output bit wrong);
    bit uref [];
    int cyc;
    ref_sc_decode(NS, ch, fz, uref);
    for (int i = 0; i < N; i++) dec_llr[i] = llr_t'(ch[i]);
    dec_start = 1'b1;
    @(negedge clk) dec_start = 1'b0;
    cyc = 1;
    while (!dec_done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 2 * N - 1) begin
      failures++;
      $display("FAIL decoder latency %0d", cyc);
    end
    wrong = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (dec_u_hat[i] !== uref[i]) begin
        failures++;
        if (failures < 10) $display("FAIL decoder bit %0d", i);
      end
      if (dec_u_hat[i] !== u[i]) wrong = 1;
    end
  endtask

  initial begin
    bit u [];
    bit x [];
    bit un [];
    bit xn [];
    int ch [];
    int errs;
    bit wrong;
    ref_frozen(NS, N / 2, fz);
    for (int i = 0; i < N; i++) dec_frozen[i] = fz[i];
    u = new[N];
    ch = new[N];
    @(negedge clk) rst_n = 1'b1;
    // First word encoded alone.
    for (int i = 0; i < N; i++) u[i] = fz[i] ? 1'b0 : 1'($urandom);
    encode(u, x);
    for (int p = 0; p < 7; p++) begin
      automatic real ebn0 = 0.5 * p;
      errs = 0;
      for (int w = 0; w < WORDS; w++) begin
        un = new[N];
        for (int i = 0; i < N; i++) begin
          un[i] = fz[i] ? 1'b0 : 1'($urandom);
          ch[i] = awgn_llr(x[i], ebn0, 0.5);
        end
        // Decode this word while the next one is encoded (back to back
        // with the previous word: no idle cycle on the encoder input).
        n_b2b++;
        fork
          decode(ch, u, wrong);
          encode(un, xn);
        join
        if (wrong) errs++;
        u = un;
        x = xn;
      end
      $display("Eb/N0 %.1f dB: %0d of %0d words decoded wrongly", ebn0, errs, WORDS);
    end
    $display("mechanisms: f=%0d g=%0d g_with_s1=%0d frozen=%0d info=%0d shifts=%0d clears=%0d b2b=%0d overlap=%0d",
             n_f, n_g, n_g_s1, n_frozen, n_info, n_shift, n_clear, n_b2b, n_overlap);
    checks += 9;
    if (n_f == 0) failures++;
    if (n_g == 0) failures++;
    if (n_g_s1 == 0) failures++;
    if (n_frozen == 0) failures++;
    if (n_info == 0) failures++;
    if (n_shift != 7 * WORDS * N) failures++;
    if (n_clear != 7 * WORDS) failures++;
    if (n_b2b == 0) failures++;
    if (n_overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
