// tb_sc_decoder: checks the line SC decoder at the default N = 1024.
//
// Code words of a rate-1/2 code (frozen set from BEC Bhattacharyya
// parameters) are sent over BPSK/AWGN at several Eb/N0, and some words are
// replaced by uniformly random LLRs to drive the saturation. The decoder's
// estimate must equal the reference SC decoder bit for bit, the streamed
// bits must come in index order and agree with u_hat, frozen positions must
// be 0, and done must pulse 2N-1 cycles after start (one load cycle plus
// 2N-2 stage cycles).
module tb_sc_decoder;
  import polar_pkg::*;
  import tb_polar_ref_pkg::*;

  localparam int unsigned N  = 1024;
  localparam int unsigned NS = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  llr_t llr_in [N];
  logic [N-1:0] frozen;
  logic busy, done, u_valid, u_bit;
  logic [NS-1:0] u_idx;
  logic [N-1:0] u_hat;
  int checks = 0, failures = 0;
  int stream_idx = 0;
  logic [N-1:0] streamed;

  sc_decoder dut (.clk, .rst_n, .start, .llr_in, .frozen, .busy, .done,
                  .u_valid, .u_bit, .u_idx, .u_hat);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (u_valid) begin
      checks++;
      if (u_idx != NS'(stream_idx)) begin
        failures++;
        $display("FAIL stream order %0d", stream_idx);
      end
      streamed[u_idx] <= u_bit;
      stream_idx <= stream_idx + 1;
    end

  initial begin
    bit fz [];
    bit u [];
    bit x [];
    bit uref [];
    int ch [];
    automatic int frame_err = 0;
    automatic real snr [6] = '{0.0, 1.0, 2.0, 3.0, 4.0, -1.0};
    ref_frozen(NS, N / 2, fz);
    for (int i = 0; i < N; i++) frozen[i] = fz[i];
    u = new[N];
    ch = new[N];
    @(negedge clk) rst_n = 1'b1;
    for (int w = 0; w < 6; w++) begin
      int cyc;
      for (int i = 0; i < N; i++) u[i] = fz[i] ? 1'b0 : 1'($urandom);
      ref_encode(NS, u, x);
      for (int i = 0; i < N; i++) begin
        ch[i] = (snr[w] < 0.0) ? $urandom_range(0, 62) - 31 : awgn_llr(x[i], snr[w], 0.5);
        llr_in[i] = llr_t'(ch[i]);
      end
      ref_sc_decode(NS, ch, fz, uref);
      stream_idx = 0;
      start = 1'b1;
      @(negedge clk) start = 1'b0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != 2 * N - 1) begin
        failures++;
        $display("FAIL latency %0d", cyc);
      end
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (u_hat[i] !== uref[i]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d bit %0d", w, i);
        end
        if (streamed[i] !== u_hat[i] || (fz[i] && u_hat[i])) failures++;
      end
      checks++;
      if (stream_idx != N) failures++;
      for (int i = 0; i < N; i++)
        if (u_hat[i] !== u[i]) begin
          frame_err++;
          break;
        end
      @(negedge clk);
    end
    $display("frames with a wrong estimate (channel errors, not failures): %0d of 6", frame_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
