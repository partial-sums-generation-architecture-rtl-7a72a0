// tb_sc_workloads: the functional verification campaign of the design at
// the code lengths N = 16 ... 512, 7 Eb/N0 points from 0 to 3 dB, with
// 2520 words in all (420 per length, 60 per point). Each length runs in its
// own tb_codec_run; every word must be encoded correctly and decoded
// exactly as the reference SC decoder does. The word error counts at each
// length are printed for information.
module tb_sc_workloads;

  localparam int NL = 6;
  localparam int WORDS = 60;

  logic clk = 1'b0;
  int   c [NL], f [NL], w [NL], e [NL];
  logic fin [NL];
  int   checks, failures;

  always #5 clk = ~clk;

  tb_codec_run #(.N(16),  .WORDS(WORDS)) r16  (.clk, .checks(c[0]), .failures(f[0]), .words(w[0]), .word_errors(e[0]), .finished(fin[0]));
  tb_codec_run #(.N(32),  .WORDS(WORDS)) r32  (.clk, .checks(c[1]), .failures(f[1]), .words(w[1]), .word_errors(e[1]), .finished(fin[1]));
  tb_codec_run #(.N(64),  .WORDS(WORDS)) r64  (.clk, .checks(c[2]), .failures(f[2]), .words(w[2]), .word_errors(e[2]), .finished(fin[2]));
  tb_codec_run #(.N(128), .WORDS(WORDS)) r128 (.clk, .checks(c[3]), .failures(f[3]), .words(w[3]), .word_errors(e[3]), .finished(fin[3]));
  tb_codec_run #(.N(256), .WORDS(WORDS)) r256 (.clk, .checks(c[4]), .failures(f[4]), .words(w[4]), .word_errors(e[4]), .finished(fin[4]));
  tb_codec_run #(.N(512), .WORDS(WORDS)) r512 (.clk, .checks(c[5]), .failures(f[5]), .words(w[5]), .word_errors(e[5]), .finished(fin[5]));

  initial begin
    repeat (3000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    automatic int total = 0;
    @(posedge clk);
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    checks = 0;
    failures = 0;
    for (int i = 0; i < NL; i++) begin
      $display("N=%0d: %0d words, %0d decoded wrongly (channel), %0d failures",
               16 << i, w[i], e[i], f[i]);
      checks += c[i];
      failures += f[i];
      total += w[i];
    end
    checks++;
    if (total != NL * 7 * WORDS) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
