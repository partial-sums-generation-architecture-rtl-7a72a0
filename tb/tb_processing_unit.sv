// tb_processing_unit: checks the array of PEs at the default width (512).
//
// Random LLR vectors, partial sums and f/g selection; every PE p must give
// f(a_p, b_p) or g(a_p, b_p, psum_p) of the reference model, which shows
// that each PE takes its own partial sum bit.
module tb_processing_unit;
  import polar_pkg::*;
  import tb_polar_ref_pkg::*;

  localparam int unsigned P = 512;

  llr_t a [P];
  llr_t b [P];
  llr_t y [P];
  logic [P-1:0] psum;
  logic sel_g;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  processing_unit dut (.a, .b, .psum, .sel_g, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 200; v++) begin
      for (int p = 0; p < P; p++) begin
        a[p] = llr_t'($urandom_range(0, 2 * LMAX) - LMAX);
        b[p] = llr_t'($urandom_range(0, 2 * LMAX) - LMAX);
        psum[p] = 1'($urandom);
      end
      sel_g = v[0];
      #1;
      for (int p = 0; p < P; p++) begin
        automatic int want = sel_g ? ref_g(int'(a[p]), int'(b[p]), psum[p])
                                   : ref_f(int'(a[p]), int'(b[p]));
        checks++;
        if (int'(y[p]) != want) begin
          failures++;
          if (failures < 10) $display("FAIL vec %0d pe %0d", v, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
