// tb_processing_element: exhaustive check of one PE.
//
// Every pair of LLRs in the symmetric range, both partial sum values and
// both functions are applied; the result must equal the integer min-sum f
// or g of the reference model, saturated to +-31.
module tb_processing_element;
  import polar_pkg::*;
  import tb_polar_ref_pkg::*;

  llr_t a, b, y;
  logic s, sel_g;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  processing_element dut (.a, .b, .s, .sel_g, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = -LMAX; ia <= LMAX; ia++)
      for (int ib = -LMAX; ib <= LMAX; ib++)
        for (int m = 0; m < 4; m++) begin
          automatic int want;
          a = llr_t'(ia);
          b = llr_t'(ib);
          s = m[0];
          sel_g = m[1];
          #1;
          want = sel_g ? ref_g(ia, ib, s) : ref_f(ia, ib);
          checks++;
          if (int'(y) != want) begin
            failures++;
            if (failures < 10)
              $display("FAIL a=%0d b=%0d s=%0d g=%0d: y=%0d want %0d", ia, ib, s, sel_g, y, want);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
