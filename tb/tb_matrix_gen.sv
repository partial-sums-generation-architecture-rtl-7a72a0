// tb_matrix_gen: checks the matrix generation unit.
//
// A W=4 instance must reproduce the printed columns c_{i,0..3} of the
// N = 8 example (rows 1000, 1100, 1010, 1111, then 1000 again). An instance
// at the default width must give row (i mod W) of kappa^{(x) log2 W} at every
// step i, where c_{i,k} = 1 exactly when the bits of k are a subset of the
// bits of i (Lucas' theorem for binomial(i,k) mod 2), over more than two
// periods, with idle cycles, and return to row 0 on clear.
module tb_matrix_gen;

  localparam int unsigned WB = 512;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [3:0]    c4;
  logic [WB-1:0] cb;
  int checks = 0, failures = 0;

  matrix_gen #(.W(4)) dut4 (.clk, .rst_n, .clear, .en, .c(c4));
  matrix_gen          dutb (.clk, .rst_n, .clear, .en, .c(cb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WB-1:0] row(input int unsigned i);
    logic [WB-1:0] r;
    for (int unsigned k = 0; k < WB; k++) r[k] = ((k & ~(i % WB)) == 0);
    return r;
  endfunction

  // Printed columns c_{i,0}..c_{i,3} for steps 1..5 (LSB = c_{i,0}).
  logic [3:0] fig [5] = '{4'b0001, 4'b0011, 4'b0101, 4'b1111, 4'b0001};

  initial begin
    int unsigned step;
    @(negedge clk) rst_n = 1'b1;
    for (int s = 0; s < 5; s++) begin
      checks++;
      if (c4 !== fig[s]) begin
        failures++;
        $display("FAIL fig row %0d: got %b want %b", s + 1, c4, fig[s]);
      end
      en = 1'b1;
      @(negedge clk);
      en = 1'b0;
    end
    // Default width against the closed form.
    clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    step = 0;
    while (step < 2 * WB + 37) begin
      checks++;
      if (cb !== row(step)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d", step);
      end
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) step++;
    end
    en = 1'b0;
    clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    checks++;
    if (cb !== row(0) || c4 !== 4'b0001) begin
      failures++;
      $display("FAIL clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
