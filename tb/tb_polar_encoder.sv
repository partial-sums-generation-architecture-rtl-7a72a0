// tb_polar_encoder: checks the sequential polar encoder.
//
// 1. N = 8: all 256 input vectors U, encoded back to back with no idle
//    cycle, must give X = U * G with G the 8x8 matrix kappa^{(x) 3} written
//    out row by row below.
// 2. Default N = 1024: random words, back to back and with random idle
//    cycles, against the butterfly reference encoder. x_valid must rise on
//    the edge that takes bit u_{N-1} (N cycles per word) and fall with the
//    first bit of the next word.
module tb_polar_encoder;
  import tb_polar_ref_pkg::*;

  localparam int unsigned N  = 1024;
  localparam int unsigned NS = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic v8 = 1'b0, u8 = 1'b0, xv8;
  logic vb = 1'b0, ub = 1'b0, xvb;
  logic [7:0]   x8;
  logic [N-1:0] xb;
  int checks = 0, failures = 0;

  polar_encoder #(.N(8)) dut8 (.clk, .rst_n, .clear, .u_valid(v8), .u(u8), .x_valid(xv8), .x(x8));
  polar_encoder          dutb (.clk, .rst_n, .clear, .u_valid(vb), .u(ub), .x_valid(xvb), .x(xb));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // kappa^{(x) 3}, row r as written left to right (column 0 first).
  string G [8] = '{"10000000", "11000000", "10100000", "11110000",
                   "10001000", "11001100", "10101010", "11111111"};

  initial begin
    bit u [];
    bit x [];
    int cyc;
    @(negedge clk) rst_n = 1'b1;
    // Part 1: N = 8 against the printed generator matrix.
    for (int w = 0; w < 256; w++) begin
      for (int t = 0; t < 8; t++) begin
        v8 = 1'b1;
        u8 = w[t];
        @(negedge clk);
        checks++;
        if (xv8 !== (t == 7)) begin
          failures++;
          $display("FAIL x_valid N=8 word %0d bit %0d", w, t);
        end
      end
      for (int c = 0; c < 8; c++) begin
        automatic bit want = 0;
        for (int r = 0; r < 8; r++) want ^= w[r] & (G[r][c] == "1");
        checks++;
        if (x8[c] !== want) begin
          failures++;
          $display("FAIL N=8 word %0d x%0d", w, c);
        end
      end
    end
    v8 = 1'b0;
    // Part 2: default size.
    u = new[N];
    for (int w = 0; w < 6; w++) begin
      for (int i = 0; i < N; i++) u[i] = 1'($urandom);
      ref_encode(NS, u, x);
      cyc = 0;
      for (int i = 0; i < N; i++) begin
        vb = 1'b1;
        ub = u[i];
        @(negedge clk);
        cyc++;
        if (w >= 3 && $urandom_range(0, 3) == 0) begin
          vb = 1'b0;
          @(negedge clk);
          checks++;
          if (xvb !== (i == N - 1)) begin
            failures++;
            $display("FAIL x_valid held");
          end
        end
        checks++;
        if (xvb !== (i == N - 1)) begin
          failures++;
          $display("FAIL x_valid word %0d bit %0d", w, i);
        end
      end
      vb = 1'b0;
      checks++;
      if (cyc != N) failures++;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (xb[k] !== x[k]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d x%0d", w, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
