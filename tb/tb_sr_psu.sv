// tb_sr_psu: checks the shift-register partial sums unit.
//
// 1. A W=4 instance (N = 8) is fed random bits u_0..u_7 and must hold, after
//    every step, the register contents printed for the N = 8 example: each
//    R_k is a given XOR of decided bits (kept here as bit masks).
// 2. The default width W = 512 (N = 1024) is fed random code words. After
//    every step t the register must match the closed form
//      R_k = XOR_{d<=k} u_{t-1-d} AND c_{(t-1-d) mod W, k-d}
//    and, with j = min(ctz(t), n-1), R_{2^j-1-m} must equal the partial sum
//    S_{t-2^j+m, j} of the reference encoder graph for m < 2^j.
module tb_sr_psu;
  import tb_polar_ref_pkg::*;

  localparam int unsigned W  = 512;
  localparam int unsigned NN = 2 * W;
  localparam int unsigned NS = $clog2(NN);

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0, u_hat = 1'b0;
  logic [3:0]   r4;
  logic [W-1:0] rb;
  int checks = 0, failures = 0;

  sr_psu #(.W(4)) dut4 (.clk, .rst_n, .clear, .en, .u_hat, .psum(r4));
  sr_psu          dutb (.clk, .rst_n, .clear, .en, .u_hat, .psum(rb));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Printed register contents of the N = 8 example: mask[step][k] over u_0..u_7.
  logic [7:0] fig [8][4] = '{
    '{8'h01, 8'h00, 8'h00, 8'h00},
    '{8'h02, 8'h03, 8'h00, 8'h00},
    '{8'h04, 8'h02, 8'h07, 8'h00},
    '{8'h08, 8'h0C, 8'h0A, 8'h0F},
    '{8'h10, 8'h08, 8'h0C, 8'h0A},
    '{8'h20, 8'h30, 8'h08, 8'h0C},
    '{8'h40, 8'h20, 8'h70, 8'h08},
    '{8'h80, 8'hC0, 8'hA0, 8'hF0}};

  function automatic bit cbit(input int unsigned i, input int unsigned k);
    return ((k & ~(i % W)) == 0);
  endfunction

  function automatic int unsigned ctz(input int unsigned v);
    int unsigned r = 0;
    while (r < NS - 1 && ((v >> r) & 1) == 0) r++;
    return r;
  endfunction

  initial begin
    bit u [];
    bit s [][];
    logic [7:0] uv;
    @(negedge clk) rst_n = 1'b1;
    // Part 1: the printed example.
    for (int rep = 0; rep < 20; rep++) begin
      uv = 8'($urandom);
      clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      for (int t = 0; t < 8; t++) begin
        u_hat = uv[t];
        en = 1'b1;
        @(negedge clk) en = 1'b0;
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (r4[k] !== ^(uv & fig[t][k])) begin
            failures++;
            $display("FAIL fig step %0d R%0d", t + 1, k);
          end
        end
      end
    end
    // Part 2: default width.
    u = new[NN];
    for (int frame = 0; frame < 3; frame++) begin
      clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      for (int i = 0; i < NN; i++) u[i] = 0;
      for (int t = 1; t <= NN; t++) begin
        u[t-1] = 1'($urandom);
        u_hat = u[t-1];
        en = 1'b1;
        @(negedge clk) en = 1'b0;
        if ($urandom_range(0, 4) == 0) @(negedge clk);   // idle cycle
        if (frame == 0) begin
          automatic logic [W-1:0] want;
          for (int k = 0; k < W; k++) begin
            want[k] = 0;
            for (int d = 0; d <= k && d < t; d++)
              want[k] ^= u[t-1-d] & cbit(t - 1 - d, k - d);
          end
          checks++;
          if (rb !== want) begin
            failures++;
            if (failures < 10) $display("FAIL closed form step %0d", t);
          end
        end
        if (t < NN) begin
          automatic int unsigned j = ctz(t);
          ref_psums(NS, u, s);
          for (int m = 0; m < (1 << j); m++) begin
            checks++;
            if (rb[(1 << j) - 1 - m] !== s[j][t - (1 << j) + m]) begin
              failures++;
              if (failures < 10) $display("FAIL psum t=%0d j=%0d m=%0d", t, j, m);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
