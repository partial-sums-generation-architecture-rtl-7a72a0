// tb_memory_unit: checks the LLR register banks at the default N = 1024.
//
// The model keeps every stage by block offset o (the natural order of the
// factor graph): stage n holds the channel, lambda_o, and a write to stage j
// puts wdata[p] at offset o = 2^j-1-p. Reading stage j must give, for PE
// p < 2^j with o = 2^j-1-p, a = L_{j+1}(o) and b = L_{j+1}(o+2^j), the two
// inputs of f and g; PEs p >= 2^j must read 0. Writes go to random stages in
// random order so that each stage is also checked to keep its contents.
module tb_memory_unit;
  import polar_pkg::*;

  localparam int unsigned N  = 1024;
  localparam int unsigned NS = $clog2(N);

  logic clk = 1'b0, load = 1'b0, we = 1'b0;
  llr_t llr_in [N];
  llr_t wdata  [N/2];
  llr_t a      [N/2];
  llr_t b      [N/2];
  logic [NS-1:0] stage = '0;
  int checks = 0, failures = 0;
  int model [NS+1][N];

  memory_unit dut (.clk, .load, .llr_in, .stage, .we, .wdata, .a, .b);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int j = 0; j < NS; j++) begin
      stage = NS'(j);
      #1;
      for (int p = 0; p < N/2; p++) begin
        int wa, wb;
        if (p < (1 << j)) begin
          automatic int o = (1 << j) - 1 - p;
          wa = model[j+1][o];
          wb = model[j+1][o + (1 << j)];
        end else begin
          wa = 0;
          wb = 0;
        end
        checks++;
        if (int'(a[p]) != wa || int'(b[p]) != wb) begin
          failures++;
          if (failures < 10) $display("FAIL stage %0d pe %0d", j, p);
        end
      end
    end
  endtask

  initial begin
    @(negedge clk);
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < N; i++) begin
        llr_in[i] = llr_t'($urandom_range(0, 62) - 31);
        model[NS][i] = int'(llr_in[i]);
      end
      load = 1'b1;
      @(negedge clk) load = 1'b0;
      for (int w = 0; w < 3 * NS; w++) begin
        automatic int j = (w < NS - 1) ? NS - 1 - w : $urandom_range(0, NS - 1);
        stage = NS'(j);
        for (int p = 0; p < N/2; p++) wdata[p] = llr_t'($urandom_range(0, 62) - 31);
        if (j >= 1)
          for (int p = 0; p < (1 << j); p++) model[j][(1 << j) - 1 - p] = int'(wdata[p]);
        we = 1'b1;
        @(negedge clk) we = 1'b0;
        if (w >= NS - 1 && (w % 4) == 0) check_all();
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
