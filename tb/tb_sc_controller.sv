// tb_sc_controller: checks the SC schedule at the default N = 1024.
//
// The expected schedule is built as a list: for every bit i in order, the
// stages J(i) down to 0 with J(0) = n-1 and J(i) = min(ctz(i), n-1), each
// doing g exactly when bit j of i is 1. Each busy cycle must match the next
// entry (stage, bit, f/g, memory write for j >= 1, decision for j = 0); the
// run must last 2N-2 cycles, done must pulse once right after the last
// decision, and a start pulse while busy must be ignored. Two words run.
module tb_sc_controller;

  localparam int unsigned N  = 1024;
  localparam int unsigned NS = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic load, psu_clear, busy, sel_g, mu_we, decide, done;
  logic [NS-1:0] stage, bit_idx;
  int checks = 0, failures = 0;

  sc_controller dut (.clk, .rst_n, .start, .load, .psu_clear, .busy, .stage,
                     .sel_g, .bit_idx, .mu_we, .decide, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_i [$];
  int exp_j [$];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      automatic int J = 0;
      if (i == 0) J = NS - 1;
      else while (J < NS - 1 && ((i >> J) & 1) == 0) J++;
      for (int j = J; j >= 0; j--) begin
        exp_i.push_back(i);
        exp_j.push_back(j);
      end
    end
    chk(exp_i.size() == 2 * N - 2, "schedule length");
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk);
    for (int w = 0; w < 2; w++) begin
      int cyc;
      chk(!busy && !load, "idle");
      start = 1'b1;
      #1 chk(load && psu_clear, "load on start");
      @(negedge clk) start = 1'b0;
      cyc = 0;
      while (busy) begin
        if (cyc == 5) start = 1'b1;             // must be ignored
        #1;
        if (cyc < exp_i.size()) begin
          automatic int i = exp_i[cyc], j = exp_j[cyc];
          chk(stage == NS'(j) && bit_idx == NS'(i), $sformatf("cycle %0d stage/bit", cyc));
          chk(sel_g == 1'((i >> j) & 1), $sformatf("cycle %0d f/g", cyc));
          chk(mu_we == (j != 0) && decide == (j == 0), $sformatf("cycle %0d we/decide", cyc));
          chk(!load && !done, "no load/done while busy");
        end
        @(negedge clk) start = 1'b0;
        cyc++;
      end
      chk(cyc == 2 * N - 2, $sformatf("cycles %0d", cyc));
      chk(done, "done after last bit");
      @(negedge clk);
      chk(!done && !busy, "done is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
