// tb_wilkinson_adc: self-checking test of the Wilkinson ADC control.
// Each of the 32 comparators is modelled as "ramp above held level", the
// ramp being the count since the ramp was released; the held levels are
// random, a few above full scale. The expected code is the level itself,
// or full scale when the comparator never fires. The conversion time is
// checked to be 4096 cycles of the 40 MHz clock (102.4 us).
module tb_wilkinson_adc;
  localparam int N = 32, W = 12;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] cmp;
  logic ramp, busy, done;
  logic [W-1:0] count;
  logic [N-1:0][W-1:0] code;
  int level [N];
  int ramp_v;
  int checks = 0, failures = 0;

  always #12.5 clk = ~clk;

  wilkinson_adc #(.N_CMP(N), .ADC_W(W)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .cmp_i(cmp), .ramp_run_o(ramp), .count_o(count), .busy_o(busy), .done_o(done), .code_o(code));

  // Ramp model: rises by one code per clock while released.
  always @(posedge clk) ramp_v <= ramp ? ramp_v + 1 : 0;
  always_comb for (int i = 0; i < N; i++) cmp[i] = ramp && (ramp_v >= level[i]);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    ramp_v = 0;
    for (int i = 0; i < N; i++) level[i] = 5000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int conv = 0; conv < 4; conv++) begin
      int cycles;
      for (int i = 0; i < N; i++) begin
        level[i] = $urandom % 4096;
        if ($urandom % 8 == 0) level[i] = 4096 + $urandom % 100;
      end
      level[0] = 0; level[1] = 4095; level[2] = 1 + conv;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 0;  // edges from the one that took start_i
      while (!done) begin @(negedge clk); cycles++; end
      check(cycles == 4096, $sformatf("conversion takes 4096 cycles, got %0d", cycles));
      check(!busy && !ramp, "ramp stopped");
      for (int i = 0; i < N; i++) begin
        int exp_code;
        exp_code = (level[i] > 4095) ? 4095 : level[i];
        check(code[i] == W'(exp_code), $sformatf("conv %0d cmp %0d: code %0d exp %0d", conv, i, code[i], exp_code));
      end
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
