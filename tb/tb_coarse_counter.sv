// tb_coarse_counter: self-checking test of the 24-bit coarse time counter.
// Drives a 40 MHz clock with a one-in-four tick, checks that the counter
// advances once per tick (10 MHz, so 100 counts per 10 us), is held at
// zero while stopped, and wraps (checked on a 4-bit instance).
module tb_coarse_counter;
  logic clk = 0, rst_n = 0, tick = 0, run = 0;
  logic [23:0] cnt;
  logic [3:0]  cnt4;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #12.5 clk = ~clk;

  coarse_counter dut (.clk_i(clk), .rst_ni(rst_n), .tick_i(tick), .run_i(run), .count_o(cnt));
  coarse_counter #(.WIDTH(4)) dut4 (.clk_i(clk), .rst_ni(rst_n), .tick_i(tick), .run_i(run), .count_o(cnt4));

  always @(posedge clk) begin
    cyc <= cyc + 1;
    tick <= ((cyc + 1) % 4 == 3);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    check(cnt == 0, "counter stays at zero while stopped");
    @(negedge clk);
    // align to a tick boundary
    while (!tick) @(negedge clk);
    @(negedge clk);
    run = 1;
    repeat (4 * 1000) @(negedge clk);
    check(cnt == 24'd1000, $sformatf("1000 ticks in 4000 cycles (100 us): got %0d", cnt));
    check(cnt4 == 4'(1000), $sformatf("4-bit counter wraps: got %0d", cnt4));
    repeat (4 * 37) @(negedge clk);
    check(cnt == 24'd1037, $sformatf("1037 ticks: got %0d", cnt));
    run = 0;
    @(negedge clk);
    check(cnt == 0, "stop clears the counter");
    repeat (8) @(negedge clk);
    check(cnt == 0, "stays cleared while stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
