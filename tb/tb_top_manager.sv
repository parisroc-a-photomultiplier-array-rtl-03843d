// tb_top_manager: self-checking test of the conversion / readout
// sequencer. Stub ADC and readout answer its start pulses after random
// delays while channels become pending at random. A protocol monitor
// checks that a conversion starts only when idle and something is pending,
// on exactly the pending channels; that results are loaded and exactly
// those channels released when the conversion ends; that the readout
// starts one cycle later; and that the registers are cleared at its end.
module tb_top_manager;
  import parisroc_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] pend, mask, rel;
  logic adc_done = 0, ro_done = 0, adc_start, ld, clr, ro_start;
  tm_state_t st;
  int checks = 0, failures = 0, n_conv = 0, n_ro = 0;
  bit conv_busy = 0, ro_busy = 0, load_seen = 0, idle_exp = 1;
  logic [N-1:0] exp_mask;
  int adc_cnt = 0, ro_cnt = 0;

  always #12.5 clk = ~clk;

  top_manager #(.NCH(N)) dut (.clk_i(clk), .rst_ni(rst_n), .pending_i(pend), .adc_done_i(adc_done),
    .ro_done_i(ro_done), .adc_start_o(adc_start), .conv_mask_o(mask), .release_o(rel),
    .reg_load_o(ld), .reg_clear_o(clr), .ro_start_o(ro_start), .state_o(st));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  logic [N-1:0] pend_d;
  bit idle_d;
  // Monitor, sampled just after each rising edge's updates.
  always @(negedge clk) if (rst_n) begin
    if (adc_start) begin
      check(idle_d && pend_d != 0, "start only from idle with pending channels");
      check(mask == pend_d, "conversion set equals pending set");
      exp_mask = pend_d; conv_busy = 1; n_conv++; idle_exp = 0;
      adc_cnt = 3 + $urandom % 20;
    end else if (idle_d && pend_d != 0) begin
      check(0, "pending channels left waiting while idle");
    end
    if (ld) begin
      check(rel == exp_mask, "release the converted channels");
      load_seen = 1;
    end else begin
      check(rel == '0, "no release outside load");
      if (load_seen) begin
        check(ro_start, "readout starts one cycle after the load");
        load_seen = 0; ro_busy = 1; n_ro++;
        ro_cnt = 2 + $urandom % 30;
      end else check(!ro_start, "no stray readout start");
    end
    if (clr) begin check(!conv_busy && !ro_busy, "clear after readout"); idle_exp = 1; end
    check((st == TM_IDLE) == idle_exp, "state idle flag");
    // stub ADC and readout
    adc_done = 0; ro_done = 0;
    if (conv_busy && !adc_start) begin
      if (adc_cnt == 0) begin adc_done = 1; conv_busy = 0; end else adc_cnt--;
    end
    if (ro_busy && !ro_start) begin
      if (ro_cnt == 0) begin ro_done = 1; ro_busy = 0; end else ro_cnt--;
    end
    // channels become pending at random; converted ones leave on release
    pend = (pend & ~rel) | (($urandom % 6 == 0) ? N'(1) << ($urandom % N) : '0);
    pend_d = pend;
    idle_d = (st == TM_IDLE);
  end

  initial begin
    pend = '0; pend_d = '0; idle_d = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    idle_d = 1;
    repeat (5000) @(negedge clk);
    check(n_conv > 50 && n_ro >= n_conv - 1, $sformatf("%0d conversions, %0d readouts", n_conv, n_ro));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
