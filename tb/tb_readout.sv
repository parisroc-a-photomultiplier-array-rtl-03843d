// tb_readout: self-checking test of the selective serial readout.
// Random sets of hit channels with random contents are read out; a serial
// receiver in the testbench samples the line once per 10 MHz tick while
// transmit_on is high and rebuilds the 52-bit words, which must be the hit
// channels in increasing order with their channel number, timestamp,
// charge and fine time, 52 bits each. The duration must be 53 ticks
// (212 cycles at 40 MHz) per word, so that 16 hit channels take less than
// 100 us.
module tb_readout;
  import parisroc_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, tick = 0, start = 0;
  logic [N-1:0] valid;
  logic [N-1:0][TS_W-1:0] ts;
  logic [N-1:0][ADC_W-1:0] qq, tt;
  logic dout, ton, busy, done;
  int cyc = 0;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] rx_q [$];
  logic [WORD_W-1:0] rx_sr;
  int rx_bits = 0, bad_len = 0;
  logic ton_d = 0;

  always #12.5 clk = ~clk;
  always @(posedge clk) begin cyc <= cyc + 1; tick <= ((cyc + 1) % 4 == 3); end

  readout #(.NCH(N)) dut (.clk_i(clk), .rst_ni(rst_n), .tick_i(tick), .start_i(start),
    .valid_i(valid), .ts_i(ts), .charge_i(qq), .fine_i(tt), .dout_o(dout),
    .transmit_on_o(ton), .busy_o(busy), .done_o(done));

  // Serial receiver.
  always @(posedge clk) begin
    if (!rst_n) rx_bits = 0;
    else if (tick && ton) begin rx_sr = {rx_sr[WORD_W-2:0], dout}; rx_bits++; end
    if (rst_n && ton_d && !ton) begin
      if (rx_bits != WORD_W) begin bad_len++; $display("word of %0d bits", rx_bits); end
      rx_q.push_back(rx_sr); rx_bits = 0;
    end
    ton_d <= ton;
    if (!ton && dout) bad_len++;   // line idles low
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    valid = '0; ts = '0; qq = '0; tt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      int cycles, nexp;
      int k;
      valid = N'($urandom);
      if (it == 0) valid = '1;
      if (it == 1) valid = '0;
      if (it == 2) valid = 16'h8001;
      for (int i = 0; i < N; i++) begin
        ts[i] = TS_W'($urandom); qq[i] = ADC_W'($urandom); tt[i] = ADC_W'($urandom);
      end
      rx_q.delete();
      repeat ($urandom % 4) @(negedge clk);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      repeat (2) @(negedge clk);
      nexp = $countones(valid);
      check(rx_q.size() == nexp, $sformatf("it %0d: %0d words, expected %0d", it, rx_q.size(), nexp));
      k = 0;
      for (int i = 0; i < N; i++) if (valid[i]) begin
        logic [WORD_W-1:0] e;
        e = {CH_W'(i), ts[i], qq[i], tt[i]};
        if (k < rx_q.size())
          check(rx_q[k] == e, $sformatf("it %0d word %0d: %h expected %h", it, k, rx_q[k], e));
        k++;
      end
      check(cycles >= nexp * 53 * 4 - 4 && cycles <= nexp * 53 * 4 + 8,
            $sformatf("it %0d: %0d cycles for %0d words", it, cycles, nexp));
      if (nexp == 16) check(cycles * 25 <= 100_000, "16 channels read within 100 us");
    end
    check(bad_len == 0, "every word has 52 bits, line low when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
