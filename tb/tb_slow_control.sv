// tb_slow_control: self-checking test of the serial configuration
// register. A random 219-bit configuration is shifted in MSB first; the
// active settings must not move during shifting and must equal it after
// the load strobe, field by field; the serial output must return the
// shifted bits 219 clocks later (daisy chain).
module tb_slow_control;
  import parisroc_pkg::*;
  logic sclk = 0, rst_n = 0, din = 0, load = 0, dout;
  sc_config_t cfg, word, prev;
  logic [SC_W-1:0] bits;
  int checks = 0, failures = 0;

  always #50 sclk = ~sclk;

  slow_control dut (.sc_clk_i(sclk), .rst_ni(rst_n), .sc_din_i(din), .sc_load_i(load),
    .sc_dout_o(dout), .cfg_o(cfg));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic shift_word(input logic [SC_W-1:0] w);
    for (int i = SC_W - 1; i >= 0; i--) begin
      din = w[i];
      @(negedge sclk);
    end
  endtask

  initial begin
    repeat (2) @(negedge sclk);
    rst_n = 1;
    check(cfg == '0, "reset clears settings");
    for (int it = 0; it < 4; it++) begin
      for (int i = 0; i < SC_W; i++) bits[i] = 1'($urandom);
      word = sc_config_t'(bits);
      prev = cfg;
      shift_word(bits);
      check(cfg == prev, "settings hold while shifting");
      load = 1; @(negedge sclk); load = 0;
      check(cfg == word, $sformatf("loaded word %0d", it));
      check(cfg.gain_common == bits[SC_W-1 -: 4], "gain_common is the first 4 bits shifted");
      check(cfg.trig_sel_b == bits[0], "trigger select is the last bit shifted");
      for (int c = 0; c < N_CH; c++)
        check(cfg.gain_corr[c] == word.gain_corr[c] && cfg.dac_adj[c] == word.dac_adj[c], "per-channel fields");
      // daisy chain: shifting a new word pushes the old one out, MSB first
      for (int i = SC_W - 1; i >= 0; i--) begin
        check(dout == bits[i], $sformatf("sc_dout bit %0d", i));
        din = 1'($urandom);
        @(negedge sclk);
      end
      check(cfg == word, "settings kept without load");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge sclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
