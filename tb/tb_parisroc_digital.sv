// tb_parisroc_digital: end-to-end test of the digital part at its full
// size (16 channels, 2-cell memories, 24-bit timestamps, 12-bit ADC),
// connected to a behavioural model of the analogue channels.
//
// The test loads the slow control, starts an acquisition and injects
// pulses on chosen channels. Each time a memory cell of the model goes to
// hold, the scoreboard records the channel, the held charge and fine time
// levels, and the timestamp expected from an independent 10 MHz count. A
// serial receiver rebuilds the 52-bit words from the data line; every word
// must match the oldest recorded hold of its channel, and every hold must
// be read out by the end. The scenarios make each mechanism happen: single
// and multiple hit channels (selective readout), all 16 channels at once
// (readout within 100 us), a second hit while the first is converted
// (second memory cell), a third one (memory full, hit lost), the external
// hold, the trigger OR, amplitudes above full scale (saturated code),
// pulses below threshold, and the switch to the second discriminator.
module tb_parisroc_digital;
  import parisroc_pkg::*;

  logic clk = 0, rst_n = 0, run = 0, ext_hold = 0;
  logic sc_clk = 0, sc_din = 0, sc_load = 0, sc_dout;
  logic [N_CH-1:0] da, db, trig, trig_dly, read_cell, cmp_q, cmp_t, lost;
  logic [N_CH-1:0][SCA_DEPTH-1:0] cell_hold;
  logic trig_or, tdc_sync, adc_run, dout, ton;
  sc_config_t cfg;
  int amp [N_CH];
  int held_q [N_CH][2], held_t [N_CH][2];
  int checks = 0, failures = 0;

  always #12.5 clk = ~clk;

  parisroc_digital dut (
    .clk_i(clk), .rst_ni(rst_n), .run_i(run),
    .discri_a_i(da), .discri_b_i(db), .trig_o(trig), .trig_or_o(trig_or),
    .trig_delayed_i(trig_dly), .ext_hold_i(ext_hold),
    .cell_hold_o(cell_hold), .read_cell_o(read_cell), .tdc_ramp_sync_o(tdc_sync),
    .adc_ramp_run_o(adc_run), .cmp_charge_i(cmp_q), .cmp_time_i(cmp_t), .lost_o(lost),
    .dout_o(dout), .transmit_on_o(ton),
    .sc_clk_i(sc_clk), .sc_din_i(sc_din), .sc_load_i(sc_load), .sc_dout_o(sc_dout),
    .sc_cfg_o(cfg));

  analog_frontend_model #(.N(N_CH)) afe (
    .clk_i(clk), .amp_i(amp), .thr_a_i(int'(cfg.dac_thr_a) * 4), .thr_b_i(int'(cfg.dac_thr_b) * 4),
    .discri_a_o(da), .discri_b_o(db), .trig_i(trig), .trig_delayed_o(trig_dly),
    .cell_hold_i(cell_hold), .read_cell_i(read_cell), .tdc_sync_i(tdc_sync),
    .adc_ramp_run_i(adc_run), .cmp_charge_o(cmp_q), .cmp_time_o(cmp_t),
    .held_q_o(held_q), .held_t_o(held_t));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------------- scoreboard
  typedef struct { logic [TS_W-1:0] ts; int q; int t; } exp_t;
  exp_t exp_q [N_CH][$];
  int tb_cnt = 0, cnt_last = 0;
  logic [N_CH-1:0][SCA_DEPTH-1:0] hold_prev = '0;
  int n_holds = 0, n_second_cell = 0, n_lost = 0, n_or = 0, n_ext = 0, n_sel_b = 0;
  int n_words = 0, n_sat = 0, n_frames_16 = 0, n_below_thr = 0;
  bit trig_or_d = 0;
  bit verbose = 0;

  // Independent 10 MHz timestamp reference.
  always @(posedge clk) begin
    cnt_last = tb_cnt;
    if (!run) tb_cnt = 0;
    else if (tdc_sync) tb_cnt++;
  end

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < N_CH; c++)
      for (int k = 0; k < 2; k++)
        if (cell_hold[c][k] && !hold_prev[c][k]) begin
          exp_t e;
          // the model stores its levels on this same edge: use its inputs
          e.ts = TS_W'(cnt_last);
          e.q  = amp[c] > 4095 ? 4095 : amp[c];
          e.t  = afe.tdc_v > 4095 ? 4095 : afe.tdc_v;
          if (amp[c] > 4095) n_sat++;
          exp_q[c].push_back(e);
          if (verbose) $display("%0t hold ch %0d cell %0d q %0d", $time, c, k, e.q);
          n_holds++;
          if (hold_prev[c][1-k]) n_second_cell++;
          if (ext_hold) n_ext++;
          if (cfg.trig_sel_b && !ext_hold) n_sel_b++;
        end
    hold_prev = cell_hold;
    for (int c = 0; c < N_CH; c++) if (lost[c]) n_lost++;
    if (trig_or && !trig_or_d) n_or++;
    trig_or_d = trig_or;
  end

  // ---------------------------------------------------------- serial receiver
  logic [WORD_W-1:0] rx_sr;
  int rx_bits = 0, frame_words = 0;
  bit ton_d = 0;
  time frame_start;
  always @(posedge clk) if (rst_n) begin
    if (tdc_sync && ton) begin rx_sr = {rx_sr[WORD_W-2:0], dout}; rx_bits++; end
    if (ton && !ton_d && frame_words == 0) frame_start = $time;
    if (ton_d && !ton) begin
      readout_word_t w;
      w = readout_word_t'(rx_sr);
      check(rx_bits == WORD_W, $sformatf("word of %0d bits", rx_bits));
      rx_bits = 0; n_words++; frame_words++;
      if (frame_words == 16) begin
        n_frames_16++;
        check($time - frame_start <= 100_000_000, $sformatf("16 words in %0t", $time - frame_start));
      end
      if (exp_q[w.channel].size() == 0) check(0, $sformatf("unexpected word for channel %0d", w.channel));
      else begin
        exp_t e;
        e = exp_q[w.channel].pop_front();
        check(w.timestamp == e.ts, $sformatf("ch %0d timestamp %0d expected %0d", w.channel, w.timestamp, e.ts));
        check(w.charge == ADC_W'(e.q), $sformatf("ch %0d charge %0d expected %0d", w.channel, w.charge, e.q));
        check(w.fine_time == ADC_W'(e.t), $sformatf("ch %0d fine time %0d expected %0d", w.channel, w.fine_time, e.t));
      end
    end
    ton_d = ton;
    // a frame ends when the ADC ramp starts again or the line stays idle
    if (adc_run && frame_words > 0) frame_words = 0;
  end

  // ---------------------------------------------------------------- stimulus
  task automatic load_sc(input sc_config_t w);
    logic [SC_W-1:0] b;
    b = w;
    for (int i = SC_W - 1; i >= 0; i--) begin
      sc_din = b[i]; #50 sc_clk = 1; #50 sc_clk = 0;
    end
    sc_load = 1; #50 sc_clk = 1; #50 sc_clk = 0; sc_load = 0;
  endtask

  // Pulses of 8 cycles (200 ns) on the channels of mask.
  task automatic pulse(input logic [N_CH-1:0] mask, input int a);
    @(posedge clk); #2;
    for (int c = 0; c < N_CH; c++) if (mask[c]) amp[c] = a + c;
    repeat (8) @(posedge clk);
    #2;
    for (int c = 0; c < N_CH; c++) amp[c] = 0;
  endtask

  task automatic wait_idle();
    // until every recorded hold was read and the sequencer is back to idle
    int guard = 0;
    bit empty;
    do begin
      repeat (50) @(posedge clk);
      empty = 1;
      for (int c = 0; c < N_CH; c++) if (exp_q[c].size() != 0) empty = 0;
      guard++;
    end while ((!empty || dut.u_tm.state_q != TM_IDLE) && guard < 2000);
    check(empty, "all holds read out");
  endtask

  initial begin
    sc_config_t sc;
    for (int c = 0; c < N_CH; c++) amp[c] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    sc = '0;
    sc.gain_common = 4'd8;
    for (int c = 0; c < N_CH; c++) begin sc.gain_corr[c] = 8'd128; sc.dac_adj[c] = 4'd8; end
    sc.shaper_tau = 2'd1;
    sc.dac_thr_a = 10'd100;   // 400 codes
    sc.dac_thr_b = 10'd500;   // 2000 codes
    sc.trig_sel_b = 1'b0;
    load_sc(sc);
    check(cfg == sc, "slow control loaded");
    repeat (10) @(posedge clk);
    run = 1;
    repeat (200) @(posedge clk);

    // 1. one hit channel
    pulse(16'h0008, 1234);
    wait_idle();
    check(n_words == 1, $sformatf("one word for one hit, got %0d", n_words));
    // 2. a few channels: only they are read
    pulse(16'h8421, 3000);
    wait_idle();
    check(n_words == 5, $sformatf("five words in all, got %0d", n_words));
    // 3. below threshold: no trigger
    begin
      int h0;
      h0 = n_holds;
      pulse(16'h0010, 300);
      repeat (100) @(posedge clk);
      if (n_holds == h0) n_below_thr++;
      check(n_holds == h0, "pulse below threshold ignored");
    end
    // 4. every channel, amplitudes above full scale on some
    pulse(16'hFFFF, 4090);
    wait_idle();
    // 5. second cell while converting, then memory full
    pulse(16'h0020, 1000);
    repeat (40) @(posedge clk);
    pulse(16'h0020, 2000);
    repeat (40) @(posedge clk);
    pulse(16'h0020, 3000);
    wait_idle();
    check(n_lost == 1, $sformatf("third hit lost, lost=%0d", n_lost));
    // 6. external hold on all channels
    @(posedge clk); #2 ext_hold = 1;
    repeat (6) @(posedge clk); #2 ext_hold = 0;
    wait_idle();
    // 7. switch to discriminator B: 1000 is below its threshold, 2500 above
    sc.trig_sel_b = 1'b1;
    load_sc(sc);
    begin
      int h0;
      h0 = n_holds;
      pulse(16'h0100, 1000);
      repeat (100) @(posedge clk);
      check(n_holds == h0, "discriminator B ignores a pulse between the thresholds");
      if (n_holds == h0) n_below_thr++;
    end
    pulse(16'h0100, 2500);
    wait_idle();
    // 8. random traffic
    for (int it = 0; it < 20; it++) begin
      sc.trig_sel_b = 1'($urandom);
      if (it % 5 == 0) load_sc(sc);
      pulse(N_CH'($urandom), 2100 + $urandom % 2500);
      repeat ($urandom % 3000) @(posedge clk);
    end
    wait_idle();

    $display("holds %0d words %0d second-cell %0d lost %0d or %0d ext %0d discri-B %0d saturated %0d 16-word frames %0d below-threshold %0d",
             n_holds, n_words, n_second_cell, n_lost, n_or, n_ext, n_sel_b, n_sat, n_frames_16, n_below_thr);
    check(n_words == n_holds, "every hold read out once");
    check(n_second_cell > 0, "second memory cell used");
    check(n_lost > 0, "hit lost on full memory");
    check(n_or > 0, "trigger OR output");
    check(n_ext == N_CH, "external hold on every channel");
    check(n_sel_b > 0, "triggers through discriminator B");
    check(n_sat > 0, "saturated charge code");
    check(n_frames_16 > 0, "readout of all 16 channels");
    check(n_below_thr == 2, "pulses below threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
