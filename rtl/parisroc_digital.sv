// parisroc_digital: digital part of the 16-channel photomultiplier readout
// chip, with the ports through which it drives and reads the analogue part.
//
// Per channel, the analogue part has a fast shaper with two discriminators,
// a variable delay line, a slow shaper and a two-cell analogue memory that
// stores the slow shaper output (charge) and a 100 ns TDC ramp (fine time),
// and two ADC comparators against the common ADC ramp. This module holds the
// logic around them:
//   trigger_logic   discriminator multiplexer, trigger OR, hold requests;
//   sca_manager x16 analogue memory as a two-deep FIFO, timestamp capture;
//   coarse_counter  24-bit timestamp counting at 10 MHz;
//   wilkinson_adc   12-bit conversion of all 32 held samples at 40 MHz;
//   event_registers results waiting for readout;
//   readout         selective 52-bit serial readout at 10 MHz;
//   top_manager     conversion / readout sequencing;
//   slow_control    serially loaded settings.
// The chip runs on a 40 MHz clock; the 10 MHz timestamp and readout rate is
// a one-in-four enable derived here (tdc_ramp_sync_o marks it for the
// analogue TDC ramp). Deriving it from the 40 MHz clock, rather than taking
// a second clock input, is a choice of this design.
//
// Timing of one event: a delayed trigger on channel c freezes a free cell
// 2-3 cycles later (cell_hold_o), the sequencer starts the ADC, 4097 cycles
// later the results are registered and the cell released, and the readout
// sends one 52-bit word per hit channel at 10 MHz (53 ticks per word).
// The ADC count, the busy flags and the sequencer state are not used here;
// they stay as status signals of the blocks, for simulation and debug.
module parisroc_digital
  import parisroc_pkg::*;
(
  input  logic                          clk_i,           // 40 MHz
  input  logic                          rst_ni,
  input  logic                          run_i,           // acquisition on
  // discriminators and delay line (analogue)
  input  logic [N_CH-1:0]               discri_a_i,
  input  logic [N_CH-1:0]               discri_b_i,
  output logic [N_CH-1:0]               trig_o,          // 16 trigger outputs
  output logic                          trig_or_o,       // OR output
  input  logic [N_CH-1:0]               trig_delayed_i,  // back from delay
  input  logic                          ext_hold_i,
  // analogue memory and ADC (analogue)
  output logic [N_CH-1:0][SCA_DEPTH-1:0] cell_hold_o,
  output logic [N_CH-1:0]               read_cell_o,     // internal read
  output logic                          tdc_ramp_sync_o,
  output logic                          adc_ramp_run_o,
  input  logic [N_CH-1:0]               cmp_charge_i,
  input  logic [N_CH-1:0]               cmp_time_i,
  output logic [N_CH-1:0]               lost_o,          // hold with memory full
  // serial data output
  output logic                          dout_o,
  output logic                          transmit_on_o,
  // slow control
  input  logic                          sc_clk_i,
  input  logic                          sc_din_i,
  input  logic                          sc_load_i,
  output logic                          sc_dout_o,
  output sc_config_t                    sc_cfg_o
);

  logic [1:0]                  div_q;
  logic                        tick;
  logic [TS_W-1:0]             coarse;
  logic [N_CH-1:0]             hold_req;
  logic [N_CH-1:0]             pending, release_ch, conv_mask;
  logic [N_CH-1:0][TS_W-1:0]   cell_ts;
  logic                        adc_start, adc_done, adc_busy;
  logic [ADC_W-1:0]            adc_count;
  logic [2*N_CH-1:0][ADC_W-1:0] adc_code;
  logic [N_CH-1:0][ADC_W-1:0]  conv_q, conv_t;
  logic                        reg_load, reg_clear, ro_start, ro_done, ro_busy;
  logic [N_CH-1:0]             reg_valid;
  logic [N_CH-1:0][TS_W-1:0]   reg_ts;
  logic [N_CH-1:0][ADC_W-1:0]  reg_q, reg_t;
  tm_state_t                   tm_state;

  // 10 MHz enable from the 40 MHz clock.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) div_q <= '0;
    else         div_q <= div_q + 1'b1;
  end
  assign tick            = (div_q == 2'(CLK_RATIO - 1));
  assign tdc_ramp_sync_o = tick;

  slow_control u_sc (
    .sc_clk_i, .rst_ni, .sc_din_i, .sc_load_i, .sc_dout_o, .cfg_o(sc_cfg_o)
  );

  trigger_logic #(.N_CH(N_CH)) u_trig (
    .discri_a_i, .discri_b_i, .sel_b_i(sc_cfg_o.trig_sel_b),
    .trig_delayed_i, .ext_hold_i,
    .trig_o, .trig_or_o, .hold_req_o(hold_req)
  );

  coarse_counter #(.WIDTH(TS_W)) u_cnt (
    .clk_i, .rst_ni, .tick_i(tick), .run_i, .count_o(coarse)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic rd_ptr;
    sca_manager #(.DEPTH(SCA_DEPTH), .TS_W(TS_W)) u_sca (
      .clk_i, .rst_ni, .enable_i(run_i), .hold_req_i(hold_req[c]),
      .ts_i(coarse), .release_i(release_ch[c]),
      .cell_hold_o(cell_hold_o[c]), .rd_ptr_o(rd_ptr),
      .pending_o(pending[c]), .rd_ts_o(cell_ts[c]), .lost_o(lost_o[c])
    );
    assign read_cell_o[c] = rd_ptr;
    // Comparator 2c is channel c's charge, 2c+1 its fine time.
    assign conv_q[c] = adc_code[2*c];
    assign conv_t[c] = adc_code[2*c+1];
  end

  logic [2*N_CH-1:0] cmp_all;
  always_comb
    for (int c = 0; c < N_CH; c++) begin
      cmp_all[2*c]   = cmp_charge_i[c];
      cmp_all[2*c+1] = cmp_time_i[c];
    end

  wilkinson_adc #(.N_CMP(2*N_CH), .ADC_W(ADC_W)) u_adc (
    .clk_i, .rst_ni, .start_i(adc_start), .cmp_i(cmp_all),
    .ramp_run_o(adc_ramp_run_o), .count_o(adc_count), .busy_o(adc_busy),
    .done_o(adc_done), .code_o(adc_code)
  );

  top_manager #(.NCH(N_CH)) u_tm (
    .clk_i, .rst_ni, .pending_i(pending), .adc_done_i(adc_done),
    .ro_done_i(ro_done), .adc_start_o(adc_start), .conv_mask_o(conv_mask),
    .release_o(release_ch), .reg_load_o(reg_load), .reg_clear_o(reg_clear),
    .ro_start_o(ro_start), .state_o(tm_state)
  );

  event_registers #(.NCH(N_CH)) u_regs (
    .clk_i, .rst_ni, .load_i(reg_load), .load_mask_i(conv_mask),
    .ts_i(cell_ts), .charge_i(conv_q), .fine_i(conv_t), .clear_i(reg_clear),
    .valid_o(reg_valid), .ts_o(reg_ts), .charge_o(reg_q), .fine_o(reg_t)
  );

  readout #(.NCH(N_CH)) u_ro (
    .clk_i, .rst_ni, .tick_i(tick), .start_i(ro_start), .valid_i(reg_valid),
    .ts_i(reg_ts), .charge_i(reg_q), .fine_i(reg_t),
    .dout_o, .transmit_on_o, .busy_o(ro_busy), .done_o(ro_done)
  );

endmodule
