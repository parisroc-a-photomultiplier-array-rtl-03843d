// analog_frontend_model: behavioural model of the 16 analogue channels,
// for simulation only (not synthesizable, uses no real numbers).
//
// Amplitudes are in ADC codes. For each channel the testbench sets amp_i,
// the slow shaper level of the current pulse, which is also what the fast
// shaper shows to the two discriminators: discriminator A fires while the
// amplitude exceeds thr_a_i, B while it exceeds thr_b_i (the 10-bit DAC
// codes times 4). The selected trigger comes back through a delay line of
// DELAY clock cycles. When a memory cell goes to hold, it keeps the
// current amplitude (charge) and the current value of the 100 ns TDC ramp
// (fine time), which restarts at every tdc_sync_i pulse and rises by
// TDC_STEP codes per 25 ns cycle from TDC_OFS. The ADC ramp rises by one
// code per clock cycle while adc_ramp_run_i is high; the charge and time
// comparators of each channel compare it with the cell selected by
// read_cell_i. held_q_o and held_t_o expose the held levels to the test.
module analog_frontend_model #(
  parameter int N        = 16,
  parameter int DELAY    = 2,
  parameter int TDC_STEP = 1000,
  parameter int TDC_OFS  = 137
) (
  input  logic                 clk_i,
  input  int                   amp_i [N],
  input  int                   thr_a_i,
  input  int                   thr_b_i,
  output logic [N-1:0]         discri_a_o,
  output logic [N-1:0]         discri_b_o,
  input  logic [N-1:0]         trig_i,
  output logic [N-1:0]         trig_delayed_o,
  input  logic [N-1:0][1:0]    cell_hold_i,
  input  logic [N-1:0]         read_cell_i,
  input  logic                 tdc_sync_i,
  input  logic                 adc_ramp_run_i,
  output logic [N-1:0]         cmp_charge_o,
  output logic [N-1:0]         cmp_time_o,
  output int                   held_q_o [N][2],
  output int                   held_t_o [N][2]
);

  logic [N-1:0] dly_q [DELAY];
  int tdc_v = 0, adc_v = 0;
  logic [N-1:0][1:0] hold_d = '0;

  always_comb
    for (int c = 0; c < N; c++) begin
      discri_a_o[c]   = amp_i[c] > thr_a_i;
      discri_b_o[c]   = amp_i[c] > thr_b_i;
      cmp_charge_o[c] = adc_ramp_run_i && (adc_v >= held_q_o[c][read_cell_i[c]]);
      cmp_time_o[c]   = adc_ramp_run_i && (adc_v >= held_t_o[c][read_cell_i[c]]);
    end

  assign trig_delayed_o = dly_q[DELAY-1];

  initial
    for (int c = 0; c < N; c++) begin
      held_q_o[c][0] = 0; held_q_o[c][1] = 0;
      held_t_o[c][0] = 0; held_t_o[c][1] = 0;
    end

  always @(posedge clk_i) begin
    dly_q[0] <= trig_i;
    for (int i = 1; i < DELAY; i++) dly_q[i] <= dly_q[i-1];
    tdc_v <= tdc_sync_i ? TDC_OFS : tdc_v + TDC_STEP;
    adc_v <= adc_ramp_run_i ? adc_v + 1 : 0;
  end

  // A cell follows its input while tracking and freezes when it goes to hold.
  always @(negedge clk_i) begin
    for (int c = 0; c < N; c++)
      for (int k = 0; k < 2; k++)
        if (cell_hold_i[c][k] && !hold_d[c][k]) begin
          held_q_o[c][k] <= amp_i[c];
          held_t_o[c][k] <= tdc_v;
        end
    hold_d <= cell_hold_i;
  end

endmodule
