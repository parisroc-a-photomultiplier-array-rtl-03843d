// slow_control: serially loaded configuration register.
//
// The chip's settings (common variable gain, per-channel gain correction,
// slow shaper time constant, the two 10-bit discriminator thresholds, the
// per-channel 4-bit threshold adjustments and the trigger multiplexer
// select) are shifted in bit by bit on sc_din_i at each rising edge of
// sc_clk_i, most significant bit of the sc_config_t word first. sc_dout_o
// is the last stage, so several chips can be daisy-chained. A pulse of
// sc_load_i (sampled on sc_clk_i) copies the shift register into the
// active configuration cfg_o, so the analogue settings do not change while
// bits are shifted. Reset clears both.
//
// The list of settings follows the chip description and its figures; the
// serial protocol, the shadow register and the field order are choices of
// this design. cfg_o is quasi-static: it is changed only between runs, so
// it is used in the 40 MHz domain without a synchroniser.
module slow_control
  import parisroc_pkg::*;
(
  input  logic        sc_clk_i,
  input  logic        rst_ni,
  input  logic        sc_din_i,
  input  logic        sc_load_i,
  output logic        sc_dout_o,
  output sc_config_t  cfg_o
);

  logic [SC_W-1:0] shift_q;

  always_ff @(posedge sc_clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      shift_q <= '0;
      cfg_o   <= '0;
    end else if (sc_load_i) begin
      cfg_o   <= sc_config_t'(shift_q);
    end else begin
      shift_q <= {shift_q[SC_W-2:0], sc_din_i};
    end
  end

  assign sc_dout_o = shift_q[SC_W-1];

endmodule
