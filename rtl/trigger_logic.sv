// trigger_logic: trigger outputs and hold requests of the 16 channels.
//
// Each channel's fast shaper feeds two discriminators. Their outputs are
// multiplexed so that the chip has one trigger output per channel; the
// 16 triggers are also combined into a single OR output. Each trigger goes
// through an analogue variable delay (outside this module) so that it
// arrives when the slow shaper is at its maximum; the delayed trigger, ORed
// with the external hold input, is the hold request of the channel's
// analogue memory.
//
// The multiplexing, the OR output and the OR of the external hold with the
// auto-trigger follow the chip description and its figures. A single select
// bit common to all channels (0 picks discriminator A) is a choice of this
// design. The module is purely combinational.
module trigger_logic #(
  parameter int unsigned N_CH = 16
) (
  input  logic [N_CH-1:0] discri_a_i,
  input  logic [N_CH-1:0] discri_b_i,
  input  logic            sel_b_i,         // 1: use discriminator B
  input  logic [N_CH-1:0] trig_delayed_i,  // triggers after the delay line
  input  logic            ext_hold_i,
  output logic [N_CH-1:0] trig_o,
  output logic            trig_or_o,
  output logic [N_CH-1:0] hold_req_o
);

  always_comb begin
    trig_o     = sel_b_i ? discri_b_i : discri_a_i;
    trig_or_o  = |trig_o;
    hold_req_o = trig_delayed_i | {N_CH{ext_hold_i}};
  end

endmodule
