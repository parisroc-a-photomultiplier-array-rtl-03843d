// event_registers: output registers between conversion and readout.
//
// When a conversion ends, each converted channel's charge code, fine-time
// code and coarse timestamp are written here and the channel is marked
// valid; the analogue cell can then be released at once and sample a new
// event while the registers are read out. clear_i (end of readout) drops
// every valid flag. The registers themselves are named in the chip
// description; their single-entry organisation per channel is a choice of
// this design. Writes take effect on the clock edge of load_i.
module event_registers
  import parisroc_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       load_i,
  input  logic [NCH-1:0]             load_mask_i,
  input  logic [NCH-1:0][TS_W-1:0]   ts_i,
  input  logic [NCH-1:0][ADC_W-1:0]  charge_i,
  input  logic [NCH-1:0][ADC_W-1:0]  fine_i,
  input  logic                       clear_i,
  output logic [NCH-1:0]             valid_o,
  output logic [NCH-1:0][TS_W-1:0]   ts_o,
  output logic [NCH-1:0][ADC_W-1:0]  charge_o,
  output logic [NCH-1:0][ADC_W-1:0]  fine_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o  <= '0;
      ts_o     <= '0;
      charge_o <= '0;
      fine_o   <= '0;
    end else if (clear_i) begin
      valid_o <= '0;
    end else if (load_i) begin
      for (int i = 0; i < NCH; i++) begin
        if (load_mask_i[i]) begin
          valid_o[i]  <= 1'b1;
          ts_o[i]     <= ts_i[i];
          charge_o[i] <= charge_i[i];
          fine_o[i]   <= fine_i[i];
        end
      end
    end
  end

endmodule
