// top_manager: sequencer of the digital part.
//
// Acquisition is continuous: the channels' analogue memories fill on their
// own. The sequencer runs the conversion and readout cycle. In IDLE it waits
// until at least one channel holds a sample; it then freezes the set of
// such channels (conv_mask_o), starts the common ADC and waits in CONVERT
// for the end of the conversion. At that moment it writes the results into
// the output registers and releases the converted cell of each channel in
// the set (one-cycle pulses, same edge), and one cycle later starts the
// readout. In READOUT
// it waits for the readout to finish, clears the registers and returns to
// IDLE. Channels triggered during a conversion or readout keep their sample
// in the second memory cell and are taken in the next cycle.
//
// The partition into acquisition, conversion and readout and the use of the
// analogue memory as a FIFO follow the chip description. The strict order
// of the three phases (no overlap of conversion with readout) is a choice of
// this design.
module top_manager
  import parisroc_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [NCH-1:0]  pending_i,    // channel holds a sample
  input  logic            adc_done_i,
  input  logic            ro_done_i,
  output logic            adc_start_o,
  output logic [NCH-1:0]  conv_mask_o,
  output logic [NCH-1:0]  release_o,
  output logic            reg_load_o,
  output logic            reg_clear_o,
  output logic            ro_start_o,
  output tm_state_t       state_o
);

  tm_state_t state_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= TM_IDLE;
      conv_mask_o <= '0;
      adc_start_o <= 1'b0;
      release_o   <= '0;
      reg_load_o  <= 1'b0;
      reg_clear_o <= 1'b0;
      ro_start_o  <= 1'b0;
    end else begin
      adc_start_o <= 1'b0;
      release_o   <= '0;
      reg_load_o  <= 1'b0;
      reg_clear_o <= 1'b0;
      ro_start_o  <= 1'b0;
      unique case (state_q)
        TM_IDLE: if (|pending_i) begin
          conv_mask_o <= pending_i;
          adc_start_o <= 1'b1;
          state_q     <= TM_CONVERT;
        end
        TM_CONVERT: if (adc_done_i) begin
          reg_load_o <= 1'b1;
          release_o  <= conv_mask_o;
          state_q    <= TM_READOUT;
        end
        TM_READOUT: begin
          // Start the readout once the registers hold the new results.
          ro_start_o <= reg_load_o;
          if (ro_done_i) begin
            reg_clear_o <= 1'b1;
            conv_mask_o <= '0;
            state_q     <= TM_IDLE;
          end
        end
        default: state_q <= TM_IDLE;
      endcase
    end
  end

  assign state_o = state_q;

endmodule
