// readout: selective serial readout of the converted events.
//
// Only channels that were hit are read. On start_i the module takes the
// set of channels holding a converted event and sends them one after the
// other, lowest channel number first, as 52-bit words on a single serial
// line at the 10 MHz readout rate: 4 bits of channel number, 24 bits of
// coarse timestamp, 12 bits of charge and 12 bits of fine time, most
// significant bit first. A new bit is put on dout_o at each 10 MHz tick and
// stays for one tick period (100 ns); transmit_on_o is high while a word is
// on the line. One idle tick separates words, so a word takes 53 ticks and
// 16 hit channels are read in 16 x 53 x 100 ns = 84.8 us, within the
// 100 us the chip description quotes for a full readout. done_o pulses
// when the last word has gone out (immediately if no channel was hit).
//
// The word format, the selectivity and the 10 MHz rate follow the chip
// description. The bit order, the channel order, the idle tick between
// words and the transmit_on_o qualifier are choices of this design.
module readout
  import parisroc_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       tick_i,      // 10 MHz enable
  input  logic                       start_i,
  input  logic [NCH-1:0]             valid_i,     // channel has an event
  input  logic [NCH-1:0][TS_W-1:0]   ts_i,
  input  logic [NCH-1:0][ADC_W-1:0]  charge_i,
  input  logic [NCH-1:0][ADC_W-1:0]  fine_i,
  output logic                       dout_o,
  output logic                       transmit_on_o,
  output logic                       busy_o,
  output logic                       done_o
);

  typedef enum logic [1:0] {RO_IDLE, RO_LOAD, RO_SHIFT} ro_state_t;

  ro_state_t             state_q;
  logic [NCH-1:0]        mask_q;
  logic [WORD_W-1:0]     sreg_q;
  logic [$clog2(WORD_W)-1:0] bit_q;
  logic [CH_W-1:0]       next_ch;
  readout_word_t         next_word;

  // Lowest channel still to be sent.
  always_comb begin
    next_ch = '0;
    for (int i = NCH - 1; i >= 0; i--)
      if (mask_q[i]) next_ch = CH_W'(i);
    next_word.channel   = next_ch;
    next_word.timestamp = ts_i[next_ch];
    next_word.charge    = charge_i[next_ch];
    next_word.fine_time = fine_i[next_ch];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= RO_IDLE;
      mask_q        <= '0;
      sreg_q        <= '0;
      bit_q         <= '0;
      transmit_on_o <= 1'b0;
      done_o        <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        RO_IDLE: if (start_i) begin
          mask_q  <= valid_i;
          state_q <= RO_LOAD;
        end
        RO_LOAD: if (mask_q == '0) begin
          done_o  <= 1'b1;
          state_q <= RO_IDLE;
        end else if (tick_i) begin
          sreg_q          <= next_word;
          mask_q[next_ch] <= 1'b0;
          bit_q           <= $bits(bit_q)'(WORD_W - 1);
          transmit_on_o   <= 1'b1;
          state_q         <= RO_SHIFT;
        end
        RO_SHIFT: if (tick_i) begin
          if (bit_q == '0) begin
            transmit_on_o <= 1'b0;
            state_q       <= RO_LOAD;
          end else begin
            sreg_q <= {sreg_q[WORD_W-2:0], 1'b0};
            bit_q  <= bit_q - 1'b1;
          end
        end
        default: state_q <= RO_IDLE;
      endcase
    end
  end

  assign dout_o = transmit_on_o & sreg_q[WORD_W-1];
  assign busy_o = (state_q != RO_IDLE);

endmodule
