// wilkinson_adc: digital half of the common 12-bit Wilkinson ADC.
//
// All held samples of the chip (charge and fine time of each channel) are
// converted at once against one common voltage ramp. On start_i the module
// releases the ramp (ramp_run_o high) and counts clock cycles of the 40 MHz
// clock from zero. Each sample has its own comparator, which goes high when
// the ramp passes the held voltage; on the first clock edge at which a
// comparator is seen high, the current count is latched as that sample's
// code. After 2**ADC_W counts the ramp is stopped, samples whose comparator
// never fired get the full-scale code, and done_o pulses for one cycle. A
// conversion therefore lasts 2**ADC_W cycles from the edge that takes
// start_i to the edge that raises done_o: 102.4 us for 12 bits at 40 MHz.
//
// The 12-bit Wilkinson principle, the 40 MHz conversion clock and the
// common ramp follow the chip description. Sampling the comparators directly
// with the clock (their delay to the ramp is a constant offset absorbed in
// the pedestal), the full-scale code for a silent comparator and the fixed
// conversion length are choices of this design.
module wilkinson_adc #(
  parameter int unsigned N_CMP = 32,
  parameter int unsigned ADC_W = 12
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         start_i,
  input  logic [N_CMP-1:0]             cmp_i,       // ramp above sample
  output logic                         ramp_run_o,  // 0 resets the ramp
  output logic [ADC_W-1:0]             count_o,
  output logic                         busy_o,
  output logic                         done_o,
  output logic [N_CMP-1:0][ADC_W-1:0]  code_o
);

  logic [N_CMP-1:0] latched_q;
  logic             last;

  assign last = (count_o == {ADC_W{1'b1}});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_o    <= 1'b0;
      done_o    <= 1'b0;
      count_o   <= '0;
      latched_q <= '0;
      code_o    <= '0;
    end else begin
      done_o <= 1'b0;
      if (!busy_o) begin
        if (start_i) begin
          busy_o    <= 1'b1;
          count_o   <= '0;
          latched_q <= '0;
        end
      end else begin
        for (int i = 0; i < N_CMP; i++) begin
          if (!latched_q[i] && (cmp_i[i] || last)) begin
            code_o[i]    <= count_o;
            latched_q[i] <= 1'b1;
          end
        end
        if (last) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
        end else begin
          count_o <= count_o + 1'b1;
        end
      end
    end
  end

  assign ramp_run_o = busy_o;

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   done_o |-> !busy_o);

endmodule
