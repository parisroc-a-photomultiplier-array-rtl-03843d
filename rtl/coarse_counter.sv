// coarse_counter: free-running coarse time counter (timestamp).
//
// The counter advances by one on every 10 MHz tick while an acquisition is
// running, giving a 100 ns coarse time step over 24 bits (about 1.68 s before
// it wraps). The finer part of the arrival time comes from the analogue TDC
// ramp, which restarts at every tick; the tick output therefore also serves as
// the ramp restart strobe. The counter is started and stopped by the
// sequencer: it is held at zero while run_i is low and counts while it is
// high. Width and rate follow the chip description; the clear-on-stop
// behaviour and the use of a 40 MHz clock with a 10 MHz enable are choices of
// this design.
//
// Interface: clk_i (40 MHz), rst_ni (asynchronous, active low), tick_i (one
// clk_i cycle in four), run_i, count_o. count_o changes one cycle after a
// tick in which run_i is high.
module coarse_counter #(
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             tick_i,
  input  logic             run_i,
  output logic [WIDTH-1:0] count_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)          count_o <= '0;
    else if (!run_i)      count_o <= '0;
    else if (tick_i)      count_o <= count_o + 1'b1;
  end

endmodule
