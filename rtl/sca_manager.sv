// sca_manager: track-and-hold management of one channel's analogue memory.
//
// Each channel stores the slow shaper output (charge) and the TDC ramp (fine
// time) in a switched capacitor array of depth 2. The cells are handled as a
// FIFO: a cell tracks its input while free; a hold request (the delayed
// trigger, or the external hold) freezes the cell at the write pointer,
// records the coarse timestamp for it and moves the write pointer on. The
// oldest held cell (read pointer) is the one presented to the ADC by the
// internal read switch; when its conversion is finished the sequencer
// releases it, the cell returns to tracking and the read pointer moves on.
// A hold request that finds every cell occupied is dropped and reported on
// lost_o.
//
// The FIFO behaviour and the depth come from the chip description. The hold
// request comes from an asynchronous discriminator path, so it passes a
// two-flop synchroniser and is taken on its rising edge; the hold of the
// capacitor therefore closes 2 to 3 clock cycles (50 to 75 ns at 40 MHz)
// after the request, a latency the programmable trigger delay absorbs. That
// synchronous scheme is a choice of this design.
//
// Interface: cell_hold_o[k] is 1 while cell k holds a sample; rd_ptr_o selects
// the cell read out; pending_o says a held cell waits for conversion;
// rd_ts_o is the timestamp of that cell; release_i frees it.
module sca_manager #(
  parameter int unsigned DEPTH = 2,
  parameter int unsigned TS_W  = 24,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              enable_i,     // accept hold requests
  input  logic              hold_req_i,   // asynchronous hold request
  input  logic [TS_W-1:0]   ts_i,         // current coarse time
  input  logic              release_i,    // oldest cell converted
  output logic [DEPTH-1:0]  cell_hold_o,
  output logic [PTR_W-1:0]  rd_ptr_o,
  output logic              pending_o,
  output logic [TS_W-1:0]   rd_ts_o,
  output logic              lost_o
);

  logic [2:0]              sync_q;       // two synchroniser stages + edge
  logic                    hold_edge;
  logic [DEPTH-1:0]        full_q;
  logic [PTR_W-1:0]        wr_ptr_q, rd_ptr_q;
  logic [TS_W-1:0]         ts_mem_q [DEPTH];
  logic                    accept;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sync_q <= '0;
    else         sync_q <= {sync_q[1:0], hold_req_i};
  end

  assign hold_edge = sync_q[1] & ~sync_q[2] & enable_i;
  assign accept    = hold_edge & ~full_q[wr_ptr_q];

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q   <= '0;
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      lost_o   <= 1'b0;
      for (int k = 0; k < DEPTH; k++) ts_mem_q[k] <= '0;
    end else begin
      lost_o <= hold_edge & full_q[wr_ptr_q];
      if (release_i && full_q[rd_ptr_q]) begin
        full_q[rd_ptr_q] <= 1'b0;
        rd_ptr_q         <= next_ptr(rd_ptr_q);
      end
      if (accept) begin
        full_q[wr_ptr_q]   <= 1'b1;
        ts_mem_q[wr_ptr_q] <= ts_i;
        wr_ptr_q           <= next_ptr(wr_ptr_q);
      end
    end
  end

  assign cell_hold_o = full_q;
  assign rd_ptr_o    = rd_ptr_q;
  assign pending_o   = full_q[rd_ptr_q];
  assign rd_ts_o     = ts_mem_q[rd_ptr_q];

  // A cell is only released after it was held.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   release_i |-> full_q[rd_ptr_q]);

endmodule
