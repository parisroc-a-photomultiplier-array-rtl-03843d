// tb_event_registers: self-checking test of the result registers. Random
// loads with random channel masks and clears are compared with a reference
// copy kept in the testbench.
module tb_event_registers;
  import parisroc_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, load = 0, clr = 0;
  logic [N-1:0] mask, valid;
  logic [N-1:0][TS_W-1:0] ts, ts_o;
  logic [N-1:0][ADC_W-1:0] q, t, q_o, t_o;
  logic [N-1:0] e_valid;
  logic [N-1:0][TS_W-1:0] e_ts;
  logic [N-1:0][ADC_W-1:0] e_q, e_t;
  int checks = 0, failures = 0;

  always #12.5 clk = ~clk;

  event_registers #(.NCH(N)) dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load), .load_mask_i(mask),
    .ts_i(ts), .charge_i(q), .fine_i(t), .clear_i(clr), .valid_o(valid), .ts_o(ts_o),
    .charge_o(q_o), .fine_o(t_o));

  initial begin
    e_valid = '0; e_ts = '0; e_q = '0; e_t = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      mask = N'($urandom);
      for (int i = 0; i < N; i++) begin ts[i] = TS_W'($urandom); q[i] = ADC_W'($urandom); t[i] = ADC_W'($urandom); end
      load = ($urandom % 2) == 0; clr = ($urandom % 5) == 0;
      @(negedge clk);
      if (clr) e_valid = '0;
      else if (load)
        for (int i = 0; i < N; i++) if (mask[i]) begin
          e_valid[i] = 1; e_ts[i] = ts[i]; e_q[i] = q[i]; e_t[i] = t[i];
        end
      checks++;
      if (valid !== e_valid) begin failures++; $display("FAIL valid it %0d", it); end
      for (int i = 0; i < N; i++) if (e_valid[i]) begin
        checks++;
        if (ts_o[i] !== e_ts[i] || q_o[i] !== e_q[i] || t_o[i] !== e_t[i]) begin
          failures++; $display("FAIL data it %0d ch %0d", it, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
