// tb_trigger_logic: self-checking test of the discriminator multiplexer,
// the trigger OR and the hold requests, with random inputs compared
// against a bit-by-bit reference.
module tb_trigger_logic;
  localparam int N = 16;
  logic [N-1:0] da, db, td, trig, hold;
  logic sel, ext, tor;
  int checks = 0, failures = 0;

  trigger_logic #(.N_CH(N)) dut (.discri_a_i(da), .discri_b_i(db), .sel_b_i(sel),
    .trig_delayed_i(td), .ext_hold_i(ext), .trig_o(trig), .trig_or_o(tor), .hold_req_o(hold));

  initial begin
    for (int it = 0; it < 2000; it++) begin
      logic [N-1:0] et, eh; logic eo;
      da = N'($urandom); db = N'($urandom); td = N'($urandom);
      if (it % 4 == 0) begin da = '0; db = '0; end
      if (it % 7 == 0) da = N'(1) << (it % N);
      sel = 1'($urandom); ext = ($urandom % 5) == 0;
      #1;
      eo = 0;
      for (int i = 0; i < N; i++) begin
        et[i] = sel ? db[i] : da[i];
        eh[i] = td[i] || ext;
        eo = eo || et[i];
      end
      checks++; if (trig !== et) begin failures++; $display("FAIL trig it=%0d", it); end
      checks++; if (tor !== eo) begin failures++; $display("FAIL or it=%0d", it); end
      checks++; if (hold !== eh) begin failures++; $display("FAIL hold it=%0d", it); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
