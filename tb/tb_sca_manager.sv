// tb_sca_manager: self-checking test of the two-cell analogue memory
// manager. Random hold requests and releases are applied and compared with
// a reference FIFO kept in the testbench: which cells hold, which one is
// read, its timestamp, the loss of a request when both cells hold, the
// enable, and the 3-cycle latency from request to hold.
module tb_sca_manager;
  logic clk = 0, rst_n = 0, en = 0, hreq = 0, rel = 0;
  logic [23:0] ts = '0, rd_ts;
  logic [1:0]  hold;
  logic        rd_ptr, pend, lost;
  int checks = 0, failures = 0;
  int n_lost = 0, n_acc = 0, n_rel = 0;
  logic [23:0] q[$];

  always #12.5 clk = ~clk;

  sca_manager #(.DEPTH(2), .TS_W(24)) dut (.clk_i(clk), .rst_ni(rst_n), .enable_i(en),
    .hold_req_i(hreq), .ts_i(ts), .release_i(rel), .cell_hold_o(hold), .rd_ptr_o(rd_ptr),
    .pending_o(pend), .rd_ts_o(rd_ts), .lost_o(lost));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic check_state();
    check(pend == (q.size() > 0), $sformatf("pending %0b size %0d", pend, q.size()));
    check($countones(hold) == q.size(), $sformatf("cells held %b size %0d", hold, q.size()));
    if (q.size() > 0) check(rd_ts == q[0], $sformatf("rd_ts %h exp %h", rd_ts, q[0]));
  endtask

  // One hold request: raised at a negedge, held 3 cycles.
  task automatic do_hold();
    bit will_accept, saw_lost;
    ts = 24'($urandom);
    will_accept = en && (q.size() < 2);
    @(negedge clk); hreq = 1;
    @(negedge clk); @(negedge clk);
    // two edges after the request nothing has changed yet
    check($countones(hold) == q.size(), "no hold before 3 cycles");
    @(negedge clk); hreq = 0;
    saw_lost = lost;
    if (will_accept) begin q.push_back(ts); n_acc++; end
    check(saw_lost == (en && !will_accept), $sformatf("lost flag %0b", saw_lost));
    if (saw_lost) n_lost++;
    check_state();
    repeat (3) @(negedge clk);
    check_state();
  endtask

  task automatic do_release();
    @(negedge clk); rel = 1;
    @(negedge clk); rel = 0;
    void'(q.pop_front()); n_rel++;
    check_state();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1; en = 1;
    @(negedge clk);
    check_state();
    // fill, overflow, drain
    do_hold(); do_hold(); do_hold();
    check(n_lost == 1, "third request lost");
    do_release(); do_hold(); do_release(); do_release();
    check(q.size() == 0, "empty");
    // disabled requests are ignored
    en = 0; do_hold(); en = 1;
    check(q.size() == 0 && !pend, "ignored while disabled");
    for (int it = 0; it < 400; it++) begin
      if (q.size() > 0 && (($urandom % 2) != 0)) do_release();
      else do_hold();
    end
    check(n_lost > 1 && n_rel > 100, "mix of losses and releases");
    $display("accepted %0d lost %0d released %0d", n_acc, n_lost, n_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
