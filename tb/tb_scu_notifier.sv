// tb_scu_notifier: self-checking testbench of the notifier extension.
//
// Fires random notifier triggers from all NC base-unit sources and the shared
// port, several per cycle, with random target masks (a quarter of them zero,
// meaning broadcast), and compares every event pulse, one cycle later, with a
// reference computed here per core and notifier number. Also checks that no
// event appears without a trigger.
module tb_scu_notifier;
  localparam int NC = 8, NN = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0]          tv;
  logic [NC-1:0][2:0]     tid;
  logic [NC-1:0][NC-1:0]  tmask;
  logic                   ev;
  logic [2:0]             eid;
  logic [NC-1:0]          emask;
  logic [NC-1:0][NN-1:0]  evt;

  scu_notifier #(.NC(NC), .N_NOTIF(NN)) dut (
    .clk_i(clk), .rst_ni(rst_n), .trig_valid_i(tv), .trig_id_i(tid), .trig_mask_i(tmask),
    .ext_valid_i(ev), .ext_id_i(eid), .ext_mask_i(emask), .evt_o(evt));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: core c sees notifier n if any source fires n with c in its mask
  function automatic logic [NC-1:0][NN-1:0] expect_evt();
    logic [NC-1:0][NN-1:0] e;
    e = '0;
    for (int c = 0; c < NC; c++)
      for (int n = 0; n < NN; n++) begin
        for (int s = 0; s < NC; s++)
          if (tv[s] && tid[s] == 3'(n) && (tmask[s] == 0 || tmask[s][c])) e[c][n] = 1'b1;
        if (ev && eid == 3'(n) && (emask == 0 || emask[c])) e[c][n] = 1'b1;
      end
    return e;
  endfunction

  logic [NC-1:0][NN-1:0] exp_q;
  int n_bcast = 0;

  initial begin
    tv = '0; tid = '0; tmask = '0; ev = 1'b0; eid = '0; emask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_zero: begin
      checks++;
      if (evt != '0) begin failures++; $display("FAIL: event without trigger"); end
    end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      for (int s = 0; s < NC; s++) begin
        tv[s]    = ($urandom_range(0, 3) == 0);
        tid[s]   = 3'($urandom_range(0, NN - 1));
        tmask[s] = ($urandom_range(0, 3) == 0) ? '0 : NC'($urandom);
        if (tv[s] && tmask[s] == 0) n_bcast++;
      end
      ev    = ($urandom_range(0, 4) == 0);
      eid   = 3'($urandom_range(0, NN - 1));
      emask = ($urandom_range(0, 3) == 0) ? '0 : NC'($urandom);
      exp_q = expect_evt();
      @(negedge clk);
      checks++;
      if (evt !== exp_q) begin
        failures++;
        $display("FAIL: iteration %0d got %h expected %h", i, evt, exp_q);
      end
      tv = '0; ev = 1'b0;
      @(negedge clk);
      checks++;
      if (evt != '0) begin failures++; $display("FAIL: event pulse longer than one cycle"); end
    end
    checks++;
    if (n_bcast == 0) begin failures++; $display("FAIL: no broadcast exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
