// tb_scu_event_fifo: self-checking testbench of the external event FIFO.
//
// A sender process drives the asynchronous four-phase request/grant bus with
// its own clock phase (requests change between clock edges), a reader pops
// events. Checks: events come out in order with their identifiers, the event
// line is high exactly while events are queued, the grant is withheld while the
// FIFO is full and no event is lost or duplicated, the write latency of the
// synchronizer, and that a pop of an empty FIFO changes nothing.
module tb_scu_event_fifo;
  localparam int DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, gnt, pop, hvalid, evt;
  logic [7:0] id, head;

  scu_event_fifo #(.ID_W(8), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .evt_req_i(req), .evt_id_i(id), .evt_gnt_o(gnt),
    .pop_i(pop), .head_o(head), .head_valid_o(hvalid), .evt_o(evt));

  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] sent [$];
  int n_sent = 0, n_recv = 0, full_stalls = 0;

  task automatic send(input logic [7:0] v);
    #3 id = v;
    #1 req = 1'b1;
    wait (gnt);
    sent.push_back(v);
    n_sent++;
    #2 req = 1'b0;
    wait (!gnt);
  endtask

  task automatic pop_one(output logic [7:0] v);
    @(negedge clk);
    v = head;
    check(hvalid && evt, "event line high while queued");
    pop = 1'b1;
    @(negedge clk);
    pop = 1'b0;
  endtask

  logic [7:0] v, e;
  int t_req;

  initial begin
    req = 0; id = '0; pop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!evt && !hvalid, "empty after reset");
    pop = 1'b1;
    @(negedge clk);
    pop = 1'b0;
    check(!evt, "pop of an empty FIFO does nothing");

    // latency of one event
    @(negedge clk);
    id = 8'hA5; req = 1'b1; t_req = 0;
    while (!evt) begin @(negedge clk); t_req++; end
    check(t_req == 3, "event visible three cycles after the request");
    check(gnt, "granted");
    sent.push_back(8'hA5); n_sent++;
    req = 1'b0;
    wait (!gnt);
    pop_one(v);
    check(v == 8'hA5, "single event identifier");
    sent.pop_front();
    n_recv++;
    @(negedge clk);
    check(!evt, "event line low when empty");

    // fill beyond the depth: the sender must stall
    fork
      begin
        for (int k = 0; k < DEPTH + 3; k++) send(8'(k * 7 + 1));
      end
      begin
        repeat (60) @(negedge clk);
        check(n_sent == DEPTH + 1, "grant withheld while full");
        if (n_sent == DEPTH + 1) full_stalls++;
        for (int k = 0; k < DEPTH + 3; k++) begin
          while (!hvalid) @(negedge clk);
          pop_one(v);
          e = sent[0];
          sent.pop_front();
          check(v == e, $sformatf("order: got %h expected %h", v, e));
          n_recv++;
        end
      end
    join

    // random traffic
    fork
      begin
        for (int k = 0; k < 200; k++) begin
          send(8'($urandom));
          repeat ($urandom_range(0, 3)) @(negedge clk);
        end
      end
      begin
        for (int k = 0; k < 200; k++) begin
          while (!hvalid) @(negedge clk);
          repeat ($urandom_range(0, 4)) @(negedge clk);
          pop_one(v);
          e = sent[0];
          sent.pop_front();
          check(v == e, "order under random traffic");
          n_recv++;
        end
      end
    join
    @(negedge clk);
    check(n_recv == n_sent && !evt, "every event received once");
    check(full_stalls == 1, "full condition exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
