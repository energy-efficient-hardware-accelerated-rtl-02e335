// tb_scu_mutex: self-checking testbench of one mutex extension.
//
// Random cores request the lock (as an event-load would) and the current owner
// releases it after a random critical section of 1 to 10 cycles with a random
// message. Checked against a model kept here: at most one election at a time,
// only of a core that is waiting, never while another core owns the mutex, in
// the cycle after the request (free mutex) or after the owner's unlock, the
// message of the previous owner delivered with the election, owner/locked
// outputs, that unlocks by cores other than the owner are ignored, and that
// every request is served in the end.
module tb_scu_mutex;
  localparam int NC = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] lock, unlock, evt;
  logic [NC-1:0][31:0] umsg;
  logic [31:0] msg;
  logic locked;
  logic [2:0] owner;

  scu_mutex #(.NC(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .lock_i(lock), .unlock_i(unlock), .unlock_msg_i(umsg),
    .evt_o(evt), .msg_o(msg), .locked_o(locked), .owner_o(owner));

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

  logic [NC-1:0] waiting;
  int  cur_owner;          // -1: free
  int  hold;
  logic [31:0] last_msg;
  bit  prev_free_req;      // previous cycle: mutex free and a request arrived
  bit  prev_release_pend;  // previous cycle: owner released with others waiting
  int  requests = 0, grants = 0, handovers = 0, strays = 0;
  int  rel_core;
  bit  released_now;

  initial begin
    lock = '0; unlock = '0; umsg = '0;
    waiting = '0; cur_owner = -1; hold = 0; last_msg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // outputs of the previous cycle's decisions
      check($countones(evt) <= 1, "at most one election per cycle");
      if (evt != '0) begin
        int e;
        e = $clog2(evt);
        check(waiting[e], "elected core was waiting");
        check(cur_owner == -1, "no election while owned");
        check(msg == last_msg, "message of the previous owner delivered");
        check(locked && owner == 3'(e), "owner output");
        waiting[e] = 1'b0;
        cur_owner = e;
        hold = $urandom_range(1, 10);
        grants++;
      end else begin
        check(!(prev_free_req || prev_release_pend), "election in the cycle after request or unlock");
      end
      // drive this cycle
      lock = '0; unlock = '0;
      released_now = 1'b0;
      prev_release_pend = 1'b0;
      prev_free_req = 1'b0;
      if (cur_owner >= 0) begin
        hold--;
        if (hold == 0) begin
          unlock[cur_owner] = 1'b1;
          umsg[cur_owner] = $urandom;
          last_msg = umsg[cur_owner];
          rel_core = cur_owner;
          released_now = 1'b1;
          cur_owner = -1;
          handovers++;
        end
      end
      if (i < 2700) begin
        for (int c = 0; c < NC; c++)
          if (!waiting[c] && c != cur_owner && !unlock[c] && $urandom_range(0, 9) == 0) begin
            lock[c] = 1'b1;
            waiting[c] = 1'b1;
            requests++;
          end
      end
      // stray unlock by a core that does not own the mutex: must be ignored
      if ($urandom_range(0, 7) == 0) begin
        int s;
        s = $urandom_range(0, NC - 1);
        if (s != cur_owner && !(released_now && s == rel_core) && !waiting[s]) begin
          unlock[s] = 1'b1;
          umsg[s] = $urandom;
          strays++;
        end
      end
      if (cur_owner == -1 && waiting != '0) begin
        if (released_now) prev_release_pend = 1'b1;
        else              prev_free_req = 1'b1;
      end
    end
    check(waiting == '0 && cur_owner == -1, "all requests served");
    check(grants == requests && grants > 100, "grant count equals request count");
    check(handovers > 100, "owner hand-overs exercised");
    check(strays > 50, "unlocks by non-owners exercised");
    $display("requests=%0d grants=%0d", requests, grants);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
