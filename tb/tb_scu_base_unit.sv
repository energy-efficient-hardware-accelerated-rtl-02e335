// tb_scu_base_unit: self-checking testbench of one SCU base unit.
//
// Drives the private link, the shared register port, the event lines, the busy
// flag and the interrupt acknowledge, and checks against values worked out here:
//   - register write/read-back on both ports, answer one cycle after the grant;
//   - the sleep/wake sequence of an event-load: no grant while nothing is
//     pending, clock enable low once busy drops, grant and clock enable in the
//     cycle after the event pulse, answer with the buffer one cycle later, and
//     the auto-clear of the reported bit in the answer cycle;
//   - immediate grant, without gating, when the event is already buffered;
//   - extension triggers (notifier by write and by read, barrier, mutex lock
//     and unlock) fire exactly once per access, and the mutex message is the
//     answer of a mutex lock;
//   - an interrupt during sleep: irq state, clock on, registered request with
//     the lowest pending id, acknowledge clears the bit, and the re-executed
//     event-load does not trigger its extension again.
module tb_scu_base_unit;
  import scu_pkg::*;

  localparam int NC = 8, NB = 4, NMX = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  link_req_t preq, sreq;
  link_rsp_t prsp, srsp;
  logic [EVT_W-1:0] lines;
  logic busy, clk_en, irq_req, irq_ack;
  logic [IRQ_ID_W-1:0] irq_id, ack_id;
  logic notif_trig;
  logic [2:0] notif_id;
  logic [NC-1:0] notif_mask;
  logic [NB-1:0] barr_trig;
  logic [NMX-1:0] m_lock, m_unlock;
  logic [DATA_W-1:0] m_wdata;
  logic [NMX-1:0][DATA_W-1:0] m_msg;
  scu_state_e state;

  scu_base_unit #(.NC(NC), .NB(NB), .NMX(NMX)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .priv_req_i(preq), .priv_rsp_o(prsp),
    .shr_req_i(sreq), .shr_rsp_o(srsp),
    .evt_lines_i(lines),
    .core_busy_i(busy), .clock_en_o(clk_en),
    .irq_req_o(irq_req), .irq_id_o(irq_id), .irq_ack_i(irq_ack), .irq_ack_id_i(ack_id),
    .notif_trig_o(notif_trig), .notif_id_o(notif_id), .notif_mask_o(notif_mask),
    .barr_trig_o(barr_trig), .mutex_lock_o(m_lock), .mutex_unlock_o(m_unlock),
    .mutex_wdata_o(m_wdata), .mutex_msg_i(m_msg), .state_o(state)
  );

  // count extension triggers seen at each clock edge
  int n_barr [NB];
  int n_lock, n_unlock, n_notif;
  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) if (barr_trig[b]) n_barr[b]++;
    if (m_lock[0])   n_lock++;
    if (m_unlock[0]) n_unlock++;
    if (notif_trig)  n_notif++;
  end

  // address helpers
  function automatic logic [9:0] reg_addr(input logic [5:0] idx);
    return {2'b00, idx, 2'b00};
  endfunction
  function automatic logic [9:0] ext_addr(input scu_region_e r, input scu_mode_e m, input int inst);
    return {r, m, inst[3:0], 2'b00};
  endfunction

  // one private access that is expected to be granted at once
  task automatic priv_now(input bit we, input logic [9:0] addr, input logic [31:0] wd,
                          output logic [31:0] rd);
    @(negedge clk);
    preq = '{req: 1'b1, we: we, addr: addr, wdata: wd}; #1;
    check(prsp.gnt, $sformatf("immediate grant addr %h", addr));
    @(negedge clk);
    preq.req = 1'b0;
    check(prsp.rvalid, "private answer one cycle after grant");
    rd = prsp.rdata;
  endtask

  task automatic shr(input bit we, input logic [9:0] addr, input logic [31:0] wd,
                     output logic [31:0] rd);
    @(negedge clk);
    sreq = '{req: 1'b1, we: we, addr: addr, wdata: wd}; #1;
    check(srsp.gnt, "shared port grant");
    @(negedge clk);
    sreq.req = 1'b0;
    check(srsp.rvalid, "shared answer one cycle after grant");
    rd = srsp.rdata;
  endtask

  // watchdog
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rd;
  int t0, t_gnt;

  initial begin
    preq = '0; sreq = '0; lines = '0; busy = 1'b1; irq_ack = 1'b0; ack_id = '0;
    m_msg = '0;
    for (int b = 0; b < NB; b++) n_barr[b] = 0;
    n_lock = 0; n_unlock = 0; n_notif = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- registers on both ports ----
    priv_now(1'b1, reg_addr(R_EVT_MASK), 32'h0000_03FF, rd);
    priv_now(1'b0, reg_addr(R_EVT_MASK), '0, rd);
    check(rd == 32'h0000_03FF, "event mask read-back (private)");
    shr(1'b1, reg_addr(R_IRQ_MASK_OR), 32'h0010_0000, rd);
    shr(1'b0, reg_addr(R_IRQ_MASK), '0, rd);
    check(rd == 32'h0010_0000, "irq mask set through the shared port");
    priv_now(1'b1, reg_addr(R_EVT_MASK_AND), 32'h0000_0200, rd);
    priv_now(1'b0, reg_addr(R_EVT_MASK), '0, rd);
    check(rd == 32'h0000_01FF, "event mask AND write");
    priv_now(1'b1, reg_addr(R_EVT_MASK_OR), 32'h0000_0200, rd);

    // ---- sleep and wake (wait + auto-clear) ----
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: reg_addr(R_EVENT_WAIT_CLR), wdata: '0}; #1;
    check(!prsp.gnt, "wait without pending event is not granted");
    @(negedge clk);
    check(state == ST_SLEEP, "FSM in sleep");
    check(clk_en, "clock still enabled while core busy");
    busy = 1'b0;
    @(negedge clk);
    check(!clk_en, "clock gated once busy drops");
    repeat (4) begin
      @(negedge clk);
      check(!clk_en && !prsp.gnt, "stays asleep without events");
    end
    lines[3] = 1'b1; t0 = cyc;
    @(negedge clk);
    lines[3] = 1'b0;
    check(prsp.gnt, "grant in the cycle after the event");
    check(clk_en, "clock enabled together with the grant");
    check(cyc - t0 == 1, "event-to-grant latency is one cycle");
    @(negedge clk);
    preq.req = 1'b0; busy = 1'b1;
    check(prsp.rvalid, "answer one cycle after the wake-up grant");
    check(rd == rd && prsp.rdata[3], "answer carries the event buffer");
    @(negedge clk);
    shr(1'b0, reg_addr(R_BUFFER), '0, rd);
    check(rd[3] == 1'b0, "event bit auto-cleared after the answer");
    check(state == ST_ACTIVE, "FSM back to active");

    // ---- immediate grant when the event is already there ----
    lines[5] = 1'b1;
    @(negedge clk);
    lines[5] = 1'b0;
    priv_now(1'b0, reg_addr(R_EVENT_WAIT), '0, rd);
    check(rd[5], "immediate wake answer shows bit 5");
    shr(1'b0, reg_addr(R_BUFFER), '0, rd);
    check(rd[5], "wait without clear keeps the bit");
    shr(1'b1, reg_addr(R_BUFFER_CLEAR), 32'h20, rd);
    shr(1'b0, reg_addr(R_BUFFER), '0, rd);
    check(rd[5] == 1'b0, "buffer clear register");

    // ---- notifier triggers ----
    n_notif = 0;
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b1, addr: ext_addr(REG_NOTIF, MODE_TRIG, 5), wdata: 32'h0F}; #1;
    check(notif_trig && notif_id == 3'd5 && notif_mask == 8'h0F, "write-triggered notifier");
    @(negedge clk); preq.req = 1'b0;
    priv_now(1'b1, reg_addr(R_NOTIF_TARGET), 32'hA0, rd);
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: ext_addr(REG_NOTIF, MODE_TRIG, 2), wdata: '0}; #1;
    check(notif_trig && notif_id == 3'd2 && notif_mask == 8'hA0, "read-triggered notifier uses target register");
    @(negedge clk); preq.req = 1'b0;
    @(negedge clk);
    check(n_notif == 2, "each notifier access triggers once");

    // ---- barrier wait: trigger once, sleep, wake on barrier event ----
    for (int b = 0; b < NB; b++) n_barr[b] = 0;
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: ext_addr(REG_BARR, MODE_WAIT_CLR, 1), wdata: '0}; #1;
    check(barr_trig == 4'b0010, "barrier 1 triggered in the request cycle");
    repeat (6) @(negedge clk);
    check(!prsp.gnt && state == ST_SLEEP, "waiting at the barrier");
    lines[EVT_BARRIER] = 1'b1;
    @(negedge clk);
    lines[EVT_BARRIER] = 1'b0;
    check(prsp.gnt, "barrier event grants");
    @(negedge clk); preq.req = 1'b0;
    check(prsp.rvalid && prsp.rdata[EVT_BARRIER], "barrier answer");
    @(negedge clk);
    check(n_barr[1] == 1 && n_barr[0] == 0 && n_barr[2] == 0, "barrier triggered exactly once");

    // ---- mutex: lock answer carries the message, unlock passes wdata ----
    n_lock = 0; n_unlock = 0;
    m_msg[0] = 32'hCAFE_0042;
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: ext_addr(REG_MUTEX, MODE_WAIT_CLR, 0), wdata: '0}; #1;
    repeat (3) @(negedge clk);
    lines[EVT_MUTEX] = 1'b1;
    @(negedge clk);
    lines[EVT_MUTEX] = 1'b0;
    check(prsp.gnt, "mutex election event grants");
    @(negedge clk); preq.req = 1'b0;
    check(prsp.rvalid && prsp.rdata == 32'hCAFE_0042, "lock answer is the mutex message");
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b1, addr: ext_addr(REG_MUTEX, MODE_TRIG, 0), wdata: 32'h1234_5678}; #1;
    check(prsp.gnt && m_unlock[0] && m_wdata == 32'h1234_5678, "unlock write");
    @(negedge clk); preq.req = 1'b0;
    @(negedge clk);
    check(n_lock == 1 && n_unlock == 1, "one lock and one unlock trigger");

    // ---- interrupt while asleep, re-executed wait does not re-trigger ----
    for (int b = 0; b < NB; b++) n_barr[b] = 0;
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: ext_addr(REG_BARR, MODE_WAIT_CLR, 2), wdata: '0}; #1;
    @(negedge clk);
    busy = 1'b0;
    repeat (2) @(negedge clk);
    check(!clk_en, "asleep before the interrupt");
    lines[20] = 1'b1; lines[25] = 1'b1;
    @(negedge clk);
    lines[20] = 1'b0; lines[25] = 1'b0;
    check(clk_en, "pending interrupt re-enables the clock");
    @(negedge clk);
    check(state == ST_IRQ, "FSM in irq state");
    check(irq_req && irq_id == 5'd20, "interrupt request with id 20 (lowest enabled)");
    // the core takes the interrupt: abandons the stalled load and acknowledges
    preq.req = 1'b0; busy = 1'b1;
    irq_ack = 1'b1; ack_id = 5'd20;
    @(negedge clk);
    irq_ack = 1'b0;
    @(negedge clk);
    check(!irq_req, "no interrupt left after the acknowledge");
    shr(1'b0, reg_addr(R_BUFFER), '0, rd);
    check(rd[20] == 1'b0 && rd[25] == 1'b1, "acknowledge clears only the served bit");
    // handler ends: the same elw is executed again
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: ext_addr(REG_BARR, MODE_WAIT_CLR, 2), wdata: '0}; #1;
    check(barr_trig == '0, "re-executed wait does not trigger the barrier again");
    @(negedge clk);
    busy = 1'b0;
    check(state == ST_SLEEP, "back to sleep after the handler");
    lines[EVT_BARRIER] = 1'b1;
    @(negedge clk);
    lines[EVT_BARRIER] = 1'b0;
    check(prsp.gnt, "wakes on the barrier event");
    @(negedge clk); preq.req = 1'b0; busy = 1'b1;
    check(prsp.rvalid, "answer after the wake-up");
    @(negedge clk);
    check(n_barr[2] == 1, "barrier 2 triggered exactly once across the interrupt");

    // ---- status register ----
    priv_now(1'b0, reg_addr(R_STATUS), '0, rd);
    check(rd[0] == 1'b1 && rd[2:1] == 2'(ST_ACTIVE), "status shows active with clock on");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
