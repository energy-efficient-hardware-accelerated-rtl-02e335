// tb_scu_top: end-to-end testbench of the SCU with its core data demuxes, at the
// design's default size (8 cores, 4 barriers, 1 mutex).
//
// Around the design sit behavioural stand-ins for what the cluster provides:
//   - eight core models that issue loads, stores and event-loads (elw) on their
//     data ports, drop their busy flag while an event-load is stalled, and take
//     interrupts by abandoning the stalled event-load, acknowledging the
//     interrupt, running a handler and executing the same event-load again;
//   - a single-cycle TCDM (one word array, all ports granted at once);
//   - a peripheral interconnect that arbitrates the cores' peripheral requests
//     and those of an outside host onto the SCU's shared port.
//
// The cores run, in order:
//   1. barriers: random work, then one event-load on barrier 0; checks that no
//      core leaves before the last arrives, that all leave in the same cycle,
//      and that the last arriver's answer comes 3 cycles after its request
//      (a 4-cycle access, independent of the number of cores);
//   2. a sub-team barrier (workers 0-3 release targets 4-7);
//   3. critical sections on the mutex, each a read-modify-write of a TCDM
//      counter; checks mutual exclusion, the final count, and that every lock
//      answer is the message left by the previous owner;
//   4. notifiers: core 0 wakes cores 1-7, a broadcast from the host wakes all,
//      a self-notification gives an immediate grant without clock gating;
//   5. a cluster event line wakes a core;
//   6. external events over the asynchronous event bus interrupt core 0 while
//      it sleeps; its handler pops the FIFO through the shared port.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_scu_top;
  import scu_pkg::*;

  localparam int NC = 8;
  localparam logic [31:0] TCDM_BASE = 32'h1000_0000;
  localparam logic [31:0] SCU_ALIAS = 32'h1020_C000;  // private link window
  localparam logic [31:0] SCU_GLOB  = 32'h1020_0000;  // shared port window (peripheral)

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, m); end
  endtask

  // ---------------------------------------------------------------------------
  // DUT
  // ---------------------------------------------------------------------------
  data_req_t [NC-1:0] core_req, tcdm_req, per_req;
  link_rsp_t [NC-1:0] core_rsp, tcdm_rsp, per_rsp;
  shr_req_t  shr_req;
  link_rsp_t shr_rsp;
  logic [NC-1:0][N_CLUSTER_EVT-1:0] cl_evt;
  logic ext_req, ext_gnt;
  logic [7:0] ext_id;
  logic [NC-1:0] busy, clk_en, irq_req, irq_ack;
  logic [NC-1:0][IRQ_ID_W-1:0] irq_id, ack_id;

  scu_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_rsp_o(core_rsp),
    .tcdm_req_o(tcdm_req), .tcdm_rsp_i(tcdm_rsp),
    .per_req_o(per_req), .per_rsp_i(per_rsp),
    .shr_req_i(shr_req), .shr_rsp_o(shr_rsp),
    .cluster_evt_i(cl_evt),
    .ext_evt_req_i(ext_req), .ext_evt_id_i(ext_id), .ext_evt_gnt_o(ext_gnt),
    .core_busy_i(busy), .clock_en_o(clk_en),
    .irq_req_o(irq_req), .irq_id_o(irq_id), .irq_ack_i(irq_ack), .irq_ack_id_i(ack_id)
  );

  // ---------------------------------------------------------------------------
  // TCDM stand-in
  // ---------------------------------------------------------------------------
  logic [31:0] tcdm_mem [4096];
  always_comb for (int c = 0; c < NC; c++) tcdm_rsp[c].gnt = tcdm_req[c].req;
  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      tcdm_rsp[c].rvalid <= tcdm_req[c].req;
      if (tcdm_req[c].req) begin
        tcdm_rsp[c].rdata <= tcdm_mem[tcdm_req[c].addr[13:2]];
        if (tcdm_req[c].we) tcdm_mem[tcdm_req[c].addr[13:2]] <= tcdm_req[c].wdata;
      end
    end
  end

  // ---------------------------------------------------------------------------
  // peripheral interconnect stand-in: cores first (lowest index wins), host last
  // ---------------------------------------------------------------------------
  shr_req_t host_req;
  logic     host_gnt, host_rvalid;
  int       win, win_q;
  always_comb begin
    shr_req  = '0;
    win      = -1;
    host_gnt = 1'b0;
    for (int c = 0; c < NC; c++) per_rsp[c].gnt = 1'b0;
    for (int c = NC - 1; c >= 0; c--) if (per_req[c].req) win = c;
    if (win >= 0) begin
      shr_req = '{req: 1'b1, we: per_req[win].we, addr: per_req[win].addr[15:0],
                  wdata: per_req[win].wdata};
      per_rsp[win].gnt = shr_rsp.gnt;
    end else if (host_req.req) begin
      shr_req  = host_req;
      win      = NC;
      host_gnt = shr_rsp.gnt;
    end
    for (int c = 0; c < NC; c++) begin
      per_rsp[c].rvalid = shr_rsp.rvalid && win_q == c;
      per_rsp[c].rdata  = shr_rsp.rdata;
    end
    host_rvalid = shr_rsp.rvalid && win_q == NC;
  end
  always_ff @(posedge clk) win_q <= shr_req.req ? win : -1;

  task automatic host_access(input bit we, input logic [15:0] a, input logic [31:0] wd,
                             output logic [31:0] rd);
    @(negedge clk);
    host_req = '{req: 1'b1, we: we, addr: a, wdata: wd};
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    host_req.req = 1'b0;
    #1;
    check(host_rvalid, "host answer one cycle after grant");
    rd = shr_rsp.rdata;
  endtask

  // ---------------------------------------------------------------------------
  // mechanism counters
  // ---------------------------------------------------------------------------
  int n_gated_cycles = 0, n_sleeps = 0, n_immediate = 0, n_barrier = 0, n_subteam = 0;
  int n_mutex = 0, n_msg = 0, n_notif = 0, n_bcast = 0, n_cluster = 0, n_ext = 0;
  int n_irq = 0, n_reexec = 0, n_shared = 0, n_tcdm = 0;

  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) if (!clk_en[c]) n_gated_cycles++;

  // ---------------------------------------------------------------------------
  // core model
  // ---------------------------------------------------------------------------
  logic [7:0] ext_got [$];
  bit in_crit = 1'b0;

  function automatic logic [31:0] priv(input scu_region_e r, input scu_mode_e m, input int inst);
    return SCU_ALIAS | {22'b0, r, m, 4'(inst), 2'b00};
  endfunction
  function automatic logic [31:0] preg(input logic [5:0] idx);
    return SCU_ALIAS | {24'b0, idx, 2'b00};
  endfunction

  // plain load/store, no interrupt handling; returns data and stall cycles
  task automatic access(input int c, input bit we, input logic [31:0] a, input logic [31:0] wd,
                        output logic [31:0] rd, output int stall, output int t_req);
    @(negedge clk);
    core_req[c] = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: wd};
    t_req = cyc;
    #1;
    stall = 0;
    while (!core_rsp[c].gnt) begin
      @(negedge clk);
      stall++;
      busy[c] = 1'b0;            // an event-load releases the busy flag
      #1;
    end
    @(negedge clk);
    core_req[c].req = 1'b0;
    busy[c] = 1'b1;
    #1;
    check(core_rsp[c].rvalid, "core answer one cycle after grant");
    rd = core_rsp[c].rdata;
    if (stall > 1) n_sleeps++;
  endtask

  task automatic store(input int c, input logic [31:0] a, input logic [31:0] wd);
    logic [31:0] rd; int s, t;
    access(c, 1'b1, a, wd, rd, s, t);
  endtask
  task automatic load(input int c, input logic [31:0] a, output logic [31:0] rd);
    int s, t;
    access(c, 1'b0, a, '0, rd, s, t);
  endtask

  // interrupt handler of the external event FIFO: pop until empty
  task automatic fifo_handler(input int c);
    logic [31:0] rd;
    do begin
      load(c, SCU_GLOB | 32'h4800, rd);
      n_shared++;
      if (rd[31]) begin
        ext_got.push_back(rd[7:0]);
        n_ext++;
      end
    end while (rd[31]);
  endtask

  // event-load with interrupt support: re-executed after each handler
  task automatic elw(input int c, input logic [31:0] a, output logic [31:0] rd,
                     output int t_req, output int t_rsp);
    bit done;
    int stall;
    done = 1'b0;
    t_req = -1;
    while (!done) begin
      @(negedge clk);
      core_req[c] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
      if (t_req < 0) t_req = cyc;
      #1;
      stall = 0;
      while (!core_rsp[c].gnt && !irq_req[c]) begin
        @(negedge clk);
        stall++;
        busy[c] = 1'b0;
        #1;
      end
      if (core_rsp[c].gnt) begin
        @(negedge clk);
        core_req[c].req = 1'b0;
        busy[c] = 1'b1;
        #1;
        check(core_rsp[c].rvalid, "elw answer one cycle after grant");
        rd = core_rsp[c].rdata;
        t_rsp = cyc;
        if (stall == 0) n_immediate++;
        if (stall > 1) n_sleeps++;
        done = 1'b1;
      end else begin
        // interrupt: abandon the load, acknowledge, handle, then re-execute
        core_req[c].req = 1'b0;
        busy[c] = 1'b1;
        ack_id[c] = irq_id[c];
        irq_ack[c] = 1'b1;
        @(negedge clk);
        irq_ack[c] = 1'b0;
        n_irq++;
        fifo_handler(c);
        n_reexec++;
      end
    end
  endtask

  // ---------------------------------------------------------------------------
  // programs
  // ---------------------------------------------------------------------------
  localparam int ROUNDS = 20, CRIT = 6;
  int t_arr [NC], t_dep [NC];
  logic [31:0] last_unlock_msg = '0;
  bit          first_lock = 1'b1;

  task automatic barrier_phase(input int c);
    logic [31:0] rd; int tr, tp;
    for (int r = 0; r < ROUNDS; r++) begin
      repeat ($urandom_range(0, 25)) @(negedge clk);
      elw(c, priv(REG_BARR, MODE_WAIT_CLR, 0), rd, tr, tp);
      t_arr[c] = tr; t_dep[c] = tp;
      check(rd[EVT_BARRIER], "barrier answer shows the barrier event");
      // the last core to leave checks the round
      @(negedge clk);
      if (c == 0) begin
        int last_arr, dep0;
        repeat (2) @(negedge clk);
        last_arr = 0; dep0 = t_dep[0];
        for (int k = 0; k < NC; k++) if (t_arr[k] > last_arr) last_arr = t_arr[k];
        for (int k = 0; k < NC; k++) begin
          check(t_dep[k] >= last_arr, "no core leaves before the last arrival");
          check(t_dep[k] == dep0, "all cores leave the barrier in the same cycle");
        end
        check(dep0 - last_arr == 3, $sformatf("barrier answer 3 cycles after last request (%0d)", dep0 - last_arr));
        n_barrier++;
      end
      // keep the rounds apart: second barrier instance used as a separator
      elw(c, priv(REG_BARR, MODE_WAIT_CLR, 3), rd, tr, tp);
    end
  endtask

  task automatic subteam_phase(input int c);
    logic [31:0] rd; int tr, tp;
    if (c < 4) begin
      repeat (5 + 3 * c) @(negedge clk);
      store(c, priv(REG_BARR, MODE_TRIG, 1), '0);    // arrive, do not wait
    end else begin
      elw(c, priv(REG_BARR, MODE_WAIT_CLR, 1), rd, tr, tp);
      check(rd[EVT_BARRIER], "target core released by the sub-team barrier");
      if (c == 4) n_subteam++;
    end
  endtask

  task automatic mutex_phase(input int c);
    logic [31:0] rd, v; int tr, tp;
    for (int k = 0; k < CRIT; k++) begin
      repeat ($urandom_range(0, 6)) @(negedge clk);
      elw(c, priv(REG_MUTEX, MODE_WAIT_CLR, 0), rd, tr, tp);
      check(!in_crit, "mutual exclusion");
      in_crit = 1'b1;
      n_mutex++;
      if (!first_lock) begin
        check(rd == last_unlock_msg, "lock answer is the previous owner's message");
        n_msg++;
      end
      first_lock = 1'b0;
      load(c, TCDM_BASE + 32'h100, v);
      store(c, TCDM_BASE + 32'h100, v + 1);
      n_tcdm += 2;
      in_crit = 1'b0;
      last_unlock_msg = {8'(c), 8'(k), 16'(v + 1)};
      store(c, priv(REG_MUTEX, MODE_TRIG, 0), last_unlock_msg);
    end
  endtask

  task automatic notifier_phase(input int c);
    logic [31:0] rd; int tr, tp;
    if (c == 0) begin
      repeat (10) @(negedge clk);
      store(0, priv(REG_NOTIF, MODE_TRIG, 3), 32'hFE);   // cores 1..7
    end else begin
      elw(c, preg(R_EVENT_WAIT_CLR), rd, tr, tp);
      check(rd[3], "woken by notifier 3");
      if (c == 1) n_notif++;
    end
    // barrier separating the two notifier tests
    elw(c, priv(REG_BARR, MODE_WAIT_CLR, 0), rd, tr, tp);
    // host broadcast of notifier 4 (mask zero)
    elw(c, preg(R_EVENT_WAIT_CLR), rd, tr, tp);
    check(rd[4], "woken by broadcast notifier 4");
    if (c == 0) n_bcast++;
    // self notification: the event is buffered before the wait, immediate grant
    store(c, priv(REG_NOTIF, MODE_TRIG, 5), 32'(1 << c));
    repeat (3) @(negedge clk);
    begin
      elw(c, preg(R_EVENT_WAIT_CLR), rd, tr, tp);
      check(tp - tr == 1, "self-notification granted at once");
      check(rd[5], "self notification seen");
    end
  endtask

  // ---------------------------------------------------------------------------
  // watchdog
  // ---------------------------------------------------------------------------
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] ext_sent [$];

  task automatic ext_send(input logic [7:0] v);
    #2 ext_id = v;
    #1 ext_req = 1'b1;
    wait (ext_gnt);
    ext_sent.push_back(v);
    #3 ext_req = 1'b0;
    wait (!ext_gnt);
  endtask

  logic [31:0] hrd;

  initial begin
    core_req = '0; host_req = '0; cl_evt = '0; ext_req = 1'b0; ext_id = '0;
    busy = '1; irq_ack = '0; ack_id = '0;
    for (int i = 0; i < 4096; i++) tcdm_mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // host configuration through the shared port
    host_access(1'b1, 16'h4400, 32'hFF, hrd);   // barrier 0: workers all
    host_access(1'b1, 16'h4404, 32'hFF, hrd);   //            targets all
    host_access(1'b1, 16'h4410, 32'h0F, hrd);   // barrier 1: workers 0-3
    host_access(1'b1, 16'h4414, 32'hF0, hrd);   //            targets 4-7
    host_access(1'b1, 16'h4430, 32'hFF, hrd);   // barrier 3: all / all
    host_access(1'b1, 16'h4434, 32'hFF, hrd);
    host_access(1'b0, 16'h4414, '0, hrd);
    check(hrd == 32'hF0, "barrier configuration read-back");
    n_shared += 8;

    // every core enables its events (private link); core 0 also the FIFO interrupt
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork
        begin
          logic [31:0] rd;
          store(cc, preg(R_EVT_MASK), 32'h0000_0800 | 32'h0000_03FF & ~32'h0000_0080);
          load(cc, preg(R_EVT_MASK), rd);
          check(rd == 32'h0000_0B7F, "event mask written over the private link");
        end
      join_none
    end
    wait fork;
    // global view: read core 5's event mask through the shared port
    host_access(1'b0, 16'h1400 | 16'(R_EVT_MASK << 2), '0, hrd);
    check(hrd == 32'h0000_0B7F, "base unit reachable through the shared port");
    host_access(1'b1, 16'h0000 | 16'(R_IRQ_MASK << 2), 32'(1 << EVT_FIFO), hrd);
    n_shared += 2;

    // 1. barriers
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork barrier_phase(cc); join_none
    end
    wait fork;
    // 2. sub-team barrier
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork subteam_phase(cc); join_none
    end
    wait fork;
    // 3. critical sections
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork mutex_phase(cc); join_none
    end
    wait fork;
    check(tcdm_mem[32'h100 >> 2] == NC * CRIT, "shared counter equals the number of critical sections");
    // 4. notifiers (host sends the broadcast once all cores sleep again)
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork notifier_phase(cc); join_none
    end
    fork
      begin
        repeat (120) @(negedge clk);
        host_access(1'b1, 16'h4000 | (16'd4 << 2), 32'h0, hrd);   // broadcast
        n_shared++;
      end
    join_none
    wait fork;

    // 5. cluster event wakes core 2
    fork
      begin
        logic [31:0] rd; int tr, tp;
        elw(2, preg(R_EVENT_WAIT_CLR), rd, tr, tp);
        check(rd[EVT_CLUSTER_LSB], "woken by cluster event line 11");
        n_cluster++;
      end
      begin
        repeat (15) @(negedge clk);
        cl_evt[2][0] = 1'b1;
        @(negedge clk);
        cl_evt[2][0] = 1'b0;
      end
    join

    // 6. external events interrupt core 0 while it waits for notifier 6
    fork
      begin
        logic [31:0] rd; int tr, tp;
        elw(0, preg(R_EVENT_WAIT_CLR), rd, tr, tp);
        check(rd[6], "core 0 finally woken by notifier 6");
      end
      begin
        repeat (10) @(negedge clk);
        for (int k = 0; k < 5; k++) begin
          ext_send(8'(8'h30 + 17 * k));
          repeat (4) @(negedge clk);
        end
        repeat (80) @(negedge clk);
        store(1, priv(REG_NOTIF, MODE_TRIG, 6), 32'h01);
      end
    join
    check(ext_got.size() == 5, "all external events handled");
    for (int k = 0; k < ext_got.size() && k < ext_sent.size(); k++)
      check(ext_got[k] == ext_sent[k], "external event identifiers in order");

    repeat (5) @(negedge clk);
    $display("mechanisms: gated_cycles=%0d sleeps=%0d immediate=%0d barrier=%0d subteam=%0d mutex=%0d msg=%0d",
             n_gated_cycles, n_sleeps, n_immediate, n_barrier, n_subteam, n_mutex, n_msg);
    $display("            notif=%0d bcast=%0d cluster=%0d ext=%0d irq=%0d reexec=%0d shared=%0d tcdm=%0d",
             n_notif, n_bcast, n_cluster, n_ext, n_irq, n_reexec, n_shared, n_tcdm);
    check(n_gated_cycles > 0, "clock gating happened");
    check(n_sleeps > 0, "sleep and wake happened");
    check(n_immediate > 0, "immediate grant happened");
    check(n_barrier == ROUNDS, "barrier rounds");
    check(n_subteam > 0, "sub-team barrier happened");
    check(n_mutex == NC * CRIT, "mutex elections");
    check(n_msg > 0, "mutex message passing happened");
    check(n_notif > 0 && n_bcast > 0, "notifier and broadcast happened");
    check(n_cluster > 0, "cluster event wake-up happened");
    check(n_ext > 0 && n_irq > 0 && n_reexec > 0, "interrupt during sleep happened");
    check(n_shared > 0 && n_tcdm > 0, "shared port and TCDM paths used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
