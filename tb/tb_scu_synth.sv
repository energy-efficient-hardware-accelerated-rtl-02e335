// tb_scu_synth: synthetic synchronization benchmarks on the SCU at its default
// size (8 cores, 4 barriers, 1 mutex).
//
// Workloads, each run on 2, 4 and 8 participating cores; every core executes a
// loop of 8 iterations with 32 primitives each (256 primitives per core):
//   - barrier: one event-load on barrier 0 per primitive, all cores arriving
//     together (worker and target mask = the participating cores);
//   - critical section of 5 and of 10 cycles: lock by event-load on mutex 0,
//     the section (a read-modify-write of a shared TCDM counter plus idle
//     cycles up to its length), unlock by a store that carries a message.
// The cores are behavioural: each issues its next access in the cycle after the
// previous answer, so the figures are the SCU's own cost without a core
// pipeline around it.
//
// Measured and checked:
//   - barrier: cycles per barrier equal for 2, 4 and 8 cores (the SCU's barrier
//     cost does not grow with the core count) and equal to the 4-cycle access
//     of the private link;
//   - critical sections: the shared counter equals the number of sections
//     (mutual exclusion), every lock answer carries the previous owner's
//     message, and the cost per section (cycles per loop pass divided by the
//     number of cores, minus the section length) is the same for 2, 4 and 8
//     cores: handing the mutex over takes a fixed number of cycles.
// The core-active cycles (clock enable high) per primitive are printed beside
// the totals. Reference figures of the original evaluation (core-visible
// cycles on real cores): barrier 6 at every core count; 5-cycle section
// 12/23/44 and 10-cycle section 13/24/50 for 2/4/8 cores.
module tb_scu_synth;
  import scu_pkg::*;

  localparam int NC = 8;
  localparam int ITER = 8, PRIMS = 32;
  localparam logic [31:0] TCDM_BASE = 32'h1000_0000;
  localparam logic [31:0] SCU_ALIAS = 32'h1020_C000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, m); end
  endtask

  data_req_t [NC-1:0] core_req, tcdm_req, per_req;
  link_rsp_t [NC-1:0] core_rsp, tcdm_rsp, per_rsp;
  shr_req_t  shr_req;
  link_rsp_t shr_rsp;
  logic [NC-1:0] busy, clk_en, irq_req;
  logic [NC-1:0][IRQ_ID_W-1:0] irq_id;
  logic ext_gnt;

  scu_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_rsp_o(core_rsp),
    .tcdm_req_o(tcdm_req), .tcdm_rsp_i(tcdm_rsp),
    .per_req_o(per_req), .per_rsp_i(per_rsp),
    .shr_req_i(shr_req), .shr_rsp_o(shr_rsp),
    .cluster_evt_i('0),
    .ext_evt_req_i(1'b0), .ext_evt_id_i(8'h00), .ext_evt_gnt_o(ext_gnt),
    .core_busy_i(busy), .clock_en_o(clk_en),
    .irq_req_o(irq_req), .irq_id_o(irq_id), .irq_ack_i('0), .irq_ack_id_i('0)
  );

  // single-cycle TCDM; peripheral port unused (answers nothing)
  logic [31:0] tcdm_mem [256];
  always_comb begin
    for (int c = 0; c < NC; c++) begin
      tcdm_rsp[c].gnt = tcdm_req[c].req;
      per_rsp[c]      = '0;
    end
  end
  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      tcdm_rsp[c].rvalid <= tcdm_req[c].req;
      if (tcdm_req[c].req) begin
        tcdm_rsp[c].rdata <= tcdm_mem[tcdm_req[c].addr[9:2]];
        if (tcdm_req[c].we) tcdm_mem[tcdm_req[c].addr[9:2]] <= tcdm_req[c].wdata;
      end
    end
  end

  // active (clock-enabled) cycles per core
  int active [NC];
  always @(posedge clk) for (int c = 0; c < NC; c++) if (clk_en[c]) active[c]++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------------------
  // core and host access helpers
  // ---------------------------------------------------------------------------
  // one access; the request goes out at the next falling edge
  task automatic access(input int c, input bit we, input logic [31:0] a, input logic [31:0] wd,
                        output logic [31:0] rd);
    @(negedge clk);
    core_req[c] = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: wd};
    #1;
    while (!core_rsp[c].gnt) begin
      @(negedge clk);
      busy[c] = 1'b0;
      #1;
    end
    @(negedge clk);
    core_req[c].req = 1'b0;
    busy[c] = 1'b1;
    #1;
    check(core_rsp[c].rvalid, "answer one cycle after the grant");
    rd = core_rsp[c].rdata;
  endtask

  task automatic host_write(input logic [15:0] a, input logic [31:0] wd);
    @(negedge clk);
    shr_req = '{req: 1'b1, we: 1'b1, addr: a, wdata: wd};
    @(negedge clk);
    shr_req = '0;
  endtask

  function automatic logic [31:0] priv(input scu_region_e r, input scu_mode_e m, input int inst);
    return SCU_ALIAS | {22'b0, r, m, 4'(inst), 2'b00};
  endfunction

  // ---------------------------------------------------------------------------
  // workloads
  // ---------------------------------------------------------------------------
  logic [31:0] last_msg;
  bit          first_lock;
  bit          in_crit;

  task automatic barrier_core(input int c);
    logic [31:0] rd;
    for (int i = 0; i < ITER * PRIMS; i++) begin
      access(c, 1'b0, priv(REG_BARR, MODE_WAIT_CLR, 0), '0, rd);
      if (i == 0) check(rd[EVT_BARRIER], "barrier event reported");
    end
  endtask

  task automatic crit_core(input int c, input int t_crit);
    logic [31:0] rd, v, msg;
    for (int i = 0; i < ITER * PRIMS; i++) begin
      access(c, 1'b0, priv(REG_MUTEX, MODE_WAIT_CLR, 0), '0, rd);
      check(!in_crit, "mutual exclusion");
      in_crit = 1'b1;
      if (!first_lock) check(rd == last_msg, "lock answer carries the previous owner's message");
      first_lock = 1'b0;
      // the section: load and store of the counter take 2 + 2 cycles here
      access(c, 1'b0, TCDM_BASE, '0, v);
      access(c, 1'b1, TCDM_BASE, v + 1, rd);
      repeat (t_crit - 4) @(negedge clk);
      in_crit = 1'b0;
      msg = {8'(c), 24'(v + 1)};
      last_msg = msg;
      access(c, 1'b1, priv(REG_MUTEX, MODE_TRIG, 0), msg, rd);
    end
  endtask

  int bar_cyc [3], crit_cyc [2][3];
  int bar_act [3], crit_act [2][3];

  task automatic clear_active();
    for (int c = 0; c < NC; c++) active[c] = 0;
  endtask
  function automatic int active_sum(input int np);
    int s = 0;
    for (int c = 0; c < np; c++) s += active[c];
    return s;
  endfunction

  initial begin
    int ncores [3] = '{2, 4, 8};
    int tcrit [2] = '{5, 10};
    int t0;
    core_req = '0; shr_req = '0; busy = '1;
    for (int i = 0; i < 256; i++) tcdm_mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // every core enables barrier and mutex events (register 0 through the private link)
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork
        begin
          logic [31:0] rd;
          access(cc, 1'b1, SCU_ALIAS, 32'h0000_0300, rd);
        end
      join_none
    end
    wait fork;

    // barriers
    for (int k = 0; k < 3; k++) begin
      int np;
      np = ncores[k];
      host_write(16'h4400, 32'((1 << np) - 1));
      host_write(16'h4404, 32'((1 << np) - 1));
      repeat (2) @(negedge clk);
      clear_active();
      t0 = cyc;
      for (int c = 0; c < np; c++) begin
        automatic int cc = c;
        fork barrier_core(cc); join_none
      end
      wait fork;
      bar_cyc[k] = cyc - t0;
      bar_act[k] = active_sum(np);
      $display("barrier, %0d cores: %0d cycles for %0d barriers, %0d.%02d cycles per barrier, %0d.%02d active cycles per core and barrier",
               np, bar_cyc[k], ITER * PRIMS, bar_cyc[k] / 256, (bar_cyc[k] % 256) * 100 / 256,
               bar_act[k] / (256 * np), (bar_act[k] % (256 * np)) * 100 / (256 * np));
    end
    for (int k = 0; k < 3; k++) begin
      check(bar_cyc[k] == bar_cyc[0], "barrier cost independent of the core count");
      check(bar_cyc[k] >= 4 * ITER * PRIMS && bar_cyc[k] <= 4 * ITER * PRIMS + 4,
            "one barrier every 4 cycles (4-cycle private-link access)");
    end

    // critical sections
    for (int j = 0; j < 2; j++) begin
      for (int k = 0; k < 3; k++) begin
        int np;
        np = ncores[k];
        tcdm_mem[0] = '0;
        first_lock = 1'b1;
        in_crit = 1'b0;
        repeat (2) @(negedge clk);
        clear_active();
        t0 = cyc;
        for (int c = 0; c < np; c++) begin
          automatic int cc = c;
          fork crit_core(cc, tcrit[j]); join_none
        end
        wait fork;
        crit_cyc[j][k] = cyc - t0;
        crit_act[j][k] = active_sum(np);
        check(tcdm_mem[0] == 32'(np * ITER * PRIMS), "every critical section executed once");
        $display("%0d-cycle critical section, %0d cores: %0d cycles, %0d.%02d cycles per loop pass, %0d.%02d per section",
                 tcrit[j], np, crit_cyc[j][k], crit_cyc[j][k] / 256, (crit_cyc[j][k] % 256) * 100 / 256,
                 crit_cyc[j][k] / (256 * np), (crit_cyc[j][k] % (256 * np)) * 100 / (256 * np));
      end
      // the hand-over cost per section is the same for every core count
      for (int k = 1; k < 3; k++) begin
        int per0, perk;
        per0 = crit_cyc[j][0] / (256 * ncores[0]);
        perk = crit_cyc[j][k] / (256 * ncores[k]);
        check(perk == per0, $sformatf("cycles per section independent of the core count (%0d vs %0d)", perk, per0));
        check(perk - tcrit[j] <= 4, "mutex hand-over within 4 cycles of the section");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
