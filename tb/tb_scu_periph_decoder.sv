// tb_scu_periph_decoder: self-checking testbench of the shared-port decoder.
//
// Stand-ins for the base units answer with a unit-specific word; stand-ins for
// the barriers and the FIFO provide readable values. Checks: each base-unit
// window reaches only its unit with the low address bits and data intact and
// returns that unit's answer; notifier writes fire the external trigger with
// id and mask; barrier writes hit the right register of the right barrier;
// barrier reads return worker, target and status; a FIFO read pops once and
// returns {valid, id}; every access is granted at once and answered one cycle
// later; unmapped addresses read zero.
module tb_scu_periph_decoder;
  import scu_pkg::*;
  localparam int NC = 8, NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  shr_req_t sreq;
  link_rsp_t srsp;
  link_req_t [NC-1:0] ureq;
  link_rsp_t [NC-1:0] ursp;
  logic nv; logic [2:0] nid; logic [NC-1:0] nmask;
  logic [NB-1:0] wwe, twe, awe;
  logic [NC-1:0] bwd;
  logic [NB-1:0][NC-1:0] bw, bt, bs;
  logic pop, fvalid; logic [7:0] fhead;

  scu_periph_decoder #(.NC(NC), .NB(NB), .ID_W(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .shr_req_i(sreq), .shr_rsp_o(srsp),
    .unit_req_o(ureq), .unit_rsp_i(ursp),
    .notif_valid_o(nv), .notif_id_o(nid), .notif_mask_o(nmask),
    .barr_worker_we_o(wwe), .barr_target_we_o(twe), .barr_arrive_we_o(awe), .barr_wdata_o(bwd),
    .barr_worker_i(bw), .barr_target_i(bt), .barr_status_i(bs),
    .fifo_pop_o(pop), .fifo_head_i(fhead), .fifo_valid_i(fvalid));

  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // unit stand-ins: answer one cycle after a request with {unit, addr}
  always_ff @(posedge clk) begin
    for (int u = 0; u < NC; u++) begin
      ursp[u].gnt    <= 1'b0;
      ursp[u].rvalid <= ureq[u].req;
      if (ureq[u].req) ursp[u].rdata <= {8'(u), 14'h0, ureq[u].addr};
    end
  end

  task automatic access(input bit we, input logic [15:0] a, input logic [31:0] wd,
                        output logic [31:0] rd);
    @(negedge clk);
    sreq = '{req: 1'b1, we: we, addr: a, wdata: wd};
    #1;
    check(srsp.gnt, "granted at once");
    @(negedge clk);
    sreq.req = 1'b0;
    #1;
    check(srsp.rvalid, "answer one cycle after the grant");
    rd = srsp.rdata;
  endtask

  logic [31:0] rd;
  int hits;

  initial begin
    sreq = '0;
    for (int b = 0; b < NB; b++) begin
      bw[b] = NC'(8'h11 * (b + 1)); bt[b] = NC'(8'h0F ^ b); bs[b] = NC'(8'h80 >> b);
    end
    fhead = 8'h5C; fvalid = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // base-unit windows
    for (int u = 0; u < NC; u++) begin
      logic [9:0] a;
      a = 10'($urandom) & 10'h0FC;
      @(negedge clk);
      sreq = '{req: 1'b1, we: 1'b1, addr: {2'b00, 4'(u), a}, wdata: 32'hDEAD_0000 + u};
      #1;
      hits = 0;
      for (int v = 0; v < NC; v++) if (ureq[v].req) hits++;
      check(hits == 1 && ureq[u].req && ureq[u].addr == a && ureq[u].we &&
            ureq[u].wdata == 32'hDEAD_0000 + u, "write routed to its unit only");
      @(negedge clk);
      sreq.req = 1'b0;
      access(1'b0, {2'b00, 4'(u), a}, '0, rd);
      check(rd == {8'(u), 14'h0, a}, "answer of the addressed unit");
    end

    // notifier external trigger
    @(negedge clk);
    sreq = '{req: 1'b1, we: 1'b1, addr: 16'h4000 | (16'd6 << 2), wdata: 32'h0000_0033};
    #1;
    check(nv && nid == 3'd6 && nmask == 8'h33, "notifier external trigger");
    hits = 0;
    for (int v = 0; v < NC; v++) if (ureq[v].req) hits++;
    check(hits == 0 && pop == 1'b0 && wwe == '0, "no other target hit");
    @(negedge clk); sreq.req = 1'b0;

    // barrier configuration writes and reads
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < 3; r++) begin
        @(negedge clk);
        sreq = '{req: 1'b1, we: 1'b1, addr: 16'h4400 | 16'(b << 4) | 16'(r << 2), wdata: 32'h0000_00C3};
        #1;
        check(wwe == ((r == 0) ? NB'(1 << b) : '0) && twe == ((r == 1) ? NB'(1 << b) : '0) &&
              awe == ((r == 2) ? NB'(1 << b) : '0) && bwd == 8'hC3, "barrier register write decode");
        @(negedge clk); sreq.req = 1'b0;
      end
      access(1'b0, 16'h4400 | 16'(b << 4), '0, rd);
      check(rd == 32'(bw[b]), "barrier worker mask read");
      access(1'b0, 16'h4404 | 16'(b << 4), '0, rd);
      check(rd == 32'(bt[b]), "barrier target mask read");
      access(1'b0, 16'h4408 | 16'(b << 4), '0, rd);
      check(rd == 32'(bs[b]), "barrier status read");
    end

    // FIFO pop
    @(negedge clk);
    sreq = '{req: 1'b1, we: 1'b0, addr: 16'h4800, wdata: '0};
    #1;
    check(pop, "FIFO read pops");
    @(negedge clk); sreq.req = 1'b0;
    #1;
    check(srsp.rdata == 32'h8000_005C, "FIFO answer {valid, id}");
    @(negedge clk);
    #1;
    check(!pop, "single pop per read");

    // unmapped
    access(1'b0, 16'hC000, '0, rd);
    check(rd == '0, "unmapped address reads zero");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
