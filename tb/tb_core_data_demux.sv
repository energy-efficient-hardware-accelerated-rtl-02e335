// tb_core_data_demux: self-checking testbench of the per-core data demux.
//
// Stand-ins for the TCDM, the peripheral interconnect and the SCU base unit
// grant (the SCU stand-in sometimes withholds its grant, as during a wait) and
// answer one cycle after the grant with a target-specific word. Random accesses
// to the three address ranges check that exactly the right target sees the
// request, that the SCU link gets the low 10 address bits, that the grant comes
// from the addressed target (a withheld SCU grant stalls the core), and that
// the answer returned to the core is the one of the target that was accessed,
// also when the core presents its next request, possibly to another target, in
// the cycle that answer arrives.
module tb_core_data_demux;
  import scu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [31:0] TCDM_BASE = 32'h1000_0000;
  localparam logic [31:0] SCU_BASE  = 32'h1020_C000;

  data_req_t creq, treq, preq;
  link_rsp_t crsp, trsp, prsp, srsp;
  link_req_t sreq;
  logic scu_hold;

  core_data_demux #(.TCDM_BASE(TCDM_BASE), .TCDM_SIZE(64 * 1024), .SCU_BASE(SCU_BASE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .core_req_i(creq), .core_rsp_o(crsp),
    .tcdm_req_o(treq), .tcdm_rsp_i(trsp), .per_req_o(preq), .per_rsp_i(prsp),
    .scu_req_o(sreq), .scu_rsp_i(srsp));

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

  // target stand-ins
  assign trsp.gnt = treq.req;
  assign prsp.gnt = preq.req;
  assign srsp.gnt = sreq.req && !scu_hold;
  always_ff @(posedge clk) begin
    trsp.rvalid <= treq.req;
    prsp.rvalid <= preq.req;
    srsp.rvalid <= srsp.gnt;
    trsp.rdata  <= 32'h7C00_0000 | treq.addr[15:0];
    prsp.rdata  <= 32'h9E00_0000 | preq.addr[15:0];
    srsp.rdata  <= 32'h5C00_0000 | 32'(sreq.addr);
  end

  int n_t = 0, n_p = 0, n_s = 0, n_stall = 0, n_b2b = 0;
  int kind;
  logic [31:0] a;
  bit b2b;

  function automatic logic [31:0] rand_addr(input int k);
    unique case (k)
      0: return TCDM_BASE + ($urandom_range(0, 16383) << 2);
      1: return SCU_BASE + ($urandom_range(0, 255) << 2);
      default: return ($urandom_range(0, 1) == 0) ? TCDM_BASE + 32'h0001_0000 + ($urandom_range(0, 255) << 2)
                                                   : 32'h1A10_0000 + ($urandom_range(0, 255) << 2);
    endcase
  endfunction

  initial begin
    creq = '0; scu_hold = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    kind = $urandom_range(0, 2);
    a = rand_addr(kind);
    b2b = 1'b0;
    for (int i = 0; i < 600; i++) begin
      int stall, nkind;
      logic [31:0] exp_data, na;
      if (!b2b) begin
        @(negedge clk);
        scu_hold = (kind == 1) && ($urandom_range(0, 2) == 0);
        creq = '{req: 1'b1, we: 1'($urandom), be: 4'hF, addr: a, wdata: $urandom};
      end
      #1;
      check(treq.req == (kind == 0) && sreq.req == (kind == 1) && preq.req == (kind == 2),
            "exactly the addressed target sees the request");
      if (kind == 1) check(sreq.addr == a[9:0] && sreq.wdata == creq.wdata, "SCU link gets the low address bits");
      stall = 0;
      while (!crsp.gnt) begin
        @(negedge clk);
        stall++;
        if (stall == 3) scu_hold = 1'b0;
        #1;
      end
      if (stall > 0) begin
        n_stall++;
        check(kind == 1 && stall == 3, "only a withheld SCU grant stalls the core");
      end
      // answer cycle: the core may already present its next request
      @(negedge clk);
      nkind = $urandom_range(0, 2);
      na = rand_addr(nkind);
      b2b = $urandom_range(0, 1) == 1;
      if (b2b) begin
        scu_hold = (nkind == 1) && ($urandom_range(0, 2) == 0);
        creq = '{req: 1'b1, we: 1'($urandom), be: 4'hF, addr: na, wdata: $urandom};
        n_b2b++;
      end else begin
        creq.req = 1'b0;
      end
      #1;
      exp_data = (kind == 0) ? (32'h7C00_0000 | a[15:0]) :
                 (kind == 1) ? (32'h5C00_0000 | 32'(a[9:0])) : (32'h9E00_0000 | a[15:0]);
      check(crsp.rvalid && crsp.rdata == exp_data, "answer from the accessed target");
      if (kind == 0) n_t++; else if (kind == 1) n_s++; else n_p++;
      kind = nkind;
      a = na;
    end
    if (b2b) begin
      @(negedge clk);
      creq.req = 1'b0;
      scu_hold = 1'b0;
    end
    check(n_t > 0 && n_s > 0 && n_p > 0 && n_stall > 0 && n_b2b > 0, "all targets, a stall and back-to-back requests exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
