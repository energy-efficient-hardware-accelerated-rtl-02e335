// core_data_demux: splits one core's data port into the L1 TCDM interconnect,
// the peripheral interconnect and the private link to the core's SCU base unit.
//
// A request whose address falls in [SCU_BASE, SCU_BASE + 1 KiB) goes to the
// private SCU link (only the low 10 address bits are passed on, so every core
// uses the same addresses for its own base unit); [TCDM_BASE, TCDM_BASE +
// TCDM_SIZE) goes to the TCDM; everything else goes to the peripheral
// interconnect. The demux is purely combinational on the request side, so the
// private link keeps the single-cycle access of the TCDM path, and a grant that
// the SCU withholds (a core waiting for an event) stalls the core exactly as a
// memory conflict would.
//
// Answers: the target of each granted request is remembered, and that target's
// rvalid/rdata is returned to the core. The core is expected to have at most
// one request outstanding (an in-order core waits for its load data).
//
// Follows the published integration (a demux at each core's data port choosing
// TCDM, peripheral interconnect or the private SCU link). The base addresses are
// this design's choices; TCDM_SIZE defaults to the 64 kByte of the evaluated
// cluster.
module core_data_demux
  import scu_pkg::*;
#(
  parameter logic [31:0] TCDM_BASE = 32'h1000_0000,
  parameter int unsigned TCDM_SIZE = 64 * 1024,
  parameter logic [31:0] SCU_BASE  = 32'h1020_C000
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // from the core
  input  data_req_t  core_req_i,
  output link_rsp_t  core_rsp_o,
  // to the TCDM interconnect
  output data_req_t  tcdm_req_o,
  input  link_rsp_t  tcdm_rsp_i,
  // to the peripheral interconnect
  output data_req_t  per_req_o,
  input  link_rsp_t  per_rsp_i,
  // private link to the SCU base unit
  output link_req_t  scu_req_o,
  input  link_rsp_t  scu_rsp_i
);

  typedef enum logic [1:0] {T_TCDM, T_PER, T_SCU} target_e;

  target_e tgt, tgt_q;
  logic    to_scu, to_tcdm;

  assign to_scu  = (core_req_i.addr[31:LINK_ADDR_W] == SCU_BASE[31:LINK_ADDR_W]);
  assign to_tcdm = (core_req_i.addr >= TCDM_BASE) &&
                   ({1'b0, core_req_i.addr} < {1'b0, TCDM_BASE} + 33'(TCDM_SIZE));
  assign tgt     = to_scu ? T_SCU : (to_tcdm ? T_TCDM : T_PER);

  always_comb begin
    tcdm_req_o       = core_req_i;
    per_req_o        = core_req_i;
    tcdm_req_o.req   = core_req_i.req && tgt == T_TCDM;
    per_req_o.req    = core_req_i.req && tgt == T_PER;
    scu_req_o.req    = core_req_i.req && tgt == T_SCU;
    scu_req_o.we     = core_req_i.we;
    scu_req_o.addr   = core_req_i.addr[LINK_ADDR_W-1:0];
    scu_req_o.wdata  = core_req_i.wdata;
  end

  always_comb begin
    unique case (tgt)
      T_SCU:   core_rsp_o.gnt = scu_rsp_i.gnt;
      T_TCDM:  core_rsp_o.gnt = tcdm_rsp_i.gnt;
      default: core_rsp_o.gnt = per_rsp_i.gnt;
    endcase
    unique case (tgt_q)
      T_SCU:   begin core_rsp_o.rvalid = scu_rsp_i.rvalid;  core_rsp_o.rdata = scu_rsp_i.rdata;  end
      T_TCDM:  begin core_rsp_o.rvalid = tcdm_rsp_i.rvalid; core_rsp_o.rdata = tcdm_rsp_i.rdata; end
      default: begin core_rsp_o.rvalid = per_rsp_i.rvalid;  core_rsp_o.rdata = per_rsp_i.rdata;  end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                tgt_q <= T_TCDM;
    else if (core_req_i.req && core_rsp_o.gnt)  tgt_q <= tgt;
  end

endmodule
