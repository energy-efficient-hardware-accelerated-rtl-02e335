// scu_periph_decoder: routing and decoding of the SCU's shared port.
//
// The SCU is also a normal slave of the cluster's peripheral interconnect, so
// that every core, and masters outside the cluster, can reach all base units
// (the global, non-aliased view, for instance for debugging) and the parts of the
// extensions that have no private-link access: the external trigger of the
// notifier, the barrier configuration and the event FIFO. This block decodes
// the address (map in scu_pkg) and forwards the access:
//   - base unit u: the request is passed on to unit u, which answers itself;
//   - notifier: a write fires notifier addr[4:2] for the cores in wdata
//     (zero = all), acting as the (NC+1)-th trigger source;
//   - barrier b: worker mask, target mask (read/write), status (read) and an
//     arrival write on behalf of the cores in wdata;
//   - event FIFO: a read returns {valid, 23'b0, id} and pops the head.
// Wait addresses reached this way never put a core to sleep.
//
// Timing: every request is granted in its own cycle; the answer (rvalid, rdata)
// follows one cycle later. Unused or out-of-range addresses read as zero and
// ignore writes.
//
// The set of targets follows the published block diagram (routing/decoding,
// ID decode to the notifier, barrier cfg/trigger, FIFO read); the address map
// and the answer format are this design's choices.
module scu_periph_decoder
  import scu_pkg::*;
#(
  parameter int unsigned NC   = 8,
  parameter int unsigned NB   = 4,
  parameter int unsigned ID_W = 8
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  shr_req_t                      shr_req_i,
  output link_rsp_t                     shr_rsp_o,
  // base units
  output link_req_t [NC-1:0]            unit_req_o,
  input  link_rsp_t [NC-1:0]            unit_rsp_i,
  // notifier external trigger
  output logic                          notif_valid_o,
  output logic [$clog2(N_NOTIF)-1:0]    notif_id_o,
  output logic [NC-1:0]                 notif_mask_o,
  // barrier configuration
  output logic [NB-1:0]                 barr_worker_we_o,
  output logic [NB-1:0]                 barr_target_we_o,
  output logic [NB-1:0]                 barr_arrive_we_o,
  output logic [NC-1:0]                 barr_wdata_o,
  input  logic [NB-1:0][NC-1:0]         barr_worker_i,
  input  logic [NB-1:0][NC-1:0]         barr_target_i,
  input  logic [NB-1:0][NC-1:0]         barr_status_i,
  // event FIFO
  output logic                          fifo_pop_o,
  input  logic [ID_W-1:0]               fifo_head_i,
  input  logic                          fifo_valid_i
);

  logic [1:0] sel;
  logic [3:0] unit_idx;
  logic [1:0] ext_sel;
  logic [3:0] barr_idx;
  logic [1:0] barr_reg;
  logic       to_unit, to_ext;

  assign sel      = shr_req_i.addr[15:14];
  assign unit_idx = shr_req_i.addr[13:10];
  assign ext_sel  = shr_req_i.addr[11:10];
  assign barr_idx = shr_req_i.addr[7:4];
  assign barr_reg = shr_req_i.addr[3:2];
  assign to_unit  = shr_req_i.req && sel == SHR_SEL_UNITS && int'(unit_idx) < NC;
  assign to_ext   = shr_req_i.req && sel == SHR_SEL_EXT;

  // forward to the base units
  always_comb begin
    for (int unsigned u = 0; u < NC; u++) begin
      unit_req_o[u].req   = to_unit && unit_idx == 4'(u);
      unit_req_o[u].we    = shr_req_i.we;
      unit_req_o[u].addr  = shr_req_i.addr[LINK_ADDR_W-1:0];
      unit_req_o[u].wdata = shr_req_i.wdata;
    end
  end

  // extensions
  logic [DATA_W-1:0] ext_rdata;
  always_comb begin
    notif_valid_o    = to_ext && ext_sel == SHR_EXT_NOTIF && shr_req_i.we;
    notif_id_o       = shr_req_i.addr[2 +: $clog2(N_NOTIF)];
    notif_mask_o     = shr_req_i.wdata[NC-1:0];
    barr_worker_we_o = '0;
    barr_target_we_o = '0;
    barr_arrive_we_o = '0;
    barr_wdata_o     = shr_req_i.wdata[NC-1:0];
    fifo_pop_o       = to_ext && ext_sel == SHR_EXT_FIFO && !shr_req_i.we;
    ext_rdata        = '0;
    if (to_ext && ext_sel == SHR_EXT_BARR) begin
      for (int unsigned b = 0; b < NB; b++) begin
        if (barr_idx == 4'(b)) begin
          if (shr_req_i.we) begin
            barr_worker_we_o[b] = (barr_reg == 2'd0);
            barr_target_we_o[b] = (barr_reg == 2'd1);
            barr_arrive_we_o[b] = (barr_reg == 2'd2);
          end else begin
            unique case (barr_reg)
              2'd0:    ext_rdata = DATA_W'(barr_worker_i[b]);
              2'd1:    ext_rdata = DATA_W'(barr_target_i[b]);
              2'd2:    ext_rdata = DATA_W'(barr_status_i[b]);
              default: ext_rdata = '0;
            endcase
          end
        end
      end
    end
    if (fifo_pop_o) ext_rdata = {fifo_valid_i, {(DATA_W-1-ID_W){1'b0}}, fifo_head_i};
  end

  // answer path
  logic                  rvalid_q, from_unit_q;
  logic [3:0]            unit_q;
  logic [DATA_W-1:0]     ext_rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q    <= 1'b0;
      from_unit_q <= 1'b0;
      unit_q      <= '0;
      ext_rdata_q <= '0;
    end else begin
      rvalid_q    <= shr_req_i.req;
      from_unit_q <= to_unit;
      unit_q      <= unit_idx;
      ext_rdata_q <= ext_rdata;
    end
  end

  always_comb begin
    shr_rsp_o.gnt    = shr_req_i.req;
    shr_rsp_o.rvalid = rvalid_q;
    shr_rsp_o.rdata  = ext_rdata_q;
    if (from_unit_q) begin
      for (int unsigned u = 0; u < NC; u++) begin
        if (unit_q == 4'(u)) shr_rsp_o.rdata = unit_rsp_i[u].rdata;
      end
    end
  end

endmodule
