// scu_top: the synchronization and communication unit (SCU) together with the
// per-core data demuxes that give every core its private link to it.
//
// Contents: NC base units (one per core), the notifier, NB barriers, NMX
// mutexes, the external event FIFO, the decoder of the shared peripheral port,
// and NC core data demuxes. The core-specific events of all barrier instances
// are OR-combined into one event line per core, likewise those of all mutex
// instances (a core waits at one barrier or one mutex at a time). The event
// lines of each core are, from bit 0: eight notifier events, barrier, mutex,
// FIFO not empty, and 21 cluster event sources that enter through
// cluster_evt_i.
//
// Ports: the cores' data ports (core_req_i/core_rsp_o) come in; the TCDM and
// peripheral sides of the demuxes go out (tcdm_*, per_*); the SCU's own slave
// port on the peripheral interconnect comes in (shr_*); the asynchronous
// external event bus (ext_evt_*); per core the busy flag, the clock enable of
// the core's clock gate, and the interrupt request/acknowledge pairs.
//
// Timing: private-link and shared-port accesses are granted in the cycle of the
// request and answered one cycle later; a core waiting for an event is granted
// in the cycle its event reaches the event buffer. A barrier completed by the
// last arriving core releases all target cores together, independent of NC.
//
// Structure and sizes follow the published design in its evaluated
// configuration: eight cores, four barriers, one mutex. The event-line
// assignment and the address maps are this design's own choices. NC may be set
// up to 16 (base-unit windows of the shared port), NB and NMX up to 16 each.
// Lint reports rst_ni as flopped both asynchronously and synchronously; the
// synchronous use is the handshake assertion inside each base unit, not logic.
module scu_top
  import scu_pkg::*;
#(
  parameter int unsigned NC        = 8,
  parameter int unsigned NB        = 4,
  parameter int unsigned NMX       = 1,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter logic [31:0] TCDM_BASE = 32'h1000_0000,
  parameter int unsigned TCDM_SIZE = 64 * 1024,
  parameter logic [31:0] SCU_BASE  = 32'h1020_C000
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  // core data ports
  input  data_req_t [NC-1:0]                   core_req_i,
  output link_rsp_t [NC-1:0]                   core_rsp_o,
  output data_req_t [NC-1:0]                   tcdm_req_o,
  input  link_rsp_t [NC-1:0]                   tcdm_rsp_i,
  output data_req_t [NC-1:0]                   per_req_o,
  input  link_rsp_t [NC-1:0]                   per_rsp_i,
  // SCU slave port on the peripheral interconnect
  input  shr_req_t                             shr_req_i,
  output link_rsp_t                            shr_rsp_o,
  // events
  input  logic [NC-1:0][N_CLUSTER_EVT-1:0]     cluster_evt_i,
  input  logic                                 ext_evt_req_i,
  input  logic [7:0]                           ext_evt_id_i,
  output logic                                 ext_evt_gnt_o,
  // per-core power management and interrupts
  input  logic [NC-1:0]                        core_busy_i,
  output logic [NC-1:0]                        clock_en_o,
  output logic [NC-1:0]                        irq_req_o,
  output logic [NC-1:0][IRQ_ID_W-1:0]          irq_id_o,
  input  logic [NC-1:0]                        irq_ack_i,
  input  logic [NC-1:0][IRQ_ID_W-1:0]          irq_ack_id_i
);

  localparam int unsigned NW = $clog2(N_NOTIF);

  // private links
  link_req_t [NC-1:0] priv_req;
  link_rsp_t [NC-1:0] priv_rsp;
  // shared-port access to the base units
  link_req_t [NC-1:0] unit_req;
  link_rsp_t [NC-1:0] unit_rsp;

  // extension triggers from the base units
  logic [NC-1:0]                 notif_trig;
  logic [NC-1:0][NW-1:0]         notif_id;
  logic [NC-1:0][NC-1:0]         notif_mask;
  logic [NC-1:0][NB-1:0]         barr_trig;
  logic [NC-1:0][NMX-1:0]        mutex_lock, mutex_unlock;
  logic [NC-1:0][DATA_W-1:0]     mutex_wdata;

  // extension outputs
  logic [NC-1:0][N_NOTIF-1:0]    notif_evt;
  logic [NB-1:0][NC-1:0]         barr_evt;
  logic [NMX-1:0][NC-1:0]        mutex_evt;
  logic [NMX-1:0][DATA_W-1:0]    mutex_msg;
  logic                          fifo_evt;

  // shared-port side signals
  logic                          ext_notif_valid;
  logic [NW-1:0]                 ext_notif_id;
  logic [NC-1:0]                 ext_notif_mask;
  logic [NB-1:0]                 barr_worker_we, barr_target_we, barr_arrive_we;
  logic [NC-1:0]                 barr_wdata;
  logic [NB-1:0][NC-1:0]         barr_worker, barr_target, barr_status;
  logic                          fifo_pop, fifo_valid;
  logic [7:0]                    fifo_head;

  // ---------------------------------------------------------------------------
  // per-core data demux and base unit
  // ---------------------------------------------------------------------------
  for (genvar c = 0; c < NC; c++) begin : g_core
    logic [EVT_W-1:0] evt_lines;
    logic             barr_any, mutex_any;

    always_comb begin
      barr_any  = 1'b0;
      mutex_any = 1'b0;
      for (int unsigned b = 0; b < NB; b++)  barr_any  |= barr_evt[b][c];
      for (int unsigned m = 0; m < NMX; m++) mutex_any |= mutex_evt[m][c];
      evt_lines = {cluster_evt_i[c], fifo_evt, mutex_any, barr_any, notif_evt[c]};
    end

    core_data_demux #(
      .TCDM_BASE (TCDM_BASE),
      .TCDM_SIZE (TCDM_SIZE),
      .SCU_BASE  (SCU_BASE)
    ) i_demux (
      .clk_i      (clk_i),
      .rst_ni     (rst_ni),
      .core_req_i (core_req_i[c]),
      .core_rsp_o (core_rsp_o[c]),
      .tcdm_req_o (tcdm_req_o[c]),
      .tcdm_rsp_i (tcdm_rsp_i[c]),
      .per_req_o  (per_req_o[c]),
      .per_rsp_i  (per_rsp_i[c]),
      .scu_req_o  (priv_req[c]),
      .scu_rsp_i  (priv_rsp[c])
    );

    scu_base_unit #(
      .NC  (NC),
      .NB  (NB),
      .NMX (NMX)
    ) i_base (
      .clk_i          (clk_i),
      .rst_ni         (rst_ni),
      .priv_req_i     (priv_req[c]),
      .priv_rsp_o     (priv_rsp[c]),
      .shr_req_i      (unit_req[c]),
      .shr_rsp_o      (unit_rsp[c]),
      .evt_lines_i    (evt_lines),
      .core_busy_i    (core_busy_i[c]),
      .clock_en_o     (clock_en_o[c]),
      .irq_req_o      (irq_req_o[c]),
      .irq_id_o       (irq_id_o[c]),
      .irq_ack_i      (irq_ack_i[c]),
      .irq_ack_id_i   (irq_ack_id_i[c]),
      .notif_trig_o   (notif_trig[c]),
      .notif_id_o     (notif_id[c]),
      .notif_mask_o   (notif_mask[c]),
      .barr_trig_o    (barr_trig[c]),
      .mutex_lock_o   (mutex_lock[c]),
      .mutex_unlock_o (mutex_unlock[c]),
      .mutex_wdata_o  (mutex_wdata[c]),
      .mutex_msg_i    (mutex_msg),
      .state_o        ()
    );
  end

  // ---------------------------------------------------------------------------
  // extensions
  // ---------------------------------------------------------------------------
  scu_notifier #(.NC(NC), .N_NOTIF(N_NOTIF)) i_notifier (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .trig_valid_i (notif_trig),
    .trig_id_i    (notif_id),
    .trig_mask_i  (notif_mask),
    .ext_valid_i  (ext_notif_valid),
    .ext_id_i     (ext_notif_id),
    .ext_mask_i   (ext_notif_mask),
    .evt_o        (notif_evt)
  );

  for (genvar b = 0; b < NB; b++) begin : g_barrier
    logic [NC-1:0] arrive;
    always_comb begin
      for (int unsigned c = 0; c < NC; c++) arrive[c] = barr_trig[c][b];
    end
    scu_barrier #(.NC(NC)) i_barrier (
      .clk_i           (clk_i),
      .rst_ni          (rst_ni),
      .arrive_i        (arrive),
      .cfg_worker_we_i (barr_worker_we[b]),
      .cfg_target_we_i (barr_target_we[b]),
      .cfg_arrive_we_i (barr_arrive_we[b]),
      .cfg_wdata_i     (barr_wdata),
      .worker_mask_o   (barr_worker[b]),
      .target_mask_o   (barr_target[b]),
      .status_o        (barr_status[b]),
      .evt_o           (barr_evt[b])
    );
  end

  for (genvar m = 0; m < NMX; m++) begin : g_mutex
    logic [NC-1:0] lock, unlock;
    always_comb begin
      for (int unsigned c = 0; c < NC; c++) begin
        lock[c]   = mutex_lock[c][m];
        unlock[c] = mutex_unlock[c][m];
      end
    end
    scu_mutex #(.NC(NC)) i_mutex (
      .clk_i        (clk_i),
      .rst_ni       (rst_ni),
      .lock_i       (lock),
      .unlock_i     (unlock),
      .unlock_msg_i (mutex_wdata),
      .evt_o        (mutex_evt[m]),
      .msg_o        (mutex_msg[m]),
      .locked_o     (),
      .owner_o      ()
    );
  end

  scu_event_fifo #(.ID_W(8), .DEPTH(FIFO_DEPTH)) i_fifo (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .evt_req_i    (ext_evt_req_i),
    .evt_id_i     (ext_evt_id_i),
    .evt_gnt_o    (ext_evt_gnt_o),
    .pop_i        (fifo_pop),
    .head_o       (fifo_head),
    .head_valid_o (fifo_valid),
    .evt_o        (fifo_evt)
  );

  scu_periph_decoder #(.NC(NC), .NB(NB), .ID_W(8)) i_decoder (
    .clk_i            (clk_i),
    .rst_ni           (rst_ni),
    .shr_req_i        (shr_req_i),
    .shr_rsp_o        (shr_rsp_o),
    .unit_req_o       (unit_req),
    .unit_rsp_i       (unit_rsp),
    .notif_valid_o    (ext_notif_valid),
    .notif_id_o       (ext_notif_id),
    .notif_mask_o     (ext_notif_mask),
    .barr_worker_we_o (barr_worker_we),
    .barr_target_we_o (barr_target_we),
    .barr_arrive_we_o (barr_arrive_we),
    .barr_wdata_o     (barr_wdata),
    .barr_worker_i    (barr_worker),
    .barr_target_i    (barr_target),
    .barr_status_i    (barr_status),
    .fifo_pop_o       (fifo_pop),
    .fifo_head_i      (fifo_head),
    .fifo_valid_i     (fifo_valid)
  );

endmodule
