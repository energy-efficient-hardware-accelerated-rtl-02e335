// scu_base_unit: the per-core part of the SCU (one instance per core).
//
// It collects the 32 level-sensitive event lines of its core into the event
// buffer, selects them through the event mask (wake-up) and the interrupt mask
// (interrupts), and runs the three-state control FSM (active, sleep, irq) that
// decides when the core sleeps. The core sleeps by issuing a read on its private
// link to a "wait" address (the event-load instruction, elw): if no enabled
// event is buffered the read is simply not granted, the core pipeline stalls,
// and once the core drops core_busy_i the unit clears clock_en_o. When an
// enabled event is in the buffer, the unit raises clock_en_o and grants the
// read in the same cycle; the answer (event buffer, or the mutex message for a
// mutex lock) follows one cycle later, and the buffer bits that were reported
// can be cleared automatically in that answer cycle. If the event is already
// buffered when the read arrives, the read is granted at once and the clock is
// never gated.
//
// The address of a private access also selects an extension (notifier,
// barrier, mutex) that is triggered exactly once per access, in the first cycle
// of the request; a wait access therefore triggers and sleeps with one
// instruction. An enabled interrupt that arrives while the core sleeps moves the
// FSM to the irq state and wakes the core; the core abandons the stalled read,
// runs its handler and re-executes the same elw, which the unit recognises by
// its address and does not trigger again. The core acknowledges an interrupt
// with irq_ack_i/irq_ack_id_i, which clears that bit of the buffer.
//
// Interfaces: priv_req_i/priv_rsp_o private link (1 KiB space, see scu_pkg);
// shr_req_i/shr_rsp_o access from the shared port to the registers (region 0;
// waits there answer at once, without power management); extension triggers
// out, election messages of the mutexes in. Both ports grant in the cycle of the
// request (except a blocked wait) and answer one cycle after the grant.
// irq_req_o/irq_id_o are registered; the lowest pending index wins.
//
// Follows the published design: event buffer, event and interrupt masks, the
// three FSM states, clock-enable control, trigger-once per elw, auto-clear,
// trigger inhibit after interrupt handling, 5-bit interrupt id, ack clears the
// buffer bit. Own choices: address map, interrupt priority (lowest index), which
// bits auto-clear removes (the reported bits that are enabled in the event
// mask), and private-port priority over the shared port on a write to the same
// register in the same cycle.
//
// An assertion checks the private-link handshake: a request stays up until it
// is granted unless an interrupt took the core away. It is disabled during
// reset, which makes lint report rst_ni as used both asynchronously (the
// flip-flops) and synchronously (the assertion); that is not a circuit path.
module scu_base_unit
  import scu_pkg::*;
#(
  parameter int unsigned NC  = 8,
  parameter int unsigned NB  = 4,
  parameter int unsigned NMX = 1
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  // private link from the core
  input  link_req_t                          priv_req_i,
  output link_rsp_t                          priv_rsp_o,
  // register access from the shared port
  input  link_req_t                          shr_req_i,
  output link_rsp_t                          shr_rsp_o,
  // event lines (extension and cluster events, see scu_pkg)
  input  logic [EVT_W-1:0]                   evt_lines_i,
  // core power management and interrupts
  input  logic                               core_busy_i,
  output logic                               clock_en_o,
  output logic                               irq_req_o,
  output logic [IRQ_ID_W-1:0]                irq_id_o,
  input  logic                               irq_ack_i,
  input  logic [IRQ_ID_W-1:0]                irq_ack_id_i,
  // extension triggers
  output logic                               notif_trig_o,
  output logic [$clog2(N_NOTIF)-1:0]         notif_id_o,
  output logic [NC-1:0]                      notif_mask_o,
  output logic [NB-1:0]                      barr_trig_o,
  output logic [NMX-1:0]                     mutex_lock_o,
  output logic [NMX-1:0]                     mutex_unlock_o,
  output logic [DATA_W-1:0]                  mutex_wdata_o,
  input  logic [NMX-1:0][DATA_W-1:0]         mutex_msg_i,
  output scu_state_e                         state_o
);

  // ---------------------------------------------------------------------------
  // registers
  // ---------------------------------------------------------------------------
  scu_state_e             state_q, state_d;
  logic [EVT_W-1:0]       buf_q, buf_d;
  logic [EVT_W-1:0]       evt_mask_q, evt_mask_d;
  logic [EVT_W-1:0]       irq_mask_q, irq_mask_d;
  logic [NC-1:0]          notif_tgt_q, notif_tgt_d;
  logic [LINK_ADDR_W-1:0] wait_addr_q;
  logic [EVT_W-1:0]       autoclr_q;       // bits to clear in the answer cycle
  logic                   prv_rvalid_q, shr_rvalid_q;
  logic [DATA_W-1:0]      prv_rdata_q, shr_rdata_q;
  logic                   irq_req_q;
  logic [IRQ_ID_W-1:0]    irq_id_q;

  // ---------------------------------------------------------------------------
  // pending events / interrupts and the interrupt arbiter
  // ---------------------------------------------------------------------------
  logic [EVT_W-1:0]    evt_masked, irq_masked;
  logic                evt_pending, irq_pending;
  logic [IRQ_ID_W-1:0] irq_sel;

  assign evt_masked  = buf_q & evt_mask_q;
  assign irq_masked  = buf_q & irq_mask_q;
  assign evt_pending = |evt_masked;
  assign irq_pending = |irq_masked;

  always_comb begin
    irq_sel = '0;
    for (int i = EVT_W - 1; i >= 0; i--) begin
      if (irq_masked[i]) irq_sel = IRQ_ID_W'(i);
    end
  end

  // ---------------------------------------------------------------------------
  // private-link decode
  // ---------------------------------------------------------------------------
  scu_region_e p_region;
  scu_mode_e   p_mode;
  logic [5:0]  p_ridx;
  logic [3:0]  p_inst;
  logic        p_ext, p_wait, p_autoclr;

  assign p_region  = scu_region_e'(priv_req_i.addr[9:8]);
  assign p_ridx    = priv_req_i.addr[7:2];
  assign p_mode    = scu_mode_e'(priv_req_i.addr[7:6]);
  assign p_inst    = priv_req_i.addr[5:2];
  assign p_ext     = (p_region != REG_BASE);
  assign p_wait    = !priv_req_i.we &&
                     (p_ext ? (p_mode == MODE_WAIT || p_mode == MODE_WAIT_CLR)
                            : (p_ridx == R_EVENT_WAIT || p_ridx == R_EVENT_WAIT_CLR));
  assign p_autoclr = p_ext ? (p_mode == MODE_WAIT_CLR) : (p_ridx == R_EVENT_WAIT_CLR);

  // ---------------------------------------------------------------------------
  // control FSM: grant, trigger enable, next state
  // ---------------------------------------------------------------------------
  logic p_gnt, trig_en;

  always_comb begin
    state_d = state_q;
    p_gnt   = 1'b0;
    trig_en = 1'b0;
    unique case (state_q)
      ST_ACTIVE: begin
        if (priv_req_i.req) begin
          trig_en = 1'b1;                   // first cycle of every request
          if (p_wait && !evt_pending) state_d = ST_SLEEP;
          else                        p_gnt   = 1'b1;
        end
      end
      ST_SLEEP: begin
        if (!priv_req_i.req) begin
          state_d = ST_ACTIVE;              // request withdrawn
        end else if (evt_pending) begin
          p_gnt   = 1'b1;
          state_d = ST_ACTIVE;
        end else if (irq_pending) begin
          state_d = ST_IRQ;
        end
      end
      ST_IRQ: begin
        if (priv_req_i.req) begin
          if (!p_wait) begin
            p_gnt   = 1'b1;                 // ordinary access inside the handler
            trig_en = 1'b1;
          end else begin
            // a re-executed elw of the interrupted wait must not trigger again
            trig_en = (priv_req_i.addr != wait_addr_q);
            if (evt_pending) begin
              p_gnt   = 1'b1;
              state_d = ST_ACTIVE;
            end else if (!irq_pending) begin
              state_d = ST_SLEEP;
            end
          end
        end
      end
      default: state_d = ST_ACTIVE;
    endcase
  end

  // a core may only drop an ungranted request when it is taking an interrupt
  a_req_held: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (priv_req_i.req && !priv_rsp_o.gnt && !irq_req_o && state_q != ST_IRQ)
      |=> (priv_req_i.req || irq_req_o || state_q == ST_IRQ))
    else $error("private link: request dropped before grant");

  assign clock_en_o = (state_q != ST_SLEEP) || core_busy_i || evt_pending || irq_pending;

  // ---------------------------------------------------------------------------
  // extension triggers
  // ---------------------------------------------------------------------------
  logic p_fire;
  assign p_fire = priv_req_i.req && p_ext && trig_en;

  always_comb begin
    notif_trig_o   = p_fire && (p_region == REG_NOTIF);
    notif_id_o     = p_inst[$clog2(N_NOTIF)-1:0];
    notif_mask_o   = priv_req_i.we ? priv_req_i.wdata[NC-1:0] : notif_tgt_q;
    barr_trig_o    = '0;
    mutex_lock_o   = '0;
    mutex_unlock_o = '0;
    mutex_wdata_o  = priv_req_i.wdata;
    for (int unsigned b = 0; b < NB; b++) begin
      if (p_fire && p_region == REG_BARR && p_inst == 4'(b)) barr_trig_o[b] = 1'b1;
    end
    for (int unsigned m = 0; m < NMX; m++) begin
      if (p_fire && p_region == REG_MUTEX && p_inst == 4'(m)) begin
        mutex_lock_o[m]   = !priv_req_i.we;
        mutex_unlock_o[m] = priv_req_i.we;
      end
    end
  end

  // ---------------------------------------------------------------------------
  // register read (common to both ports)
  // ---------------------------------------------------------------------------
  function automatic logic [DATA_W-1:0] reg_read(input logic [5:0] idx);
    logic [DATA_W-1:0] r;
    r = '0;
    unique case (idx)
      R_EVT_MASK:       r = evt_mask_q;
      R_IRQ_MASK:       r = irq_mask_q;
      R_STATUS:         r = {{(DATA_W-3){1'b0}}, state_q, clock_en_o};
      R_BUFFER,
      R_EVENT_WAIT,
      R_EVENT_WAIT_CLR: r = buf_q;
      R_BUFFER_MASKED:  r = evt_masked;
      R_BUFFER_IRQ:     r = irq_masked;
      R_NOTIF_TARGET:   r = DATA_W'(notif_tgt_q);
      default:          r = '0;
    endcase
    return r;
  endfunction

  logic [DATA_W-1:0] p_rdata, s_rdata;
  always_comb begin
    if (!p_ext)                      p_rdata = reg_read(p_ridx);
    else if (p_region == REG_MUTEX && int'(p_inst) < NMX)
                                     p_rdata = mutex_msg_i[p_inst];
    else                             p_rdata = buf_q;
  end
  assign s_rdata = (shr_req_i.addr[9:8] == 2'd0) ? reg_read(shr_req_i.addr[7:2]) : '0;

  // ---------------------------------------------------------------------------
  // register write, buffer update
  // ---------------------------------------------------------------------------
  logic [EVT_W-1:0] clr_bits;

  always_comb begin
    evt_mask_d  = evt_mask_q;
    irq_mask_d  = irq_mask_q;
    notif_tgt_d = notif_tgt_q;
    clr_bits    = autoclr_q;
    if (irq_ack_i) clr_bits[irq_ack_id_i] = 1'b1;
    // shared port first, so that the private link wins on a collision
    if (shr_req_i.req && shr_req_i.we && shr_req_i.addr[9:8] == 2'd0) begin
      unique case (shr_req_i.addr[7:2])
        R_EVT_MASK:      evt_mask_d  = shr_req_i.wdata;
        R_EVT_MASK_AND:  evt_mask_d  = evt_mask_d & ~shr_req_i.wdata;
        R_EVT_MASK_OR:   evt_mask_d  = evt_mask_d | shr_req_i.wdata;
        R_IRQ_MASK:      irq_mask_d  = shr_req_i.wdata;
        R_IRQ_MASK_AND:  irq_mask_d  = irq_mask_d & ~shr_req_i.wdata;
        R_IRQ_MASK_OR:   irq_mask_d  = irq_mask_d | shr_req_i.wdata;
        R_BUFFER_CLEAR:  clr_bits    = clr_bits | shr_req_i.wdata;
        R_NOTIF_TARGET:  notif_tgt_d = shr_req_i.wdata[NC-1:0];
        default: ;
      endcase
    end
    if (priv_req_i.req && p_gnt && priv_req_i.we && !p_ext) begin
      unique case (p_ridx)
        R_EVT_MASK:      evt_mask_d  = priv_req_i.wdata;
        R_EVT_MASK_AND:  evt_mask_d  = evt_mask_d & ~priv_req_i.wdata;
        R_EVT_MASK_OR:   evt_mask_d  = evt_mask_d | priv_req_i.wdata;
        R_IRQ_MASK:      irq_mask_d  = priv_req_i.wdata;
        R_IRQ_MASK_AND:  irq_mask_d  = irq_mask_d & ~priv_req_i.wdata;
        R_IRQ_MASK_OR:   irq_mask_d  = irq_mask_d | priv_req_i.wdata;
        R_BUFFER_CLEAR:  clr_bits    = clr_bits | priv_req_i.wdata;
        R_NOTIF_TARGET:  notif_tgt_d = priv_req_i.wdata[NC-1:0];
        default: ;
      endcase
    end
    // new events win over a clear of the same cycle, so that no pulse is lost
    buf_d = (buf_q & ~clr_bits) | evt_lines_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= ST_ACTIVE;
      buf_q        <= '0;
      evt_mask_q   <= '0;
      irq_mask_q   <= '0;
      notif_tgt_q  <= '0;
      wait_addr_q  <= '0;
      autoclr_q    <= '0;
      prv_rvalid_q <= 1'b0;
      prv_rdata_q  <= '0;
      shr_rvalid_q <= 1'b0;
      shr_rdata_q  <= '0;
      irq_req_q    <= 1'b0;
      irq_id_q     <= '0;
    end else begin
      state_q      <= state_d;
      buf_q        <= buf_d;
      evt_mask_q   <= evt_mask_d;
      irq_mask_q   <= irq_mask_d;
      notif_tgt_q  <= notif_tgt_d;
      if (state_q != ST_SLEEP && state_d == ST_SLEEP) wait_addr_q <= priv_req_i.addr;
      autoclr_q    <= (p_gnt && p_wait && p_autoclr) ? evt_masked : '0;
      prv_rvalid_q <= p_gnt;
      if (p_gnt) prv_rdata_q <= p_rdata;
      shr_rvalid_q <= shr_req_i.req;
      if (shr_req_i.req) shr_rdata_q <= s_rdata;
      irq_req_q    <= irq_pending && !(irq_ack_i && irq_ack_id_i == irq_sel);
      irq_id_q     <= irq_sel;
    end
  end

  assign priv_rsp_o = '{gnt: p_gnt, rvalid: prv_rvalid_q, rdata: prv_rdata_q};
  assign shr_rsp_o  = '{gnt: shr_req_i.req, rvalid: shr_rvalid_q, rdata: shr_rdata_q};
  assign irq_req_o  = irq_req_q;
  assign irq_id_o   = irq_id_q;
  assign state_o    = state_q;

endmodule
