// scu_mutex: one hardware mutex extension of the SCU.
//
// The mutex can be owned by one core at a time. A lock request (a read of the
// mutex address, normally by the event-load instruction so that the core sleeps)
// is recorded in a pending vector. Whenever the mutex is free and requests are
// pending, one core is elected and receives an event; it owns the mutex from
// then on. The owner releases the mutex by writing to the same address; the
// write data becomes the mutex message, which the next owner receives as the
// answer to its lock read. The release and the next election happen in the same
// cycle, so ownership passes on without a free cycle in between.
//
// Interface: lock_i[c] / unlock_i[c] / unlock_msg_i[c] from base unit c;
// evt_o[c] is the election event of core c; msg_o is the last message;
// locked_o and owner_o show the state.
// Timing: the election event pulses one cycle after the lock request (free
// mutex) or after the owner's unlock write; msg_o is valid from that same cycle.
//
// Follows the published function (pending requests, election by event, unlock
// by write with a 32-bit message). Election order is this design's choice:
// round robin starting after the previous owner. Unlock writes from a core that
// does not own the mutex are ignored (not covered by the description).
module scu_mutex #(
  parameter int unsigned NC = 8
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic [NC-1:0]                   lock_i,
  input  logic [NC-1:0]                   unlock_i,
  input  logic [NC-1:0][scu_pkg::DATA_W-1:0] unlock_msg_i,
  output logic [NC-1:0]                   evt_o,
  output logic [scu_pkg::DATA_W-1:0]      msg_o,
  output logic                            locked_o,
  output logic [$clog2(NC)-1:0]           owner_o
);

  localparam int unsigned IW = $clog2(NC);

  logic [NC-1:0]              pending_q, pending_d;
  logic                       locked_q, locked_d;
  logic [IW-1:0]              owner_q, owner_d;
  logic [IW-1:0]              rr_q, rr_d;
  logic [scu_pkg::DATA_W-1:0] msg_q, msg_d;
  logic [NC-1:0]              evt_d;
  logic                       released, free, found;
  logic [IW-1:0]              winner;

  assign released = locked_q && unlock_i[owner_q];
  assign free     = !locked_q || released;

  // round-robin pick among pending requests, starting at rr_q
  always_comb begin
    found  = 1'b0;
    winner = '0;
    for (int unsigned k = 0; k < NC; k++) begin
      int unsigned idx;
      idx = (int'(rr_q) + k) % NC;
      if (!found && (pending_q[idx] || lock_i[idx])) begin
        found  = 1'b1;
        winner = IW'(idx);
      end
    end
  end

  always_comb begin
    pending_d = pending_q | lock_i;
    locked_d  = locked_q;
    owner_d   = owner_q;
    rr_d      = rr_q;
    msg_d     = released ? unlock_msg_i[owner_q] : msg_q;
    evt_d     = '0;
    if (free) begin
      locked_d = 1'b0;
      if (found) begin
        locked_d          = 1'b1;
        owner_d           = winner;
        rr_d              = (int'(winner) == NC - 1) ? '0 : winner + 1'b1;
        pending_d[winner] = 1'b0;
        evt_d[winner]     = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q <= '0;
      locked_q  <= 1'b0;
      owner_q   <= '0;
      rr_q      <= '0;
      msg_q     <= '0;
      evt_o     <= '0;
    end else begin
      pending_q <= pending_d;
      locked_q  <= locked_d;
      owner_q   <= owner_d;
      rr_q      <= rr_d;
      msg_q     <= msg_d;
      evt_o     <= evt_d;
    end
  end

  assign msg_o    = msg_q;
  assign locked_o = locked_q;
  assign owner_o  = owner_q;

endmodule
