// scu_event_fifo: receives cluster-external events and queues them for the cores.
//
// External sources (chip-level peripherals, a host core) send an event as an
// ID_W-bit identifier over an asynchronous request/grant bus, so up to 2**ID_W
// sources can be told apart. The bus uses a four-phase handshake with bundled
// data: the sender sets evt_id_i, raises evt_req_i and holds both until
// evt_gnt_o rises, then lowers evt_req_i; the FIFO lowers evt_gnt_o after it
// sees the request fall. The request is brought into the SCU clock domain by a
// two-flop synchronizer. While the FIFO is full, the grant is withheld, which
// stalls the sender without losing an event.
//
// While at least one event is queued, evt_o (the inverted empty flag) is high;
// it is one of the event lines of every base unit, normally enabled as an
// interrupt in one core whose handler pops the FIFO through the shared port.
// pop_i removes the head; head_o/head_valid_o show it in the same cycle.
//
// Timing: an event is written 2 cycles after evt_req_i rises (synchronizer)
// and visible on evt_o one cycle later.
//
// Follows the published function (8-bit asynchronous request/grant bus, 256
// sources, FIFO, not-empty event line, read to pop). The depth and the
// synchronizer are this design's choices.
module scu_event_fifo #(
  parameter int unsigned ID_W  = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            evt_req_i,     // asynchronous
  input  logic [ID_W-1:0] evt_id_i,
  output logic            evt_gnt_o,
  input  logic            pop_i,
  output logic [ID_W-1:0] head_o,
  output logic            head_valid_o,
  output logic            evt_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [1:0]            req_sync_q;
  logic                  gnt_q;
  logic [ID_W-1:0]       mem_q [DEPTH];
  logic [PW-1:0]         wr_ptr_q, rd_ptr_q;
  logic [PW:0]           count_q;
  logic                  full, empty, push, pop;

  assign full  = (count_q == (PW+1)'(DEPTH));
  assign empty = (count_q == '0);
  assign push  = req_sync_q[1] && !gnt_q && !full;
  assign pop   = pop_i && !empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_sync_q <= '0;
      gnt_q      <= 1'b0;
      wr_ptr_q   <= '0;
      rd_ptr_q   <= '0;
      count_q    <= '0;
    end else begin
      req_sync_q <= {req_sync_q[0], evt_req_i};
      if (push)                         gnt_q <= 1'b1;
      else if (!req_sync_q[1] && gnt_q) gnt_q <= 1'b0;
      if (push) wr_ptr_q <= (int'(wr_ptr_q) == DEPTH - 1) ? '0 : wr_ptr_q + 1'b1;
      if (pop)  rd_ptr_q <= (int'(rd_ptr_q) == DEPTH - 1) ? '0 : rd_ptr_q + 1'b1;
      count_q <= count_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // storage: no reset needed, entries are only read after being written
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= evt_id_i;
  end

  assign evt_gnt_o    = gnt_q;
  assign head_o       = mem_q[rd_ptr_q];
  assign head_valid_o = !empty;
  assign evt_o        = !empty;

endmodule
