// scu_pkg: types and constants shared by the synchronization and communication
// unit (SCU) and its testbenches.
//
// The SCU is a per-cluster peripheral that handles barriers, mutexes, core-to-core
// notifications, external events and interrupts for the cores of a shared-L1
// cluster, and gates each core's clock while it waits. Every core reaches its own
// base unit over a private request/grant link with a 1 KiB aliased address space;
// the peripheral interconnect reaches all units through one shared port.
//
// Follows the published architecture: 32 event lines per core, eight notifier
// events, an active/sleep/interrupt FSM, a 5-bit interrupt identifier, 8-bit
// external event identifiers. The exact address map, the assignment of event
// lines and the encoding of the FSM are this design's own choices; the published
// description does not give them.
package scu_pkg;

  localparam int unsigned DATA_W      = 32;  // data width of both ports
  localparam int unsigned EVT_W       = 32;  // event lines per core
  localparam int unsigned IRQ_ID_W    = 5;   // interrupt identifier width
  localparam int unsigned LINK_ADDR_W = 10;  // 1 KiB aliased space per base unit
  localparam int unsigned SHR_ADDR_W  = 16;  // shared (peripheral) port address width
  localparam int unsigned N_NOTIF     = 8;   // notifier events

  // ---------------------------------------------------------------------------
  // Event line assignment inside the 32-bit event buffer
  // ---------------------------------------------------------------------------
  localparam int unsigned EVT_NOTIF_LSB   = 0;   // [7:0]  notifier events
  localparam int unsigned EVT_BARRIER     = 8;   // any barrier this core is target of
  localparam int unsigned EVT_MUTEX       = 9;   // this core was elected by a mutex
  localparam int unsigned EVT_FIFO        = 10;  // external event FIFO not empty
  localparam int unsigned EVT_CLUSTER_LSB = 11;  // [31:11] cluster event sources
  localparam int unsigned N_CLUSTER_EVT   = EVT_W - EVT_CLUSTER_LSB;

  // ---------------------------------------------------------------------------
  // Private-link address map (byte address, 10 bits)
  //   addr[9:8] region: 0 base-unit registers, 1 notifier, 2 barrier, 3 mutex
  //   region 0: addr[7:2] register index (below)
  //   regions 1..3: addr[7:6] access mode, addr[5:2] instance
  // ---------------------------------------------------------------------------
  typedef enum logic [1:0] {
    REG_BASE  = 2'd0,
    REG_NOTIF = 2'd1,
    REG_BARR  = 2'd2,
    REG_MUTEX = 2'd3
  } scu_region_e;

  typedef enum logic [1:0] {
    MODE_TRIG      = 2'd0,  // trigger the extension, answer at once
    MODE_WAIT      = 2'd1,  // trigger, then wait for an event (on a read)
    MODE_WAIT_CLR  = 2'd2,  // trigger, wait, clear the buffer after the answer
    MODE_RSVD      = 2'd3   // behaves like MODE_TRIG
  } scu_mode_e;

  // register indices in region 0 (word index addr[7:2])
  localparam logic [5:0] R_EVT_MASK      = 6'd0;
  localparam logic [5:0] R_EVT_MASK_AND  = 6'd1;   // write: clear the given bits
  localparam logic [5:0] R_EVT_MASK_OR   = 6'd2;   // write: set the given bits
  localparam logic [5:0] R_IRQ_MASK      = 6'd3;
  localparam logic [5:0] R_IRQ_MASK_AND  = 6'd4;
  localparam logic [5:0] R_IRQ_MASK_OR   = 6'd5;
  localparam logic [5:0] R_STATUS        = 6'd6;   // read: {.., state, clock_en}
  localparam logic [5:0] R_BUFFER        = 6'd7;
  localparam logic [5:0] R_BUFFER_MASKED = 6'd8;   // buffer & event mask
  localparam logic [5:0] R_BUFFER_IRQ    = 6'd9;   // buffer & interrupt mask
  localparam logic [5:0] R_BUFFER_CLEAR  = 6'd10;  // write: clear the given bits
  localparam logic [5:0] R_NOTIF_TARGET  = 6'd11;  // target mask of read-triggered notifiers
  localparam logic [5:0] R_EVENT_WAIT    = 6'd14;  // read: wait for an event
  localparam logic [5:0] R_EVENT_WAIT_CLR= 6'd15;  // read: wait, then clear the buffer

  // ---------------------------------------------------------------------------
  // Shared-port address map (byte address, 16 bits)
  //   addr[15:14] = 0 : base unit addr[13:10], register addr[9:0] (region 0 only)
  //   addr[15:14] = 1 : extensions, addr[11:10] selects
  //        0 notifier  : write word addr[4:2] = notifier id, wdata = target mask
  //        1 barrier   : addr[7:4] barrier, addr[3:2] 0 worker mask, 1 target mask,
  //                      2 status (read) / arrival of the cores in wdata (write)
  //        2 event FIFO: read pops, {valid, 23'b0, id}
  // ---------------------------------------------------------------------------
  localparam logic [1:0] SHR_SEL_UNITS = 2'd0;
  localparam logic [1:0] SHR_SEL_EXT   = 2'd1;
  localparam logic [1:0] SHR_EXT_NOTIF = 2'd0;
  localparam logic [1:0] SHR_EXT_BARR  = 2'd1;
  localparam logic [1:0] SHR_EXT_FIFO  = 2'd2;

  // ---------------------------------------------------------------------------
  // Request/grant link used by the private links and the shared port.
  // req is held until gnt; the answer comes one cycle after the grant.
  // ---------------------------------------------------------------------------
  typedef struct packed {
    logic                   req;
    logic                   we;
    logic [LINK_ADDR_W-1:0] addr;
    logic [DATA_W-1:0]      wdata;
  } link_req_t;

  typedef struct packed {
    logic                   req;
    logic                   we;
    logic [SHR_ADDR_W-1:0]  addr;
    logic [DATA_W-1:0]      wdata;
  } shr_req_t;

  typedef struct packed {
    logic              gnt;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
  } link_rsp_t;

  // core data port (32-bit address) as seen by the per-core data demux
  typedef struct packed {
    logic              req;
    logic              we;
    logic [3:0]        be;
    logic [31:0]       addr;
    logic [DATA_W-1:0] wdata;
  } data_req_t;

  // base-unit control FSM
  typedef enum logic [1:0] {
    ST_ACTIVE = 2'd0,
    ST_SLEEP  = 2'd1,
    ST_IRQ    = 2'd2
  } scu_state_e;

endpackage
