// scu_barrier: one hardware barrier extension of the SCU.
//
// A status register holds one bit per core that has arrived. An arrival is
// signalled by a trigger from the core's base unit (an access to the barrier's
// address) or, through the shared port, by a write of a core mask. When the
// status, including the arrivals of the current cycle, covers the configured
// worker mask, the barrier fires an event to every core of the target mask and
// the status is cleared for the next round. Worker and target mask may differ,
// so a subset of cores can release another subset.
//
// Interface: arrive_i[c] from base unit c; cfg_* writes from the shared port;
// status_o and the masks are readable there; evt_o[c] is the event for core c.
// Timing: evt_o pulses for one cycle, in the cycle after the completing
// arrival. Arrivals of cores outside the worker mask are recorded but ignored
// by the match. A zero worker mask disables the barrier.
//
// Follows the published function (status register, worker and target subsets,
// event on match). Reset values (masks zero) and the shared-port arrival write
// are this design's choices.
module scu_barrier #(
  parameter int unsigned NC = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [NC-1:0] arrive_i,          // triggers from the base units
  input  logic          cfg_worker_we_i,
  input  logic          cfg_target_we_i,
  input  logic          cfg_arrive_we_i,   // shared-port arrival write
  input  logic [NC-1:0] cfg_wdata_i,
  output logic [NC-1:0] worker_mask_o,
  output logic [NC-1:0] target_mask_o,
  output logic [NC-1:0] status_o,
  output logic [NC-1:0] evt_o
);

  logic [NC-1:0] status_q, status_arr;
  logic [NC-1:0] worker_q, target_q;
  logic          match;

  assign status_arr = status_q | arrive_i | (cfg_arrive_we_i ? cfg_wdata_i : '0);
  assign match      = (worker_q != '0) && ((status_arr & worker_q) == worker_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      status_q <= '0;
      worker_q <= '0;
      target_q <= '0;
      evt_o    <= '0;
    end else begin
      status_q <= match ? '0 : status_arr;
      evt_o    <= match ? target_q : '0;
      if (cfg_worker_we_i) worker_q <= cfg_wdata_i;
      if (cfg_target_we_i) target_q <= cfg_wdata_i;
    end
  end

  assign worker_mask_o = worker_q;
  assign target_mask_o = target_q;
  assign status_o      = status_q;

endmodule
