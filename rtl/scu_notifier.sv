// scu_notifier: any-to-any core-to-core signalling extension of the SCU.
//
// Each of the NC+1 trigger sources (one per base unit, plus the shared port of
// the SCU) can fire one of N_NOTIF notifier events for any subset of cores,
// itself included. A trigger carries the notifier number and a target-core mask;
// an all-zero mask means "all cores" (broadcast). All triggers of one cycle are
// OR-combined, so several sources can fire the same or different notifiers at
// once without arbitration.
//
// Interface: trig_valid_i/trig_id_i/trig_mask_i from the base units (write data
// or the per-unit target register already selected there), ext_* from the shared
// port. evt_o[c][n] is a one-cycle pulse on notifier line n of core c.
// Timing: the event pulse appears the cycle after the trigger (registered).
//
// Follows the published description (eight events, mask semantics, broadcast on
// zero, NC+1 sources). The registered output stage is this design's choice.
module scu_notifier #(
  parameter int unsigned NC      = 8,
  parameter int unsigned N_NOTIF = scu_pkg::N_NOTIF
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  input  logic [NC-1:0]                      trig_valid_i,
  input  logic [NC-1:0][$clog2(N_NOTIF)-1:0] trig_id_i,
  input  logic [NC-1:0][NC-1:0]              trig_mask_i,
  input  logic                               ext_valid_i,
  input  logic [$clog2(N_NOTIF)-1:0]         ext_id_i,
  input  logic [NC-1:0]                      ext_mask_i,
  output logic [NC-1:0][N_NOTIF-1:0]         evt_o
);

  localparam int unsigned NSRC = NC + 1;

  logic [NSRC-1:0]                      src_valid;
  logic [NSRC-1:0][$clog2(N_NOTIF)-1:0] src_id;
  logic [NSRC-1:0][NC-1:0]              src_mask;
  logic [NC-1:0][N_NOTIF-1:0]           evt_d;

  always_comb begin
    for (int unsigned s = 0; s < NC; s++) begin
      src_valid[s] = trig_valid_i[s];
      src_id[s]    = trig_id_i[s];
      src_mask[s]  = trig_mask_i[s];
    end
    src_valid[NC] = ext_valid_i;
    src_id[NC]    = ext_id_i;
    src_mask[NC]  = ext_mask_i;
  end

  // OR over all sources of (target mask x one-hot notifier number)
  always_comb begin
    evt_d = '0;
    for (int unsigned s = 0; s < NSRC; s++) begin
      if (src_valid[s]) begin
        for (int unsigned c = 0; c < NC; c++) begin
          if (src_mask[s] == '0 || src_mask[s][c]) begin
            evt_d[c][src_id[s]] = 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) evt_o <= '0;
    else         evt_o <= evt_d;
  end

endmodule
