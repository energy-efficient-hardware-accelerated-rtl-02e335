// tb_scu_barrier: self-checking testbench of one barrier extension.
//
// Configures worker and target masks through the configuration inputs, then
// lets the workers arrive in random order and at random times (some twice, some
// non-workers too, some through the shared-port arrival write) and checks:
// no event before the last worker arrives, the event in the cycle after the
// last arrival and only to the target cores, one cycle long, the status cleared
// for the next round, and the configuration read-back.
module tb_scu_barrier;
  localparam int NC = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] arrive, wdata, worker, target, status, evt;
  logic wwe, twe, awe;

  scu_barrier #(.NC(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .arrive_i(arrive), .cfg_worker_we_i(wwe),
    .cfg_target_we_i(twe), .cfg_arrive_we_i(awe), .cfg_wdata_i(wdata),
    .worker_mask_o(worker), .target_mask_o(target), .status_o(status), .evt_o(evt));

  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NC-1:0] wm, tm, arrived;
  int releases = 0;

  initial begin
    arrive = '0; wdata = '0; wwe = 0; twe = 0; awe = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 40; round++) begin
      wm = NC'($urandom) | NC'(1 << (round % NC));
      tm = NC'($urandom) | 1;
      @(negedge clk);
      wdata = wm; wwe = 1;
      @(negedge clk);
      wwe = 0; wdata = tm; twe = 1;
      @(negedge clk);
      twe = 0;
      check(worker == wm && target == tm, "configuration read-back");
      arrived = '0;
      while ((arrived & wm) != wm) begin
        @(negedge clk);
        arrive = '0; awe = 0;
        check(evt == '0, "no event before all workers arrived");
        if ($urandom_range(0, 4) == 0) begin
          // shared-port arrival on behalf of some not yet arrived cores
          wdata = NC'($urandom) & ~arrived; awe = 1;
          arrived |= wdata;
        end else begin
          for (int c = 0; c < NC; c++)
            if ($urandom_range(0, 2) == 0 && !arrived[c]) begin
              arrive[c] = 1'b1;
              arrived[c] = 1'b1;
            end
        end
        #1;
        check(status == (arrived & ~(arrive | (awe ? wdata : '0))) || (arrived & wm) == wm,
              "status holds the earlier arrivals");
      end
      @(negedge clk);
      arrive = '0; awe = 0;
      check(evt == tm, "event to exactly the target cores, one cycle after the last arrival");
      check(status == '0, "status cleared after release");
      releases++;
      @(negedge clk);
      check(evt == '0, "event lasts one cycle");
    end
    check(releases == 40, "all rounds released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
