// tb_pps_sync: checks that pps_sync waits for arming, starts on the first
// PPS rising edge after it (3 clocks later, through the synchroniser), gives
// exactly one sync pulse per arming, and ignores PPS edges while not armed.
module tb_pps_sync;
  logic clk = 1'b0, rst = 1'b1, arm = 1'b0, pps = 1'b0;
  logic armed, sync, running;
  int   checks = 0, failures = 0;
  int   cyc = 0, nsync = 0, sync_cyc = -1;

  pps_sync dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && sync) begin
      nsync    <= nsync + 1;
      sync_cyc <= cyc;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pps_pulse(output int edge_cyc);
    @(negedge clk);
    pps = 1'b1;
    edge_cyc = cyc;
    repeat (5) @(negedge clk);
    pps = 1'b0;
  endtask

  initial begin
    int e;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    check(!armed && !running && nsync == 0, "idle after reset");
    // PPS without arming: nothing happens
    pps_pulse(e);
    repeat (5) @(negedge clk);
    check(nsync == 0 && !running, "unarmed PPS ignored");
    // arm, then PPS
    arm = 1'b1; @(negedge clk); arm = 1'b0;
    check(armed && !running, "armed waits");
    repeat (7) @(negedge clk);
    check(nsync == 0, "no sync before PPS");
    pps_pulse(e);
    repeat (5) @(negedge clk);
    check(nsync == 1, "one sync per PPS");
    // the edge is sampled at cycle e; pps_sr[1] rises at e+1, sync registered at e+2
    check(sync_cyc - e == 3, $sformatf("sync latency %0d", sync_cyc - e));
    check(running && !armed, "running after sync");
    // second PPS without re-arming: no new sync
    pps_pulse(e);
    repeat (5) @(negedge clk);
    check(nsync == 1 && running, "later PPS ignored");
    // re-arm: restart on the next edge
    arm = 1'b1; @(negedge clk); arm = 1'b0;
    pps_pulse(e);
    repeat (5) @(negedge clk);
    check(nsync == 2 && running, "re-arm restarts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
