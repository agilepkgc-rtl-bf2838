// tb_fivr_fcm -- checks the CLM regulator control module: the VID code ramps
// one LSB per cycle from the operating VID (200 = 0.8 V) to the retention VID
// (125 = 0.5 V) in 75 cycles (150 ns) when Ret is set and back when it is
// cleared; PwrOk is low from Ret until the operating VID is reached again;
// a Ret change in the middle of a ramp reverses it where it stands; the RVID
// and VID registers load; a slower slew (STEP_CYC = 3) is honoured.
module tb_fivr_fcm;
  import apc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ret, vid_we, rvid_we;
  logic [7:0] vid_wdata, rvid_wdata, vid_out, vid_out3;
  logic pwr_ok, pwr_ok3;

  int checks = 0, failures = 0;

  fivr_fcm dut (.*);
  fivr_fcm #(.STEP_CYC(3)) dut3 (.clk, .rst_n, .ret, .vid_we, .vid_wdata, .rvid_we, .rvid_wdata,
                                 .vid_out(vid_out3), .pwr_ok(pwr_ok3));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic tick(input int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  int n;
  logic [7:0] prev;

  initial begin
    ret = 0; vid_we = 0; rvid_we = 0; vid_wdata = 0; rvid_wdata = 0;
    tick(2); rst_n = 1; tick();
    check(vid_out == 8'd200 && pwr_ok, "reset at 0.8 V, PwrOk");

    @(negedge clk); ret = 1;
    #1 check(!pwr_ok, "PwrOk drops with Ret");
    n = 0; prev = vid_out;
    while (vid_out != 8'd125 && n < 500) begin
      tick(); n++;
      check(vid_out == prev - 1, "ramp down one LSB per cycle");
      prev = vid_out;
    end
    check(n == 75, $sformatf("ramp to retention %0d cycles, expected 75 (150 ns)", n));
    tick(10);
    check(vid_out == 8'd125 && !pwr_ok, "held at retention");

    @(negedge clk); ret = 0;
    #1 check(!pwr_ok, "no PwrOk at retention voltage");
    n = 0;
    while (!pwr_ok && n < 500) begin tick(); n++; end
    check(n == 75 && vid_out == 8'd200, $sformatf("ramp up %0d cycles, expected 75", n));

    // Preempted ramp: wake 20 cycles into the entry ramp.
    @(negedge clk); ret = 1;
    tick(20);
    check(vid_out == 8'd180, $sformatf("20 steps down: %0d", vid_out));
    @(negedge clk); ret = 0;
    n = 0;
    while (!pwr_ok && n < 500) begin tick(); n++; end
    check(n == 20, $sformatf("preempted ramp returns in %0d cycles, expected 20", n));

    // New retention VID (0.6 V = 150) and operating VID (0.9 V = 225).
    @(negedge clk); rvid_we = 1; rvid_wdata = 8'd150; vid_we = 1; vid_wdata = 8'd225;
    @(negedge clk); rvid_we = 0; vid_we = 0;
    check(!pwr_ok, "PwrOk low while ramping to the new operating VID");
    tick(30);
    check(vid_out == 8'd225 && pwr_ok, "reached new operating VID");
    @(negedge clk); ret = 1;
    tick(80);
    check(vid_out == 8'd150, $sformatf("new retention VID reached: %0d", vid_out));
    check(vid_out3 != 8'd150 && vid_out3 > 8'd150, "slow regulator still ramping");
    tick(200);
    check(vid_out3 == 8'd150, "slow regulator reached retention");
    @(negedge clk); ret = 0;
    tick(3 * 75 - 2);
    check(!pwr_ok3, "slow regulator: not yet at operating VID");
    tick(4);
    check(pwr_ok3, "slow regulator: PwrOk after 3 cycles per step");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
