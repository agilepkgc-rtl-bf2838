// tb_io_pm_ctrl -- checks the link power management of a PCIe (L0s) and a UPI
// (L0p) controller: no L0s while AllowL0s and the register are both off; with
// AllowL0s, L0s after 8 idle cycles (16 ns, a quarter of the 64 ns exit) for
// PCIe and after 1 cycle for UPI (a quarter of 10 ns, rounded to a cycle); the
// register path with the slow entry latency; InL0s falling one cycle after
// traffic; the exit time back to L0 (32 and 5 cycles); the lane masks;
// clearing AllowL0s waking the link; an empty port reporting InL0s.
module tb_io_pm_ctrl;
  import apc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic allow_l0s, cfg_en, cfg_lat, act_p, act_u, pres_p;
  logic in_l0s_p, ready_p, in_l0s_u, ready_u;
  logic [15:0] lanes_p;
  logic [19:0] lanes_u;
  link_state_e st_p, st_u;

  int checks = 0, failures = 0;

  io_pm_ctrl #(.KIND(IO_PCIE), .LANES(16)) dut_p (
    .clk, .rst_n, .allow_l0s, .cfg_aspm_l0s_en(cfg_en), .cfg_l0s_entry_lat(cfg_lat),
    .dev_present(pres_p), .link_active(act_p), .in_l0s(in_l0s_p), .link_ready(ready_p), .lanes_awake(lanes_p), .lstate(st_p));
  io_pm_ctrl #(.KIND(IO_UPI), .LANES(20)) dut_u (
    .clk, .rst_n, .allow_l0s, .cfg_aspm_l0s_en(cfg_en), .cfg_l0s_entry_lat(cfg_lat),
    .dev_present(1'b1), .link_active(act_u), .in_l0s(in_l0s_u), .link_ready(ready_u), .lanes_awake(lanes_u), .lstate(st_u));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic tick(input int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // Cycles from now until in_l0s of the chosen link rises (limit 200).
  task automatic cycles_to_l0s(input bit upi, output int n);
    n = 0;
    while (!(upi ? in_l0s_u : in_l0s_p) && n < 200) begin tick(); n++; end
  endtask

  int n;

  initial begin
    allow_l0s = 0; cfg_en = 0; cfg_lat = 0; act_p = 1; act_u = 1; pres_p = 1;
    tick(2); rst_n = 1; tick();
    check(ready_p && ready_u && !in_l0s_p && !in_l0s_u, "reset in L0");
    check(lanes_p == 16'hFFFF && lanes_u == 20'hFFFFF, "all lanes awake in L0");

    // Idle but not allowed: stays in L0 (server default, ASPM off).
    @(negedge clk); act_p = 0; act_u = 0;
    tick(100);
    check(!in_l0s_p && !in_l0s_u && ready_p, "no L0s while not allowed");

    // AllowL0s: fast entry.
    @(negedge clk); allow_l0s = 1;
    cycles_to_l0s(0, n);
    check(n == 8, $sformatf("PCIe L0s entry after %0d idle cycles, expected 8 (16 ns)", n));
    check(in_l0s_u, "UPI already in L0p");
    check(lanes_p == 16'h0000, "PCIe L0s: all lanes asleep");
    check(lanes_u == 20'h003FF, "UPI L0p: half the lanes awake");
    check(st_p == LNK_LOWPWR && !ready_p, "PCIe state L0s, not ready");

    // UPI entry time measured alone.
    @(negedge clk); act_u = 1;
    tick(); check(!in_l0s_u, "UPI InL0s falls one cycle after traffic");
    n = 0;
    while (!ready_u && n < 100) begin tick(); n++; end
    check(n == L0P_EXIT_CYC - 1 || n == L0P_EXIT_CYC,
          $sformatf("UPI L0p exit %0d cycles, expected about 5 (10 ns)", n));
    @(negedge clk); act_u = 0;
    cycles_to_l0s(1, n);
    check(n == 1, $sformatf("UPI L0p entry after %0d idle cycles, expected 1", n));

    // Traffic on PCIe: InL0s falls in one cycle, L0 after the 64 ns exit.
    @(negedge clk); act_p = 1;
    tick();
    check(!in_l0s_p && !ready_p, "PCIe InL0s falls at once, link still waking");
    n = 1;
    while (!ready_p && n < 200) begin tick(); n++; end
    check(n == L0S_EXIT_CYC, $sformatf("PCIe L0s exit %0d cycles, expected 32 (64 ns)", n));
    check(lanes_p == 16'hFFFF, "lanes awake after exit");
    @(negedge clk); act_p = 0;
    tick(3);
    @(negedge clk); act_p = 1;   // short burst restarts the idle timer
    tick();
    @(negedge clk); act_p = 0;
    tick(5);
    check(!in_l0s_p, "idle timer restarted by traffic");
    cycles_to_l0s(0, n);
    check(n == 3, $sformatf("remaining idle cycles %0d, expected 3", n));

    // Clearing AllowL0s (core interrupt) wakes idle links.
    @(negedge clk); allow_l0s = 0;
    tick();
    check(!in_l0s_p && !in_l0s_u, "AllowL0s cleared: InL0s falls");
    tick(40);
    check(ready_p && ready_u, "links back in L0");
    tick(50);
    check(!in_l0s_p && !in_l0s_u, "stay in L0 with AllowL0s clear");

    // Register path: ASPM enabled with L0S_ENTRY_LAT = 0 (half the exit time).
    @(negedge clk); cfg_en = 1;
    cycles_to_l0s(0, n);
    check(n == 16, $sformatf("register-enabled entry %0d cycles, expected 16", n));
    @(negedge clk); act_p = 1; tick(); @(negedge clk); act_p = 0; cfg_lat = 1;
    tick(L0S_EXIT_CYC);
    cycles_to_l0s(0, n);
    check(n >= 7 && n <= 8, $sformatf("register entry with L0S_ENTRY_LAT=1: %0d cycles", n));

    // Empty port: reports InL0s at once and never claims to be ready.
    @(negedge clk); pres_p = 0; allow_l0s = 0; cfg_en = 0; act_p = 0;
    #1 check(in_l0s_p && !ready_p, "empty port reports InL0s, not ready");
    @(negedge clk); pres_p = 1;
    tick(L0S_EXIT_CYC + 1);
    check(!in_l0s_p && ready_p, "port with a device back in L0");

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
