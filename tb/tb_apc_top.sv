// tb_apc_top -- end-to-end test of the AgilePkgC subsystem at its default
// size (10 cores, 6 IO controllers, 2 memory controllers x 3 channels,
// 2 CLM regulators).
//
// Directed part: the package goes PC0 -> ACC1 -> PC1A with every mechanism
// checked on the way (AllowL0s, links to L0s/L0p, CLM clock stopped, DRAM in
// CKE power-down, regulators at retention), then leaves PC1A by a GPMU wakeup,
// by IO traffic on a UPI link, by a wakeup in the middle of the retention
// ramp, and finally returns to PC0 on a core interrupt. Entry (from the last
// link going idle) and exit latencies are measured against the 200 ns budget.
// Random part: cores, links, DRAM traffic and GPMU wakeups are driven as a
// lightly loaded server; invariants are checked every cycle and every
// mechanism is counted; a mechanism that never happened is a failure. For
// the second half of it one PCIe port has no device attached.
module tb_apc_top;
  import apc_pkg::*;

  localparam int NC = N_CORES;

  logic clk = 1'b0, clk_clm = 1'b0, rst_n = 1'b0;
  logic [NC-1:0] core_in_cc1;
  logic gpmu_wakeup, in_pc1a;
  pkg_state_e pkg_state;
  logic [N_IO-1:0] io_dev_present, io_link_active, io_cfg_aspm_l0s_en, io_cfg_l0s_entry_lat;
  logic [N_IO-1:0] io_in_l0s, io_link_ready;
  link_state_e [N_IO-1:0] io_lstate;
  logic [N_IO-1:0][MAX_LANES-1:0] io_lanes_awake;
  logic [N_MC-1:0][N_DDR_CH-1:0] mc_ch_busy, mc_cke, mc_ch_ready;
  logic [N_MC-1:0] mc_cfg_cke_on, mc_in_cke_off;
  logic [N_CLM_VR-1:0] vr_vid_we, vr_rvid_we;
  logic [VID_W-1:0] vr_wdata;
  logic [N_CLM_VR-1:0][VID_W-1:0] vr_vid_out;
  logic clm_pwr_ok, gclk_clm, clm_clk_gated;
  logic allow_l0s, allow_cke_off, ret, clk_gate;

  apc_top dut (.*);

  always #5 clk = ~clk;          // 500 MHz PM clock: 10 time units = 2 ns
  always #2 clk_clm = ~clk_clm;  // CLM clock, faster and unrelated

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic tick(input int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // CLM clock edges while the APMU holds Ret (the CLM must be frozen then).
  int gclk_edges_in_ret = 0;
  int ret_age = 0;
  always @(posedge clk) ret_age <= ret ? ret_age + 1 : 0;
  always @(posedge gclk_clm) if (ret && ret_age > 2) gclk_edges_in_ret++;

  // Mechanism counters.
  int n_acc1 = 0, n_core_irq = 0, n_pc1a = 0, n_wake_io = 0, n_wake_gpmu = 0;
  int n_preempt = 0, n_retention = 0, n_acc1_stall = 0, n_l0p = 0, n_cke_off = 0;
  int n_clk_stopped = 0, n_pc1a_empty_port = 0;
  pkg_state_e prev_state;
  int acc1_len = 0;
  logic ret_reached, exit_cause_io;

  always @(posedge clk) begin
    #2;
    if (rst_n) begin
      if (prev_state == PKG_PC0  && pkg_state == PKG_ACC1) n_acc1++;
      if (prev_state == PKG_ACC1 && pkg_state == PKG_PC0)  n_core_irq++;
      if (prev_state != PKG_PC1A && pkg_state == PKG_PC1A) begin
        n_pc1a++; ret_reached = 0;
        if (!io_dev_present[5]) n_pc1a_empty_port++;
      end
      if (pkg_state == PKG_PC1A && vr_vid_out[0] == VID_RETAIN && vr_vid_out[1] == VID_RETAIN && !ret_reached) begin
        n_retention++; ret_reached = 1;
      end
      if (prev_state == PKG_PC1A && pkg_state == PKG_EXIT) begin
        if (!ret_reached) n_preempt++;
        if (!(&io_in_l0s)) n_wake_io++;
        else if (gpmu_wakeup) n_wake_gpmu++;
      end
      if (pkg_state == PKG_ACC1 && (&core_in_cc1) && !(&io_in_l0s)) acc1_len++;
      else acc1_len = 0;
      if (acc1_len == 20) n_acc1_stall++;
      if (io_lstate[0] == LNK_LOWPWR && io_lanes_awake[0] == 20'h003FF) n_l0p++;
      if (pkg_state == PKG_PC1A && (&mc_in_cke_off)) n_cke_off++;
      if (pkg_state == PKG_PC1A && clm_clk_gated) n_clk_stopped++;
      // Invariants.
      checks++;
      if (ret && !(clk_gate && allow_l0s && in_pc1a)) begin
        failures++; $display("FAIL @%0t: Ret without clock gate / AllowL0s / InPC1A", $time);
      end
      checks++;
      if (!allow_l0s && (io_in_l0s & io_dev_present) != '0 && prev_state == PKG_PC0 && pkg_state == PKG_PC0 && !(|io_cfg_aspm_l0s_en)) begin
        // a link may still be in L0s one cycle after AllowL0s falls
        if ($past(!allow_l0s)) begin failures++; $display("FAIL @%0t: link in L0s while not allowed", $time); end
      end
      checks++;
      if (pkg_state == PKG_ACC1 && prev_state == PKG_EXIT && !clm_pwr_ok && !$past(clm_pwr_ok)) begin
        failures++; $display("FAIL @%0t: CLM ungated without PwrOk", $time);
      end
    end
    prev_state = pkg_state;
  end

  int t0, entry_cyc, exit_cyc, link_cyc;

  initial begin
    core_in_cc1 = '0; gpmu_wakeup = 0; io_dev_present = '1; io_link_active = '1; io_cfg_aspm_l0s_en = '0;
    io_cfg_l0s_entry_lat = '0; mc_ch_busy = '1; mc_cfg_cke_on = '1; vr_vid_we = '0;
    vr_rvid_we = '0; vr_wdata = '0; prev_state = PKG_PC0; ret_reached = 0; exit_cause_io = 0;
    tick(3); rst_n = 1; tick(2);
    check(pkg_state == PKG_PC0 && !allow_l0s && !in_pc1a, "reset in PC0");
    check(vr_vid_out[0] == VID_NOMINAL && clm_pwr_ok, "CLM at 0.8 V");

    // ---------------- the cores go idle, IO still busy: ACC1 only.
    @(negedge clk); core_in_cc1 = '1; mc_ch_busy = '0;
    tick();
    check(pkg_state == PKG_ACC1 && allow_l0s, "all cores in CC1: ACC1, AllowL0s");
    tick(30);
    check(pkg_state == PKG_ACC1 && !clk_gate, "busy links hold the package in ACC1");
    check(mc_cke == '1, "DRAM stays on in ACC1");

    // ---------------- links go idle: PC1A.
    @(negedge clk); io_link_active = '0;
    entry_cyc = 0;
    while (!in_pc1a && entry_cyc < 100) begin tick(); entry_cyc++; end
    check(entry_cyc == 10, $sformatf("PC1A entry %0d cycles after links idle, expected 10 (20 ns)", entry_cyc));
    check(ret && clk_gate && allow_cke_off, "PC1A controls set");
    check(io_lanes_awake[0] == 20'h003FF && io_lanes_awake[2] == '0, "UPI in L0p, PCIe in L0s");
    tick(CKE_ENTRY_CYC + 1);
    check(&mc_in_cke_off, "both memory controllers in CKE power-down");
    check(clm_clk_gated, "CLM clock tree gated");
    tick(80);
    check(vr_vid_out[0] == VID_RETAIN && vr_vid_out[1] == VID_RETAIN, "CLM at retention after the ramp");
    check(!clm_pwr_ok, "no PwrOk at retention");

    // ---------------- GPMU wakeup (timer, cores stay in CC1).
    @(negedge clk); gpmu_wakeup = 1;
    exit_cyc = 0;
    tick(); exit_cyc++;
    @(negedge clk); gpmu_wakeup = 0;
    check(!ret && !allow_cke_off && clk_gate, "exit: Ret and Allow_CKE_OFF dropped, clock still gated");
    tick(); exit_cyc++;
    check(mc_cke == '1, "DRAM CKE raised");
    while (clk_gate && exit_cyc < 300) begin tick(); exit_cyc++; end
    check(exit_cyc >= 75 && exit_cyc <= 78, $sformatf("exit took %0d cycles, expected 75..78 (~150 ns)", exit_cyc));
    check(entry_cyc + exit_cyc <= 100, $sformatf("entry + exit %0d cycles, within 200 ns", entry_cyc + exit_cyc));
    check(mc_ch_ready == '1, "DRAM ready when the CLM restarts");
    check(pkg_state == PKG_ACC1 && !in_pc1a, "back in ACC1");
    tick(3);
    check(pkg_state == PKG_PC1A, "idle package re-enters PC1A");

    // ---------------- IO traffic on UPI link 0 wakes the package.
    tick(100);
    @(negedge clk); io_link_active[0] = 1;
    tick();
    check(!io_in_l0s[0], "UPI InL0s falls at once");
    tick();
    check(pkg_state == PKG_EXIT, "IO wakeup starts the exit");
    link_cyc = 2;
    while (!io_link_ready[0] && link_cyc < 100) begin tick(); link_cyc++; end
    check(link_cyc <= L0P_EXIT_CYC + 1, $sformatf("UPI back in L0 after %0d cycles", link_cyc));
    while (pkg_state != PKG_ACC1 && link_cyc < 300) begin tick(); link_cyc++; end
    check(pkg_state == PKG_ACC1, "ACC1 after IO wakeup");
    tick(10);
    check(pkg_state == PKG_ACC1, "busy link holds ACC1");

    // ---------------- PCIe traffic 20 cycles into PC1A: the ramp is preempted.
    @(negedge clk); io_link_active[0] = 0;
    while (pkg_state != PKG_PC1A) tick();
    tick(20);
    check(vr_vid_out[0] == VID_NOMINAL - 20, $sformatf("20 steps into the ramp: %0d", vr_vid_out[0]));
    @(negedge clk); io_link_active[4] = 1;
    exit_cyc = 0;
    while (pkg_state != PKG_ACC1 && exit_cyc < 300) begin tick(); exit_cyc++; end
    // 1 cycle for InL0s to fall, 1 for the APMU; the ramp goes 2 more steps
    // down meanwhile, then 22 steps up, then 1 cycle to ungate: 25.
    check(exit_cyc == 25, $sformatf("preempted exit took %0d cycles, expected 25", exit_cyc));
    check(clm_pwr_ok && vr_vid_out[0] == VID_NOMINAL, "voltage back at 0.8 V");

    // ---------------- core interrupt: back to PC0, links woken.
    @(negedge clk); io_link_active[4] = 0;
    while (pkg_state != PKG_PC1A) tick();
    @(negedge clk); gpmu_wakeup = 1;
    tick(); @(negedge clk); core_in_cc1[7] = 0; gpmu_wakeup = 0;
    while (pkg_state != PKG_ACC1 && pkg_state != PKG_PC0) tick();
    tick(2);
    check(pkg_state == PKG_PC0 && !allow_l0s, "core interrupt: PC0, AllowL0s cleared");
    tick(L0S_EXIT_CYC + 2);
    check(io_link_ready == '1 && io_in_l0s == '0, "all links back in L0 in PC0");
    tick(50);
    check(io_in_l0s == '0, "idle links stay in L0 while a core runs");
    check(gclk_edges_in_ret == 0, $sformatf("%0d CLM clock edges while in retention", gclk_edges_in_ret));

    // ---------------- random lightly loaded server; PCIe port 5 is empty for
    // the second half (an empty port must not block PC1A).
    for (int cyc = 0; cyc < 40000; cyc++) begin
      @(negedge clk);
      if (cyc == 20000) io_dev_present[5] = 0;
      for (int c = 0; c < NC; c++) begin
        if (core_in_cc1[c]) begin if ($urandom % 3000 == 0) core_in_cc1[c] = 0; end
        else if ($urandom % 60 == 0) core_in_cc1[c] = 1;
      end
      for (int i = 0; i < N_IO; i++) begin
        if (io_link_active[i]) begin if ($urandom % 8 == 0) io_link_active[i] = 0; end
        else if ($urandom % (core_in_cc1 == '1 ? 900 : 100) == 0) io_link_active[i] = 1;
      end
      if (!io_dev_present[5]) io_link_active[5] = 0;
      for (int m = 0; m < N_MC; m++)
        for (int ch = 0; ch < N_DDR_CH; ch++)
          mc_ch_busy[m][ch] = (core_in_cc1 != '1 || io_link_active != '0) && ($urandom % 4 == 0);
      gpmu_wakeup = ($urandom % 1500 == 0);
      if (gpmu_wakeup && $urandom % 2 == 0) core_in_cc1[$urandom % NC] = 0;  // interrupt to a core
    end
    tick(200);
    check(gclk_edges_in_ret == 0, $sformatf("%0d CLM clock edges while in retention", gclk_edges_in_ret));

    $display("mechanisms: ACC1=%0d core_irq=%0d PC1A=%0d wake_io=%0d wake_gpmu=%0d preempt=%0d retention=%0d acc1_stall=%0d l0p=%0d cke_off=%0d clk_stopped=%0d empty_port=%0d",
             n_acc1, n_core_irq, n_pc1a, n_wake_io, n_wake_gpmu, n_preempt, n_retention,
             n_acc1_stall, n_l0p, n_cke_off, n_clk_stopped, n_pc1a_empty_port);
    check(n_acc1 > 0,        "mechanism: PC0 -> ACC1");
    check(n_core_irq > 0,    "mechanism: core interrupt ACC1 -> PC0");
    check(n_pc1a > 0,        "mechanism: PC1A entry");
    check(n_wake_io > 0,     "mechanism: exit on IO traffic");
    check(n_wake_gpmu > 0,   "mechanism: exit on GPMU wakeup");
    check(n_preempt > 0,     "mechanism: wakeup before retention (preempted ramp)");
    check(n_retention > 0,   "mechanism: CLM reached retention");
    check(n_acc1_stall > 0,  "mechanism: ACC1 held by a busy link");
    check(n_l0p > 0,         "mechanism: UPI in L0p");
    check(n_cke_off > 0,     "mechanism: DRAM in CKE power-down");
    check(n_clk_stopped > 0, "mechanism: CLM clock tree gated");
    check(n_pc1a_empty_port > 0, "mechanism: PC1A with an empty IO port");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
