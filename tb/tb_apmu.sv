// tb_apmu -- self-checking testbench of the APMU flow.
//
// Directed part: walks PC0 -> ACC1 -> PC1A -> ACC1 -> PC0 and checks every
// control output at each step, the 2-cycle entry after the last InL0s, the
// wait for PwrOk on exit, exits caused by the GPMU WakeUp and by a link
// leaving L0s, the hold-off while WakeUp is high, and a wakeup during entry.
// The regulator is replaced by a small model: PwrOk rises RAMP cycles after Ret
// falls. Random part: random status inputs compared every cycle with a
// reference model of the flow written independently here.
module tb_apmu;
  import apc_pkg::*;

  localparam int RAMP = 75;   // 300 mV at 2 mV/ns, 2 ns cycles

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] in_cc1_grp, in_l0s_grp;
  logic wakeup, pwr_ok;
  logic allow_l0s, clk_gate, ret, allow_cke_off, in_pc1a;
  pkg_state_e state;

  int checks = 0, failures = 0;

  apmu dut (.*);

  always #5 clk = ~clk;

  // Regulator model: PwrOk once Ret has been low for RAMP cycles.
  int ret_low_cnt;
  logic use_model;
  logic pwr_ok_forced;
  always_ff @(posedge clk) begin
    if (!rst_n || ret) ret_low_cnt <= 0;
    else if (ret_low_cnt < RAMP) ret_low_cnt <= ret_low_cnt + 1;
  end
  assign pwr_ok = use_model ? (!ret && ret_low_cnt >= RAMP) : pwr_ok_forced;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  task automatic expect_outs(input logic a, g, r, c, p, input string msg);
    check(allow_l0s == a && clk_gate == g && ret == r && allow_cke_off == c && in_pc1a == p,
          $sformatf("%s: got l0s=%0d gate=%0d ret=%0d cke=%0d pc1a=%0d", msg,
                    allow_l0s, clk_gate, ret, allow_cke_off, in_pc1a));
  endtask

  task automatic tick(input int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // Reference model for the random part.
  typedef enum int {R_PC0, R_ACC1, R_ENT, R_PC1A, R_EXIT} rstate_t;
  rstate_t rs;

  function automatic logic [4:0] ref_outs(rstate_t s);
    // {allow_l0s, clk_gate, ret, allow_cke_off, in_pc1a}
    case (s)
      R_PC0:  return 5'b00000;
      R_ACC1: return 5'b10000;
      R_ENT:  return 5'b11010;
      R_PC1A: return 5'b11111;
      default: return 5'b11001;
    endcase
  endfunction

  int entry_cyc, exit_cyc;

  initial begin
    in_cc1_grp = '0; in_l0s_grp = '0; wakeup = 0; use_model = 1; pwr_ok_forced = 0;
    tick(3);
    rst_n = 1;
    tick();
    expect_outs(0,0,0,0,0, "reset: PC0");
    check(state == PKG_PC0, "reset state");

    // Only one group of cores idle: stay in PC0.
    in_cc1_grp = 2'b01; in_l0s_grp = 2'b11;
    tick(5);
    expect_outs(0,0,0,0,0, "one core group busy keeps PC0");

    // All cores in CC1: ACC1, AllowL0s set; links not yet all in L0s.
    in_cc1_grp = 2'b11; in_l0s_grp = 2'b01;
    tick();
    expect_outs(1,0,0,0,0, "ACC1 sets AllowL0s");
    tick(10);
    expect_outs(1,0,0,0,0, "ACC1 waits for all links in L0s");

    // Last link reaches L0s: entry.
    @(negedge clk); in_l0s_grp = 2'b11;
    entry_cyc = 0;
    tick(); entry_cyc++;
    expect_outs(1,1,0,1,0, "entry step: clock-gate CLM and Allow_CKE_OFF");
    while (!in_pc1a && entry_cyc < 20) begin tick(); entry_cyc++; end
    check(entry_cyc == 2, $sformatf("entry latency %0d cycles, expected 2", entry_cyc));
    expect_outs(1,1,1,1,1, "PC1A: Ret and InPC1A");
    check(state == PKG_PC1A, "state PC1A");
    tick(100);
    expect_outs(1,1,1,1,1, "PC1A held");

    // GPMU wakeup.
    @(negedge clk); wakeup = 1;
    tick(); @(negedge clk); wakeup = 0;
    expect_outs(1,1,0,0,1, "exit: Ret and Allow_CKE_OFF unset, clock still gated");
    exit_cyc = 1;
    while (clk_gate && exit_cyc < 500) begin tick(); exit_cyc++; end
    check(exit_cyc >= RAMP && exit_cyc <= RAMP + 3,
          $sformatf("exit latency %0d cycles, expected ramp %0d + at most 3", exit_cyc, RAMP));
    check(entry_cyc + exit_cyc <= 100, "entry + exit within 200 ns");
    expect_outs(1,0,0,0,0, "back in ACC1 after PwrOk");

    // Links still in L0s and cores idle: re-enter; then a link wakes.
    tick(2);
    expect_outs(1,1,1,1,1, "re-entry to PC1A");
    @(negedge clk); in_l0s_grp = 2'b10;
    tick();
    expect_outs(1,1,0,0,1, "link leaving L0s is a wakeup event");
    tick(RAMP + 2);
    expect_outs(1,0,0,0,0, "ACC1 after IO wakeup");
    tick(5);
    expect_outs(1,0,0,0,0, "ACC1 held while link active");

    // WakeUp held high in ACC1 blocks entry.
    @(negedge clk); wakeup = 1; in_l0s_grp = 2'b11;
    tick(5);
    expect_outs(1,0,0,0,0, "no entry while WakeUp pending");
    @(negedge clk); wakeup = 0;
    tick(2);
    expect_outs(1,1,1,1,1, "entry once WakeUp clears");

    // Wakeup during the entry step.
    @(negedge clk); wakeup = 1;
    tick(); @(negedge clk); wakeup = 0;
    tick(RAMP + 3);
    expect_outs(1,1,1,1,1, "re-entered PC1A");
    @(negedge clk); in_l0s_grp = 2'b01;
    tick();          // EXIT
    tick(RAMP + 1);  // ACC1
    @(negedge clk); in_l0s_grp = 2'b11; wakeup = 0;
    tick();          // ENTRY
    expect_outs(1,1,0,1,0, "in entry step");
    @(negedge clk); wakeup = 1;
    tick();
    expect_outs(1,1,0,0,1, "wakeup during entry goes to exit, Ret never set");
    @(negedge clk); wakeup = 0; in_l0s_grp = 2'b00;
    tick(2);
    expect_outs(1,0,0,0,0, "exit from entry ends quickly (voltage never left)");

    // Core interrupt: back to PC0, AllowL0s unset.
    @(negedge clk); in_cc1_grp = 2'b10;
    tick();
    expect_outs(0,0,0,0,0, "core interrupt returns to PC0");
    check(state == PKG_PC0, "state PC0");

    // A core leaving CC1 while in PC1A.
    @(negedge clk); in_cc1_grp = 2'b11; in_l0s_grp = 2'b11;
    tick(3);
    expect_outs(1,1,1,1,1, "PC1A again");
    @(negedge clk); in_cc1_grp = 2'b01;
    tick();
    expect_outs(1,1,0,0,1, "core leaving CC1 starts exit");
    tick(RAMP + 1);
    expect_outs(1,0,0,0,0, "ACC1 after exit");
    tick();
    expect_outs(0,0,0,0,0, "then PC0");

    // Random stimulus against the reference model (PwrOk driven randomly).
    use_model = 0;
    rs = R_PC0;
    @(negedge clk); in_cc1_grp = 0;
    tick(3);
    rs = R_PC0;
    for (int i = 0; i < 4000; i++) begin
      logic acc, al0s, wk, ok, wev;
      @(negedge clk);
      in_cc1_grp    = ($urandom % 8 != 0) ? 2'b11 : 2'($urandom);
      in_l0s_grp    = ($urandom % 6 != 0) ? 2'b11 : 2'($urandom);
      wakeup        = ($urandom % 10 == 0);
      pwr_ok_forced = ($urandom % 4 == 0);
      acc = &in_cc1_grp; al0s = &in_l0s_grp; wk = wakeup; ok = pwr_ok_forced;
      wev = wk | !al0s | !acc;
      case (rs)
        R_PC0:  if (acc) rs = R_ACC1;
        R_ACC1: if (!acc) rs = R_PC0; else if (al0s && !wk) rs = R_ENT;
        R_ENT:  rs = wev ? R_EXIT : R_PC1A;
        R_PC1A: if (wev) rs = R_EXIT;
        R_EXIT: if (ok) rs = R_ACC1;
        default: rs = R_PC0;
      endcase
      tick();
      check({allow_l0s, clk_gate, ret, allow_cke_off, in_pc1a} == ref_outs(rs),
            $sformatf("random step %0d: outputs %b, model %b", i,
                      {allow_l0s, clk_gate, ret, allow_cke_off, in_pc1a}, ref_outs(rs)));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
