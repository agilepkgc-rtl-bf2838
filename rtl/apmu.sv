// apmu -- Agile Power Management Unit: the hardware flow of package state PC1A.
//
// The APMU is a small Moore state machine beside the firmware global PMU
// (GPMU), clocked by the GPMU's clock. It watches four status inputs and drives
// five control outputs:
//
//   in_cc1_grp  AND-combined "core is in CC1" of each group of cores
//   in_l0s_grp  AND-combined "link is in L0s/L0p" of each group of IO controllers
//   wakeup      explicit wakeup event from the GPMU (interrupt, timer, thermal)
//   pwr_ok      CLM voltage regulators are back at their operating voltage
//
//   allow_l0s      lets every IO controller put its idle link into L0s/L0p
//   clk_gate       gates the CLM clock tree (its PLL stays locked)
//   ret            sends the CLM regulators to their retention voltage
//   allow_cke_off  lets the memory controllers drop CKE on idle DRAM
//   in_pc1a        tells the GPMU that the package is in PC1A
//
// Flow (PC0 -> ACC1 -> PC1A and back):
//   PC0   --all cores in CC1-->                        ACC1   (set AllowL0s)
//   ACC1  --a core left CC1 (core interrupt)-->        PC0    (unset AllowL0s)
//   ACC1  --all links in L0s, no wakeup pending-->     ENTRY  (clock-gate CLM,
//                                                              set Allow_CKE_OFF)
//   ENTRY ------------------------------------------>  PC1A   (set Ret, InPC1A)
//   PC1A  --wakeup event-->                            EXIT   (unset Ret and
//                                                              Allow_CKE_OFF)
//   EXIT  --PwrOk-->                                   ACC1   (clock-ungate CLM,
//                                                              unset InPC1A)
// A wakeup event is the GPMU WakeUp input, a link leaving L0s (its InL0s
// falls) or, as a safeguard, a core leaving CC1. A wakeup seen during ENTRY
// goes straight to EXIT. The two concurrent branches of the flow (CLM clock
// and voltage; memory controllers) are issued in the same cycle; the voltage
// ramp is not waited for on entry, only on exit through PwrOk.
//
// Timing: outputs are decoded from the state register, so each arrow costs one
// clock. With all links already in L0s, InPC1A rises two cycles (4 ns at
// 500 MHz) after the last InL0s rises. Exit takes one cycle to drop Ret, the
// regulator ramp until PwrOk, and one cycle to ungate the clock. Entering
// ACC1 while WakeUp is still high is held off so a just-served wakeup does not
// bounce straight back into PC1A.
//
// Following the architecture: the states, the signals, their order and which
// steps are concurrent. This design's own choices: the merged ungate / unset
// InPC1A step, the ENTRY-to-EXIT shortcut, treating a core leaving CC1 as a
// wakeup, and the optional input synchroniser depth (SYNC_STAGES, default 0
// because the status inputs are assumed to be on the APMU clock).
module apmu
  import apc_pkg::*;
#(
  parameter int unsigned N_CC1_GRP   = 2,
  parameter int unsigned N_L0S_GRP   = 2,
  parameter int unsigned SYNC_STAGES = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_CC1_GRP-1:0] in_cc1_grp,
  input  logic [N_L0S_GRP-1:0] in_l0s_grp,
  input  logic                 wakeup,
  input  logic                 pwr_ok,
  output logic                 allow_l0s,
  output logic                 clk_gate,
  output logic                 ret,
  output logic                 allow_cke_off,
  output logic                 in_pc1a,
  output pkg_state_e           state
);

  localparam int unsigned NIN = N_CC1_GRP + N_L0S_GRP + 2;

  logic [NIN-1:0] raw_in, sync_in;
  assign raw_in = {in_cc1_grp, in_l0s_grp, wakeup, pwr_ok};

  // Optional synchroniser on the status inputs.
  if (SYNC_STAGES == 0) begin : g_nosync
    assign sync_in = raw_in;
  end else begin : g_sync
    logic [NIN-1:0] stage [SYNC_STAGES];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < SYNC_STAGES; i++) stage[i] <= '0;
      end else begin
        stage[0] <= raw_in;
        for (int i = 1; i < SYNC_STAGES; i++) stage[i] <= stage[i-1];
      end
    end
    assign sync_in = stage[SYNC_STAGES-1];
  end

  logic all_cc1, all_l0s, wake_s, pwr_ok_s;
  assign all_cc1  = &sync_in[NIN-1 -: N_CC1_GRP];
  assign all_l0s  = &sync_in[2 +: N_L0S_GRP];
  assign wake_s   = sync_in[1];
  assign pwr_ok_s = sync_in[0];

  logic wake_evt;
  assign wake_evt = wake_s | ~all_l0s | ~all_cc1;

  pkg_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      PKG_PC0:   if (all_cc1)                       state_d = PKG_ACC1;
      PKG_ACC1:  if (!all_cc1)                      state_d = PKG_PC0;
                 else if (all_l0s && !wake_s)       state_d = PKG_ENTRY;
      PKG_ENTRY: state_d = wake_evt ? PKG_EXIT : PKG_PC1A;
      PKG_PC1A:  if (wake_evt)                      state_d = PKG_EXIT;
      PKG_EXIT:  if (pwr_ok_s)                      state_d = PKG_ACC1;
      default:                                      state_d = PKG_PC0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= PKG_PC0;
    else        state_q <= state_d;
  end

  // Moore outputs.
  always_comb begin
    allow_l0s     = (state_q != PKG_PC0);
    clk_gate      = (state_q == PKG_ENTRY) || (state_q == PKG_PC1A) || (state_q == PKG_EXIT);
    allow_cke_off = (state_q == PKG_ENTRY) || (state_q == PKG_PC1A);
    ret           = (state_q == PKG_PC1A);
    in_pc1a       = (state_q == PKG_PC1A) || (state_q == PKG_EXIT);
  end

  assign state = state_q;

  // Flow rules.
  a_ret_needs_gate: assert property (@(posedge clk) disable iff (!rst_n) ret |-> clk_gate);
  a_ungate_needs_ok: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q == PKG_EXIT && state_d == PKG_ACC1) |-> pwr_ok_s);
  a_pc1a_needs_cc1: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q == PKG_ACC1 && state_d == PKG_ENTRY) |-> (all_cc1 && all_l0s));

endmodule
