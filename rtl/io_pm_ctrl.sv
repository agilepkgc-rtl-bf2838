// io_pm_ctrl -- link power management of one high-speed IO controller
// (PCIe, DMI or UPI) as AgilePkgC needs it.
//
// Servers normally keep link power management (ASPM) off so that an idle link
// never pays an L0s wakeup while cores are busy. AgilePkgC adds an AllowL0s
// input that overrides that control register only while every core is idle:
// with allow_l0s set, or the ASPM enable register set, the link drops to its
// shallow low-power state after it has been idle for the L0s entry latency.
// allow_l0s also forces the short entry latency (L0S_ENTRY_LAT = 1: a quarter
// of the exit latency, 8 cycles = 16 ns for PCIe/DMI). PCIe and DMI links go to
// L0s (all lanes idle); a UPI link goes to L0p (half of its lanes stay awake).
// The new output in_l0s tells the APMU that the link is in L0s/L0p (or that no
// device is attached to the port, a state deeper than L1); it drops
// in the cycle after traffic arrives, so the rest of the package can start
// waking while the link itself takes its exit latency (64 ns for L0s, 10 ns
// for L0p) to return to L0. Clearing allow_l0s (and a cleared register) also
// brings the link back to L0.
//
// Interface: dev_present is low for an empty port; link_active is high while a transaction is outstanding or
// traffic arrives in either direction; link_ready is high in L0 only;
// lanes_awake shows which lanes are powered. Timing: in_l0s rises ENTRY idle
// cycles after link_active falls and falls one cycle after link_active rises;
// link_ready returns EXIT_CYC cycles after link_active rose.
//
// Following the architecture: the AllowL0s override of the control register
// and of the entry latency, the L0s/L0p choice and latencies, InL0s from the
// link state, InL0s also for an empty port. This design's own choices: the controller is reduced to the
// three link states that matter here (the rest of the link training state
// machine is outside this block), the entry latency with the register value
// L0S_ENTRY_LAT = 0 (half the exit latency), and the power-management logic
// running on the 500 MHz APMU clock.
module io_pm_ctrl
  import apc_pkg::*;
#(
  parameter io_kind_e    KIND  = IO_PCIE,
  parameter int unsigned LANES = 16,
  parameter int unsigned EXIT_CYC = (KIND == IO_UPI) ? L0P_EXIT_CYC : L0S_EXIT_CYC
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             allow_l0s,           // from the APMU
  input  logic             cfg_aspm_l0s_en,     // link control register, ASPM L0s enable
  input  logic             cfg_l0s_entry_lat,   // L0S_ENTRY_LAT register bit
  input  logic             dev_present,         // a device is attached to the port
  input  logic             link_active,
  output logic             in_l0s,              // to the APMU (through the AND tree)
  output logic             link_ready,
  output logic [LANES-1:0] lanes_awake,
  output link_state_e      lstate
);

  localparam int unsigned ENTRY_FAST = (EXIT_CYC / 4 > 0) ? EXIT_CYC / 4 : 1;
  localparam int unsigned ENTRY_SLOW = (EXIT_CYC / 2 > 0) ? EXIT_CYC / 2 : 1;
  localparam int unsigned CW = $clog2(EXIT_CYC + 2);

  logic          enabled, fast;
  logic [CW-1:0] entry_cyc;
  assign enabled   = allow_l0s | cfg_aspm_l0s_en;
  assign fast      = allow_l0s | cfg_l0s_entry_lat;
  assign entry_cyc = fast ? CW'(ENTRY_FAST) : CW'(ENTRY_SLOW);

  link_state_e   st_q;
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= LNK_L0;
      cnt_q <= '0;
    end else begin
      unique case (st_q)
        LNK_L0: begin
          if (!enabled || link_active) cnt_q <= '0;
          else if (cnt_q + 1'b1 >= entry_cyc) begin
            st_q  <= LNK_LOWPWR;
            cnt_q <= '0;
          end else cnt_q <= cnt_q + 1'b1;
        end
        LNK_LOWPWR: begin
          if (link_active || !enabled) begin
            st_q  <= LNK_EXIT;
            cnt_q <= '0;
          end
        end
        LNK_EXIT: begin
          // The cycle spent detecting the traffic counts toward the exit.
          if (cnt_q + CW'(2) >= CW'(EXIT_CYC)) begin
            st_q  <= LNK_L0;
            cnt_q <= '0;
          end else cnt_q <= cnt_q + 1'b1;
        end
        default: begin
          st_q  <= LNK_L0;
          cnt_q <= '0;
        end
      endcase
    end
  end

  assign lstate     = st_q;
  // A port with no device attached is in a state deeper than L1 and must not
  // hold the package out of PC1A.
  assign in_l0s     = (st_q == LNK_LOWPWR) || !dev_present;
  assign link_ready = (st_q == LNK_L0) && dev_present;

  // L0s: every lane idle. L0p: the upper half of the lanes idle.
  always_comb begin
    lanes_awake = '1;
    if (st_q == LNK_LOWPWR) begin
      if (KIND == IO_UPI) lanes_awake = LANES'((1 << (LANES / 2)) - 1);
      else                lanes_awake = '0;
    end
  end

  a_no_l0s_when_disabled: assert property (@(posedge clk) disable iff (!rst_n)
      (st_q == LNK_L0 && !enabled) |=> (st_q != LNK_LOWPWR));

endmodule
