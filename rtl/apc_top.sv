// apc_top -- the AgilePkgC package power-management subsystem of a 10-core
// server SoC.
//
// This is the logic that lets the package enter and leave PC1A in well under
// 200 ns. It holds:
//   * two status AND trees for InCC1 (cores 0-4 and 5-9, one chain per half of
//     the die) and two for InL0s (IO controllers 0-2 and 3-5);
//   * the APMU state machine;
//   * the link power management of six IO controllers: two UPI links (L0p),
//     three PCIe x16 links and one DMI x4 link (L0s), all receiving AllowL0s;
//   * the CKE control of two memory controllers with three DDR4 channels each,
//     both receiving Allow_CKE_OFF;
//   * the control modules of the two CLM voltage regulators, both receiving
//     Ret, whose PwrOk outputs are ANDed for the APMU;
//   * the CLM clock-tree gate driven by ClkGate.
// Cores, the global PMU, the IO controllers' data paths and PHYs, DRAM, the
// regulators' power stages and the PLLs are outside: their signals are ports.
//
// Clocks: clk is the 500 MHz power-management clock shared with the global
// PMU; everything except the CLM clock gate runs on it. clk_clm is the CLM
// PLL output, which keeps running in PC1A; gclk_clm is the gated CLM tree.
// rst_n is an asynchronous, active-low reset for both domains.
//
// Timing at the defaults: an idle package in ACC1 reaches PC1A 8 cycles
// (L0s entry, 16 ns) plus 2 cycles (APMU) after its last link goes idle. A
// wakeup from full retention takes 1 cycle plus the 75-cycle (150 ns) voltage
// ramp plus 1 cycle. Links need 64 ns (10 ns for UPI) and DRAM 24 ns to be
// usable again; both finish inside the voltage ramp.
//
// Following the architecture: which blocks exist, which signals join them,
// the AND aggregation, two regulators and two memory controllers, and the
// IO population. This design's own choices: the grouping of IO controllers
// into the two InL0s trees, the ANDing of the two PwrOk outputs, and one
// shared write port for the regulators' VID registers.
module apc_top
  import apc_pkg::*;
#(
  parameter int unsigned N_CORE = N_CORES,
  parameter int unsigned N_MCS  = N_MC,
  parameter int unsigned N_CH   = N_DDR_CH
) (
  input  logic                              clk,
  input  logic                              clk_clm,
  input  logic                              rst_n,
  // cores (one status bit each, from each core's power-management agent)
  input  logic [N_CORE-1:0]                 core_in_cc1,
  // global PMU
  input  logic                              gpmu_wakeup,
  output logic                              in_pc1a,
  output pkg_state_e                        pkg_state,
  // high-speed IO controllers
  input  logic [N_IO-1:0]                   io_dev_present,
  input  logic [N_IO-1:0]                   io_link_active,
  input  logic [N_IO-1:0]                   io_cfg_aspm_l0s_en,
  input  logic [N_IO-1:0]                   io_cfg_l0s_entry_lat,
  output logic [N_IO-1:0]                   io_in_l0s,
  output logic [N_IO-1:0]                   io_link_ready,
  output link_state_e [N_IO-1:0]            io_lstate,
  output logic [N_IO-1:0][MAX_LANES-1:0]    io_lanes_awake,
  // memory controllers
  input  logic [N_MCS-1:0][N_CH-1:0]        mc_ch_busy,
  input  logic [N_MCS-1:0]                  mc_cfg_cke_on,
  output logic [N_MCS-1:0][N_CH-1:0]        mc_cke,
  output logic [N_MCS-1:0][N_CH-1:0]        mc_ch_ready,
  output logic [N_MCS-1:0]                  mc_in_cke_off,
  // CLM voltage regulators
  input  logic [N_CLM_VR-1:0]               vr_vid_we,
  input  logic [N_CLM_VR-1:0]               vr_rvid_we,
  input  logic [VID_W-1:0]                  vr_wdata,
  output logic [N_CLM_VR-1:0][VID_W-1:0]    vr_vid_out,
  output logic                              clm_pwr_ok,
  // CLM clock tree
  output logic                              gclk_clm,
  output logic                              clm_clk_gated,
  // APMU control wires, brought out for observation
  output logic                              allow_l0s,
  output logic                              allow_cke_off,
  output logic                              ret,
  output logic                              clk_gate
);

  // ------------------------------------------------------ IO population
  localparam io_kind_e    IO_KIND  [N_IO] = '{IO_UPI, IO_UPI, IO_PCIE, IO_DMI, IO_PCIE, IO_PCIE};
  localparam int unsigned IO_LANES [N_IO] = '{20, 20, 16, 4, 16, 16};
  localparam int unsigned IO_PER_GRP = N_IO / 2;
  localparam int unsigned CORE_PER_GRP = N_CORE / 2;

  // ------------------------------------------------------ InCC1 aggregation
  logic [1:0] in_cc1_grp;
  for (genvar g = 0; g < 2; g++) begin : g_cc1
    status_and_tree #(.N(CORE_PER_GRP)) u_and (
      .in  (core_in_cc1[g*CORE_PER_GRP +: CORE_PER_GRP]),
      .out (in_cc1_grp[g])
    );
  end

  // ------------------------------------------------------ IO controllers
  for (genvar i = 0; i < N_IO; i++) begin : g_io
    logic [IO_LANES[i]-1:0] lanes;
    io_pm_ctrl #(.KIND(IO_KIND[i]), .LANES(IO_LANES[i])) u_io (
      .clk,
      .rst_n,
      .allow_l0s,
      .cfg_aspm_l0s_en   (io_cfg_aspm_l0s_en[i]),
      .cfg_l0s_entry_lat (io_cfg_l0s_entry_lat[i]),
      .dev_present       (io_dev_present[i]),
      .link_active       (io_link_active[i]),
      .in_l0s            (io_in_l0s[i]),
      .link_ready        (io_link_ready[i]),
      .lanes_awake       (lanes),
      .lstate            (io_lstate[i])
    );
    assign io_lanes_awake[i] = MAX_LANES'(lanes);
  end

  logic [1:0] in_l0s_grp;
  for (genvar g = 0; g < 2; g++) begin : g_l0s
    status_and_tree #(.N(IO_PER_GRP)) u_and (
      .in  (io_in_l0s[g*IO_PER_GRP +: IO_PER_GRP]),
      .out (in_l0s_grp[g])
    );
  end

  // ------------------------------------------------------ APMU
  apmu #(.N_CC1_GRP(2), .N_L0S_GRP(2)) u_apmu (
    .clk,
    .rst_n,
    .in_cc1_grp,
    .in_l0s_grp,
    .wakeup (gpmu_wakeup),
    .pwr_ok (clm_pwr_ok),
    .allow_l0s,
    .clk_gate,
    .ret,
    .allow_cke_off,
    .in_pc1a,
    .state  (pkg_state)
  );

  // ------------------------------------------------------ memory controllers
  for (genvar m = 0; m < N_MCS; m++) begin : g_mc
    mc_cke_ctrl #(.N_CH(N_CH)) u_mc (
      .clk,
      .rst_n,
      .allow_cke_off,
      .cfg_cke_on (mc_cfg_cke_on[m]),
      .ch_busy    (mc_ch_busy[m]),
      .cke        (mc_cke[m]),
      .ch_ready   (mc_ch_ready[m]),
      .in_cke_off (mc_in_cke_off[m])
    );
  end

  // ------------------------------------------------------ CLM regulators
  logic [N_CLM_VR-1:0] vr_pwr_ok;
  for (genvar v = 0; v < N_CLM_VR; v++) begin : g_vr
    fivr_fcm u_fcm (
      .clk,
      .rst_n,
      .ret,
      .vid_we     (vr_vid_we[v]),
      .vid_wdata  (vr_wdata),
      .rvid_we    (vr_rvid_we[v]),
      .rvid_wdata (vr_wdata),
      .vid_out    (vr_vid_out[v]),
      .pwr_ok     (vr_pwr_ok[v])
    );
  end
  assign clm_pwr_ok = &vr_pwr_ok;

  // ------------------------------------------------------ CLM clock tree
  clm_clk_gate u_clkgate (
    .clk_clm,
    .rst_n,
    .clk_gate_req (clk_gate),
    .gclk_clm,
    .gated        (clm_clk_gated)
  );

endmodule
