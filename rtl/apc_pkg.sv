// apc_pkg -- types and constants shared by the AgilePkgC power-management RTL.
//
// AgilePkgC adds one package idle state, PC1A, to a server SoC. PC1A may be
// entered as soon as every core sits in the shallow core state CC1; it puts the
// high-speed IO links in L0s/L0p, the DRAM in CKE power-down and the CLM
// (caching/home agent, last-level cache and mesh) in clock-gated voltage
// retention, while every PLL stays locked so that the whole entry plus exit
// costs well under 200 ns.
//
// All power-management logic here runs on one 500 MHz clock (2 ns per cycle),
// the clock of the global power-management unit that the APMU shares; the
// CLM clock gate is the only block on another clock. Cycle counts below are
// the nanosecond figures of the architecture divided by 2 ns.
package apc_pkg;

  // ---------------------------------------------------------------- clocking
  parameter int unsigned PM_CLK_MHZ = 500;     // APMU / GPMU clock
  parameter int unsigned NS_PER_CYC = 1000 / PM_CLK_MHZ;

  // ---------------------------------------------------------- SoC population
  // Reference server: 10 cores, 3 PCIe + 1 DMI + 2 UPI controllers,
  // 2 memory controllers with 3 DDR4 channels each.
  parameter int unsigned N_CORES   = 10;
  parameter int unsigned N_IO      = 6;
  parameter int unsigned N_MC      = 2;
  parameter int unsigned N_DDR_CH  = 3;
  parameter int unsigned N_CLM_VR  = 2;        // Vccclm0, Vccclm1
  parameter int unsigned MAX_LANES = 20;       // widest link (UPI x20)

  // ------------------------------------------------------------- IO timing
  parameter int unsigned L0S_EXIT_CYC = 64 / NS_PER_CYC;  // 64 ns
  parameter int unsigned L0P_EXIT_CYC = 10 / NS_PER_CYC;  // 10 ns

  // ----------------------------------------------------------- DRAM timing
  parameter int unsigned CKE_ENTRY_CYC = 10 / NS_PER_CYC; // enter within 10 ns
  parameter int unsigned CKE_EXIT_CYC  = 24 / NS_PER_CYC; // exit within 24 ns

  // -------------------------------------------------------- voltage control
  // VID code: 4 mV per LSB, so one LSB per 2 ns cycle is a 2 mV/ns slew.
  parameter int unsigned VID_W       = 8;
  parameter int unsigned VID_MV_LSB  = 4;
  parameter logic [7:0]  VID_NOMINAL = 8'd200;            // 0.80 V
  parameter logic [7:0]  VID_RETAIN  = 8'd125;            // 0.50 V

  // ------------------------------------------------------- APMU flow states
  typedef enum logic [2:0] {
    PKG_PC0    = 3'd0,  // at least one core active
    PKG_ACC1   = 3'd1,  // all cores in CC1, IOs allowed into L0s
    PKG_ENTRY  = 3'd2,  // CLM clock gated, Allow_CKE_OFF set
    PKG_PC1A   = 3'd3,  // Ret set, InPC1A reported to the GPMU
    PKG_EXIT   = 3'd4   // Ret and Allow_CKE_OFF unset, waiting for PwrOk
  } pkg_state_e;

  // ------------------------------------------------------ IO link L-states
  typedef enum logic [1:0] {
    LNK_L0      = 2'd0, // active
    LNK_LOWPWR  = 2'd1, // L0s (all lanes idle) or L0p (half the lanes idle)
    LNK_EXIT    = 2'd2  // waking back to L0
  } link_state_e;

  // --------------------------------------------------- DRAM channel states
  typedef enum logic [1:0] {
    CH_ACTIVE   = 2'd0, // CKE high, commands may issue
    CH_PD       = 2'd1, // CKE low (power-down)
    CH_PD_EXIT  = 2'd2  // CKE high again, waiting out the exit time
  } ch_state_e;

  // Kind of a high-speed IO controller.
  typedef enum logic [1:0] {
    IO_PCIE = 2'd0,
    IO_DMI  = 2'd1,
    IO_UPI  = 2'd2
  } io_kind_e;

endpackage
