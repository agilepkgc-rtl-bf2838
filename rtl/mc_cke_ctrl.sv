// mc_cke_ctrl -- CKE power-down control of one memory controller.
//
// A DDR4 rank whose clock-enable (CKE) is low is in power-down: it keeps its
// contents, draws well under half of its active power and wakes in tens of
// nanoseconds. Servers usually pin CKE on through a controller register
// (cfg_cke_on). AgilePkgC adds the Allow_CKE_OFF input: while it is set the
// register is overridden and each channel drops CKE once it has no outstanding
// transaction; when it is unset every channel raises CKE and returns to the
// active state. A request that reaches a powered-down channel also wakes that
// channel. Self-refresh, the deep DRAM state of the older package states, is
// not used.
//
// Interface: allow_cke_off from the APMU; ch_busy[c] is high while channel c
// has a transaction queued or in flight; cke[c] is the CKE pin of channel c;
// ch_ready[c] says that commands may issue; in_cke_off says every channel is
// powered down. Timing: CKE falls ENTRY_CYC cycles (5 = 10 ns) after a channel
// becomes idle with power-down allowed, and rises in the cycle after the wake
// condition; ch_ready follows EXIT_CYC cycles (12 = 24 ns) later.
//
// Following the architecture: the register override, power-down only once
// outstanding work is done, return on unset and the 10 ns / 24 ns latencies.
// This design's own choices: one CKE per channel (the rank granularity of the
// DRAM is folded into the channel), the wake on a request, and the counters.
module mc_cke_ctrl
  import apc_pkg::*;
#(
  parameter int unsigned N_CH      = N_DDR_CH,
  parameter int unsigned ENTRY_CYC = CKE_ENTRY_CYC,
  parameter int unsigned EXIT_CYC  = CKE_EXIT_CYC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            allow_cke_off,   // from the APMU
  input  logic            cfg_cke_on,      // controller register: keep CKE on
  input  logic [N_CH-1:0] ch_busy,
  output logic [N_CH-1:0] cke,
  output logic [N_CH-1:0] ch_ready,
  output logic            in_cke_off
);

  localparam int unsigned MAXC = (ENTRY_CYC > EXIT_CYC) ? ENTRY_CYC : EXIT_CYC;
  localparam int unsigned CW   = $clog2(MAXC + 2);

  logic pd_allowed;
  assign pd_allowed = allow_cke_off | ~cfg_cke_on;

  ch_state_e     st_q  [N_CH];
  logic [CW-1:0] cnt_q [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st_q[c]  <= CH_ACTIVE;
        cnt_q[c] <= '0;
      end else begin
        unique case (st_q[c])
          CH_ACTIVE: begin
            if (!pd_allowed || ch_busy[c]) cnt_q[c] <= '0;
            else if (cnt_q[c] + 1'b1 >= CW'(ENTRY_CYC)) begin
              st_q[c]  <= CH_PD;
              cnt_q[c] <= '0;
            end else cnt_q[c] <= cnt_q[c] + 1'b1;
          end
          CH_PD: begin
            if (!pd_allowed || ch_busy[c]) begin
              st_q[c]  <= CH_PD_EXIT;
              cnt_q[c] <= '0;
            end
          end
          CH_PD_EXIT: begin
            if (cnt_q[c] + 1'b1 >= CW'(EXIT_CYC)) begin
              st_q[c]  <= CH_ACTIVE;
              cnt_q[c] <= '0;
            end else cnt_q[c] <= cnt_q[c] + 1'b1;
          end
          default: begin
            st_q[c]  <= CH_ACTIVE;
            cnt_q[c] <= '0;
          end
        endcase
      end
    end

    assign cke[c]      = (st_q[c] != CH_PD);
    assign ch_ready[c] = (st_q[c] == CH_ACTIVE);

    a_no_pd_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
        (st_q[c] == CH_ACTIVE && ch_busy[c]) |=> (st_q[c] != CH_PD));
  end

  assign in_cke_off = ~|cke;

endmodule
