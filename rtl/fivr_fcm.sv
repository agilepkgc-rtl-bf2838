// fivr_fcm -- FIVR control module of one CLM voltage domain (Vccclm0/1).
//
// The CLM (caching/home agent, last-level cache, mesh) is powered by two fully
// integrated voltage regulators. For PC1A each regulator's control module gets
// an 8-bit retention-VID register (RVID) next to its operating VID and a Ret
// input that selects between them, so the APMU can send the CLM to retention
// with one wire instead of a firmware message. The module steps the VID code
// that drives the regulator one LSB at a time toward the selected target, which
// models the regulator's slew rate, and raises pwr_ok when Ret is clear and the
// code is back at the operating VID. A new target takes effect at once, also in
// the middle of a ramp (preemptive voltage commands), so a wakeup during entry
// reverses the ramp where it stands.
//
// Interface: ret from the APMU; vid_we/vid_wdata and rvid_we/rvid_wdata load
// the two registers (GPMU side); vid_out is the code sent to the power stage;
// pwr_ok goes to the APMU. Timing: one LSB per STEP_CYC cycles. With the
// defaults (4 mV LSB, one step per 2 ns cycle = 2 mV/ns) the 0.8 V to 0.5 V
// swing takes 75 cycles = 150 ns each way. pwr_ok is combinational from the
// code register and ret.
//
// Following the architecture: the 8-bit RVID register, the VID/RVID select,
// Ret and PwrOk, the slew rate and the voltages. This design's own choices: the
// VID code scale, ramping the code in the control module, reset straight to
// the operating VID, and pwr_ok meaning "operating voltage reached".
module fivr_fcm
  import apc_pkg::*;
#(
  parameter int unsigned      STEP_CYC  = 1,
  parameter logic [VID_W-1:0] RESET_VID = VID_NOMINAL,
  parameter logic [VID_W-1:0] RESET_RVID = VID_RETAIN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ret,
  input  logic             vid_we,
  input  logic [VID_W-1:0] vid_wdata,
  input  logic             rvid_we,
  input  logic [VID_W-1:0] rvid_wdata,
  output logic [VID_W-1:0] vid_out,
  output logic             pwr_ok
);

  localparam int unsigned SW = (STEP_CYC > 1) ? $clog2(STEP_CYC) : 1;

  logic [VID_W-1:0] vid_q, rvid_q, cur_q, target;
  logic [SW-1:0]    div_q;
  logic             step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vid_q  <= RESET_VID;
      rvid_q <= RESET_RVID;
    end else begin
      if (vid_we)  vid_q  <= vid_wdata;
      if (rvid_we) rvid_q <= rvid_wdata;
    end
  end

  assign target = ret ? rvid_q : vid_q;

  // Slew-rate divider: one VID step every STEP_CYC cycles.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_q <= '0;
    else if (cur_q == target || step) div_q <= '0;
    else div_q <= div_q + 1'b1;
  end
  assign step = (cur_q != target) && (32'(div_q) + 1 >= STEP_CYC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur_q <= RESET_VID;
    else if (step) begin
      if (cur_q < target) cur_q <= cur_q + 1'b1;
      else                cur_q <= cur_q - 1'b1;
    end
  end

  assign vid_out = cur_q;
  assign pwr_ok  = !ret && (cur_q == vid_q);

  a_slew: assert property (@(posedge clk) disable iff (!rst_n)
      (cur_q == $past(cur_q)) || (cur_q == $past(cur_q) + 1'b1) || (cur_q == $past(cur_q) - 1'b1));

endmodule
