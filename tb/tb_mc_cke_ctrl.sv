// tb_mc_cke_ctrl -- checks CKE power-down control of a 3-channel memory
// controller: CKE stays on with the register set and Allow_CKE_OFF clear; with
// Allow_CKE_OFF an idle channel drops CKE after 5 cycles (10 ns) while a busy
// one keeps it until its work is done; unsetting Allow_CKE_OFF raises CKE at
// once and restores ch_ready after 12 cycles (24 ns); a request wakes a single
// channel; the register alone (cfg_cke_on = 0) also allows power-down.
module tb_mc_cke_ctrl;
  import apc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic allow_cke_off, cfg_cke_on;
  logic [2:0] ch_busy, cke, ch_ready;
  logic in_cke_off;

  int checks = 0, failures = 0;

  mc_cke_ctrl dut (.*);

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

  initial begin
    allow_cke_off = 0; cfg_cke_on = 1; ch_busy = 3'b111;
    tick(2); rst_n = 1; tick();
    check(cke == 3'b111 && ch_ready == 3'b111 && !in_cke_off, "reset: CKE on, ready");

    @(negedge clk); ch_busy = 3'b000;
    tick(50);
    check(cke == 3'b111, "register keeps CKE on while not allowed");

    // Allow with channel 2 still busy.
    @(negedge clk); allow_cke_off = 1; ch_busy = 3'b100;
    n = 0;
    while (cke[0] && n < 100) begin tick(); n++; end
    check(n == CKE_ENTRY_CYC, $sformatf("CKE off after %0d cycles, expected 5 (10 ns)", n));
    check(cke == 3'b100 && !in_cke_off, "busy channel keeps CKE");
    tick(20);
    check(cke[2], "busy channel still on");
    @(negedge clk); ch_busy = 3'b000;
    tick(CKE_ENTRY_CYC);
    check(cke == 3'b000 && in_cke_off, "all channels in power-down once idle");
    check(ch_ready == 3'b000, "not ready in power-down");

    // Unset: all channels exit.
    @(negedge clk); allow_cke_off = 0;
    tick();
    check(cke == 3'b111, "CKE raised one cycle after Allow_CKE_OFF unset");
    check(ch_ready == 3'b000, "still waiting exit time");
    n = 1;
    while (ch_ready != 3'b111 && n < 100) begin tick(); n++; end
    check(n == CKE_EXIT_CYC + 1, $sformatf("ready after %0d cycles, expected 13 (24 ns + 1)", n));

    // Request to one powered-down channel.
    @(negedge clk); allow_cke_off = 1;
    tick(CKE_ENTRY_CYC + 1);
    check(cke == 3'b000, "power-down again");
    @(negedge clk); ch_busy = 3'b010;
    tick();
    check(cke == 3'b010, "request wakes only its channel");
    tick(CKE_EXIT_CYC + 1);
    check(ch_ready == 3'b010, "woken channel ready");
    @(negedge clk); ch_busy = 3'b000;
    tick(CKE_ENTRY_CYC + 1);
    check(cke == 3'b000, "back to power-down after the request");

    // Register alone allows power-down.
    @(negedge clk); allow_cke_off = 0;
    tick(CKE_EXIT_CYC + 2);
    check(ch_ready == 3'b111, "active");
    @(negedge clk); cfg_cke_on = 0;
    tick(CKE_ENTRY_CYC + 1);
    check(in_cke_off, "cfg_cke_on = 0 allows power-down");

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
