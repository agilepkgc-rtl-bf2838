// tb_clm_clk_gate -- checks the CLM clock-tree gate: gated-clock edges follow
// the CLM clock while ClkGate is low, stop 2 to 3 CLM cycles after ClkGate
// rises (request from another clock domain), resume after it falls, and every
// gated-clock high pulse is a full half-period (no glitch).
module tb_clm_clk_gate;
  logic clk_clm = 1'b0, rst_n = 1'b0;
  logic clk_gate_req;
  logic gclk_clm, gated;

  int checks = 0, failures = 0;
  int gedges = 0, cedges = 0;
  int short_pulses = 0;
  realtime t_rise;

  clm_clk_gate dut (.*);

  always #3 clk_clm = ~clk_clm;            // CLM clock, unrelated to the request

  always @(posedge gclk_clm) begin gedges++; t_rise = $realtime; end
  always @(negedge gclk_clm) if (rst_n && $realtime - t_rise < 2.5) begin
    short_pulses++;
    $display("short pulse at %0t (rose at %0t)", $realtime, t_rise);
  end
  always @(posedge clk_clm) cedges++;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int g0, c0, lat;

  initial begin
    clk_gate_req = 0;
    #20 rst_n = 1;
    #60;
    g0 = gedges; c0 = cedges;
    #120;
    check(gedges - g0 == cedges - c0 && gedges > g0, "ungated clock follows CLM clock");
    check(!gated, "not gated");

    #5 clk_gate_req = 1;                     // request at an arbitrary time
    lat = 0;
    while (!gated) begin @(posedge clk_clm); lat++; end
    check(lat >= 1 && lat <= 3, $sformatf("gate seen after %0d CLM cycles", lat));
    @(posedge clk_clm); #1;
    g0 = gedges;
    #300;
    check(gedges == g0, $sformatf("no gated edges while gated (%0d)", gedges - g0));
    check(gclk_clm == 1'b0, "gated clock held low");

    #7 clk_gate_req = 0;
    lat = 0;
    g0 = gedges;
    while (gedges == g0 && lat < 20) begin @(posedge clk_clm); #1; lat++; end
    check(lat >= 2 && lat <= 4, $sformatf("clock restarts after %0d CLM cycles", lat));
    g0 = gedges; c0 = cedges;
    #120;
    check(gedges - g0 == cedges - c0, "clock follows again");

    // Several gate/ungate requests at odd phases; no short pulse anywhere.
    for (int i = 0; i < 20; i++) begin
      repeat (7 + i) #1;
      clk_gate_req = ~clk_gate_req;
    end
    clk_gate_req = 0;
    #100;
    check(short_pulses == 0, $sformatf("%0d shortened clock pulses", short_pulses));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
