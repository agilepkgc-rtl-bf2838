// tb_status_and_tree -- checks the AND aggregation of status bits for the two
// group sizes of the reference SoC (5 cores, 3 IO controllers): every input
// pattern of each, compared with a loop-computed expectation.
module tb_status_and_tree;
  int checks = 0, failures = 0;

  logic [4:0] in5;
  logic       out5;
  logic [2:0] in3;
  logic       out3;

  status_and_tree #(.N(5)) dut5 (.in(in5), .out(out5));
  status_and_tree #(.N(3)) dut3 (.in(in3), .out(out3));

  initial begin
    for (int v = 0; v < 32; v++) begin
      logic exp_v;
      in5 = 5'(v);
      exp_v = 1'b1;
      for (int b = 0; b < 5; b++) if (!in5[b]) exp_v = 1'b0;
      #1;
      checks++;
      if (out5 !== exp_v) begin failures++; $display("FAIL N=5 in=%b out=%b", in5, out5); end
    end
    for (int v = 0; v < 8; v++) begin
      in3 = 3'(v);
      #1;
      checks++;
      if (out3 !== (v == 7)) begin failures++; $display("FAIL N=3 in=%b out=%b", in3, out3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
