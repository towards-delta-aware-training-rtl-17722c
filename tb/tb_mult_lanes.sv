// tb_mult_lanes -- checks the parallel signed multipliers.
//
// Drives random signed operands (and the corner values -128 and 127) on 4 lanes,
// with in_valid random, and checks one cycle later that each product equals the
// integer product of the operands and that out_valid follows in_valid; products
// hold their value in cycles without in_valid.
module tb_mult_lanes;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [3:0][7:0]  a = '0, b = '0;
  logic [3:0][15:0] prod;
  mult_lanes dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int exp_p [4];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < 4; j++) exp_p[j] = 0;
    for (int t = 0; t < 2000; t++) begin
      logic v;
      @(negedge clk);
      v = (t < 8) || ($urandom % 4 != 0);
      in_valid = v;
      for (int j = 0; j < 4; j++) begin
        a[j] = (t < 4) ? ((t[0]) ? 8'h80 : 8'h7f) : 8'($urandom);
        b[j] = (t < 4) ? ((t[1]) ? 8'h80 : 8'h7f) : 8'($urandom);
      end
      if (v) for (int j = 0; j < 4; j++) exp_p[j] = int'($signed(a[j])) * int'($signed(b[j]));
      @(posedge clk);
      #1;
      check(out_valid == v, "out_valid");
      for (int j = 0; j < 4; j++)
        check($signed(prod[j]) == 16'(exp_p[j]), $sformatf("t%0d lane %0d: %0d vs %0d", t, j, $signed(prod[j]), exp_p[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
