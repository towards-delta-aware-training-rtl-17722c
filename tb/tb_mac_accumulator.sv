// tb_mac_accumulator -- checks the adder tree and accumulator.
//
// Runs 200 accumulations of 21 groups of 4 random signed 16-bit products (with
// extreme values in some), random gaps without in_valid, and a clear between runs.
// The model sums the products as integers; the 23-bit accumulator must match.
module tb_mac_accumulator;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0;
  logic [3:0][15:0] prod = '0;
  logic signed [22:0] acc;
  mac_accumulator dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      longint model;
      @(negedge clk);
      clear = 1; in_valid = 1; prod = '1;   // clear wins over in_valid
      @(negedge clk);
      clear = 0; in_valid = 0;
      #1 check(acc == 0, "clear");
      model = 0;
      for (int g = 0; g < 21; g++) begin
        in_valid = 1;
        for (int j = 0; j < 4; j++) begin
          if (r % 4 == 1)      prod[j] = 16'h8000;   // -32768
          else if (r % 4 == 2) prod[j] = 16'h3f01;   // 127*127
          else                 prod[j] = 16'($urandom);
          model += longint'($signed(prod[j]));
        end
        @(negedge clk);
        in_valid = 0;
        if ($urandom % 3 == 0) begin
          prod = 16'($urandom);
          @(negedge clk);
        end
      end
      check(longint'(acc) == model, $sformatf("run %0d: %0d vs %0d", r, acc, model));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
