// tb_requantize -- checks the conversion of the accumulator to Q2.5.
//
// For random accumulator values over the whole 23-bit range, values near the
// saturation thresholds and the extremes, the model computes floor(acc / 32) and
// clips it to [-128, 127]; y and sat must match.
module tb_requantize;
  int checks = 0, failures = 0;
  logic signed [22:0] acc = '0;
  logic signed [7:0]  y;
  logic               sat;
  requantize dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic try(input int v);
    int q, e;
    bit es;
    acc = 23'(v);
    #1;
    q = (v >= 0) ? v / 32 : -((-v + 31) / 32);   // floor division
    e = q; es = 0;
    if (q > 127)  begin e = 127;  es = 1; end
    if (q < -128) begin e = -128; es = 1; end
    check(int'(y) == e && sat == es, $sformatf("acc %0d: y %0d sat %0d, expected %0d %0d", v, y, sat, e, es));
  endtask

  initial begin
    automatic int edges [10] = '{0, -1, 4095, 4096, 4064, 4063, -4096, -4097, 4194303, -4194304};
    foreach (edges[i]) try(edges[i]);
    for (int i = 0; i < 3000; i++) try(int'($urandom_range(0, 8191)) - 4096);
    for (int i = 0; i < 3000; i++) try(int'($urandom % 8388608) - 4194304);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
