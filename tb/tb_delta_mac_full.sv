// tb_delta_mac_full -- the delta MAC operator at its default size, end to end.
//
// delta_mac is instantiated with no parameter overrides: fixed-reference
// reconstruction, 84 weights, 4 parallel multipliers, 8-bit Q2.5 data, 4-bit
// deltas. This is the size of one neuron of the 84-input output layer of the
// 784-150-16-400-120-84-10 FashionMNIST network. For 16 operations the bench draws
// a reference weight and 83 further weights near it, encodes them with the
// saturating 4-bit delta code, loads codes and inputs, starts the operator and
// checks the 23-cycle latency, the accumulator, the Q2.5 result and its saturation
// flag against a model that rebuilds the weights independently of the design.
// It also loads the same weights plain (no delta clipping) and reports how many
// codes were clipped. Operations 1 and 2 force positive and negative saturation.
module tb_delta_mac_full;
  localparam int N = 84, P = 4, LAT = (N + P - 1) / P + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             x_wr_en = 0, w_wr_en = 0, w_wr_ref = 0, start = 0;
  logic [6:0]       x_wr_addr = '0, w_wr_addr = '0;
  logic [7:0]       x_wr_data = '0, w_wr_data = '0;
  logic             busy, done, y_sat;
  logic signed [7:0]  y;
  logic signed [22:0] acc;

  delta_mac dut (.*);

  int checks = 0, failures = 0, clipped = 0, n_sat = 0;
  logic signed [7:0] x_m [N];
  logic signed [7:0] w_m [N];
  logic [3:0]        c_m [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic signed [7:0] expand(input logic [3:0] c);
    return c[3] ? 8'(int'(c) - 16) : 8'(c);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int op = 0; op < 16; op++) begin
      longint exp_acc;
      int exp_y, cycles;
      logic signed [7:0] refv, target, d;
      refv = (op == 1 || op == 2) ? 8'sd96 : 8'($urandom_range(0, 120) - 60);
      for (int i = 0; i < N; i++) begin
        target = (i == 0) ? refv : 8'(int'(refv) + int'($urandom_range(0, 18)) - 9);
        d = refv - target;
        c_m[i] = delta_pkg::compress_delta(d);
        if (expand(c_m[i]) != d) clipped++;
        w_m[i] = refv - expand(c_m[i]);
      end
      for (int i = 0; i < N; i++)
        x_m[i] = (op == 1) ? 8'sd127 : (op == 2) ? -8'sd128 : 8'($urandom_range(0, 255));
      @(negedge clk);
      w_wr_en = 1; w_wr_ref = 1; w_wr_data = refv;
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        w_wr_en = 1; w_wr_ref = 0; w_wr_addr = 7'(i); w_wr_data = {4'b0, c_m[i]};
        x_wr_en = 1; x_wr_addr = 7'(i); x_wr_data = x_m[i];
      end
      @(negedge clk);
      w_wr_en = 0; x_wr_en = 0;
      exp_acc = 0;
      for (int i = 0; i < N; i++) exp_acc += longint'(x_m[i]) * longint'(w_m[i]);
      exp_y = int'(exp_acc >>> 5);
      if (exp_y > 127) exp_y = 127;
      if (exp_y < -128) exp_y = -128;
      start = 1;
      @(posedge clk);
      #1 start = 0;
      cycles = 0;
      while (!done && cycles < 100) begin
        @(posedge clk); #1 cycles++;
      end
      check(cycles == LAT, $sformatf("latency %0d expected %0d", cycles, LAT));
      check(longint'(acc) == exp_acc, $sformatf("acc %0d expected %0d", acc, exp_acc));
      check(int'(y) == exp_y, $sformatf("y %0d expected %0d", y, exp_y));
      check(y_sat == (int'(exp_acc >>> 5) != exp_y), "y_sat");
      if (y_sat) n_sat++;
    end
    check(n_sat >= 2, "saturation exercised");
    check(clipped > 0, "delta clipping exercised");
    $display("operations 16, latency %0d cycles, clipped delta codes %0d, saturated results %0d",
             LAT, clipped, n_sat);
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
