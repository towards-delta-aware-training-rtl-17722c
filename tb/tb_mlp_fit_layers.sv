// tb_mlp_fit_layers -- runs the two FashionMNIST MLP layers that fit one operation.
//
// The target network is 784-150-16-400-120-84-10. With its default 84 weights, one
// delta_mac operation computes one neuron of a layer with at most 84 inputs:
//   * layer 3: 16 inputs, 400 neurons; inputs 16..83 are written as zero and the
//     codes of those weight slots are random (they must not matter);
//   * layer 6: 84 inputs, 10 neurons.
// Each layer uses one fixed reference value shared by all its neurons, as deltas
// are computed per layer. The inputs are loaded once per layer and stay in the
// input buffer while each neuron's codes are reloaded. For every neuron the bench
// checks the accumulator, the Q2.5 result and the 23-cycle latency against a model
// that rebuilds the weights from the codes independently of the design. The weights
// are synthetic (random near the reference): no trained network is available here,
// and batch norm and activation are outside the operator.
module tb_mlp_fit_layers;
  localparam int N = 84, LAT = 23;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               x_wr_en = 0, w_wr_en = 0, w_wr_ref = 0, start = 0;
  logic [6:0]         x_wr_addr = '0, w_wr_addr = '0;
  logic [7:0]         x_wr_data = '0, w_wr_data = '0;
  logic               busy, done, y_sat;
  logic signed [7:0]  y;
  logic signed [22:0] acc;

  delta_mac dut (.*);

  int checks = 0, failures = 0, neurons = 0;
  logic signed [7:0] x_m [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int expand(input logic [3:0] c);
    return c[3] ? int'(c) - 16 : int'(c);
  endfunction

  task automatic run_layer(input int n_in, input int n_out);
    logic signed [7:0] refv;
    refv = 8'($urandom_range(0, 40) - 20);
    for (int i = 0; i < N; i++) begin
      x_m[i] = (i < n_in) ? 8'($urandom_range(0, 64) - 32) : 8'sd0;   // [-1, 1] in Q2.5
      @(negedge clk);
      x_wr_en = 1; x_wr_addr = 7'(i); x_wr_data = x_m[i];
      w_wr_en = (i == 0); w_wr_ref = (i == 0); w_wr_data = refv;
    end
    @(negedge clk);
    x_wr_en = 0; w_wr_en = 0; w_wr_ref = 0;
    for (int n = 0; n < n_out; n++) begin
      longint exp_acc;
      int exp_y, cycles;
      logic [3:0] code;
      exp_acc = 0;
      for (int i = 0; i < N; i++) begin
        code = 4'($urandom);
        @(negedge clk);
        w_wr_en = 1; w_wr_addr = 7'(i); w_wr_data = {4'($urandom), code};
        exp_acc += longint'(x_m[i]) * longint'(8'(int'(refv) - expand(code)));
      end
      @(negedge clk);
      w_wr_en = 0;
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
      check(cycles == LAT, $sformatf("layer %0d-in neuron %0d: latency %0d", n_in, n, cycles));
      check(longint'(acc) == exp_acc, $sformatf("layer %0d-in neuron %0d: acc %0d vs %0d", n_in, n, acc, exp_acc));
      check(int'(y) == exp_y, $sformatf("layer %0d-in neuron %0d: y %0d vs %0d", n_in, n, y, exp_y));
      neurons++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_layer(16, 400);
    run_layer(84, 10);
    check(neurons == 410, "all neurons computed");
    $display("neurons computed %0d", neurons);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
