// tb_weight_reconstruct -- checks delta expansion and weight rebuilding.
//
// Two instances, fixed-reference and consecutive, get the same stream of random
// codes: 100 vectors of 84 weights in 21 groups of 4, with a random reference per
// vector and some lanes of the last group marked invalid. The model expands a code
// c as c - 16 when its top bit is set and rebuilds
//   fixed:       w[i] = ref - expand(c[i])
//   consecutive: w[i] = w[i-1] - expand(c[i]), starting from w[-1] = ref
// in 8-bit wrap-around arithmetic, invalid lanes giving 0. A third, fixed-mode
// instance with 12-bit data and 8-bit deltas is checked on random values too.
module tb_weight_reconstruct;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic step = 0, first_group = 0;
  logic [7:0] ref_value = '0;
  logic [3:0][3:0] delta = '0;
  logic [3:0] lane_valid = '0;
  logic [3:0][7:0] w_fix, w_con;

  weight_reconstruct #(.MODE(delta_pkg::DELTA_FIXED)) dut_f (
    .clk, .rst_n, .step, .first_group, .ref_value, .delta, .lane_valid, .weight(w_fix));
  weight_reconstruct #(.MODE(delta_pkg::DELTA_CONSECUTIVE)) dut_c (
    .clk, .rst_n, .step, .first_group, .ref_value, .delta, .lane_valid, .weight(w_con));

  // 8-bit deltas on 12-bit data, the second width pair the operator is meant for
  logic [11:0]      ref12 = '0;
  logic [3:0][7:0]  delta8 = '0;
  logic [3:0][11:0] w12;
  weight_reconstruct #(.MODE(delta_pkg::DELTA_FIXED), .DATA_W(12), .DELTA_W(8)) dut_w (
    .clk, .rst_n, .step, .first_group, .ref_value(ref12), .delta(delta8), .lane_valid,
    .weight(w12));

  function automatic int expand(input logic [3:0] c);
    return c[3] ? int'(c) - 16 : int'(c);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 100; v++) begin
      logic [7:0] run;
      ref_value = 8'($urandom);
      run = ref_value;
      for (int g = 0; g < 21; g++) begin
        @(negedge clk);
        step = 1; first_group = (g == 0);
        ref12 = 12'($urandom);
        for (int j = 0; j < 4; j++) begin
          delta8[j] = 8'($urandom);
          delta[j] = 4'($urandom);
          lane_valid[j] = (g < 20) || (j < int'(v % 5));
        end
        #1;
        for (int j = 0; j < 4; j++) begin
          logic [7:0] ef, ec;
          if (!lane_valid[j]) begin
            ef = 0; ec = 0;
          end else begin
            ef  = 8'(int'(ref_value) - expand(delta[j]));
            run = 8'(int'(run) - expand(delta[j]));
            ec  = run;
          end
          check(w_fix[j] == ef, $sformatf("fixed v%0d g%0d l%0d: %0d vs %0d", v, g, j, w_fix[j], ef));
          check(w_con[j] == ec, $sformatf("consec v%0d g%0d l%0d: %0d vs %0d", v, g, j, w_con[j], ec));
          check(w12[j] == (lane_valid[j] ? 12'(int'(ref12) - int'($signed(delta8[j]))) : 12'd0),
                $sformatf("12/8 v%0d g%0d l%0d", v, g, j));
        end
      end
      @(negedge clk);
      step = 0;
      // an idle cycle must not disturb the chain
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
