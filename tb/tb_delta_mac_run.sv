// tb_delta_mac_run -- reusable end-to-end driver and checker for one delta_mac.
//
// Instantiates delta_mac with the given parameters and, after `go`, runs N_OPS
// dot products. For each operation it draws a reference value and target weights,
// encodes them with the saturating delta code (delta_pkg::compress_delta, using the
// fixed reference or the previously rebuilt weight as the base, depending on MODE),
// loads the codes and random inputs through the load ports, starts the operator and
// checks:
//   * done arrives exactly ceil(N_WEIGHTS/N_MULT) + 2 edges after start,
//   * acc equals sum x[i] * w[i] of the weights rebuilt here from the codes,
//   * y and y_sat equal acc >>> 5 saturated to 8 bits.
// Some operations use all-maximum or all-minimum inputs to force y saturation, some
// give a second start while busy (must be ignored), some restart in the done cycle
// (back to back). The counters report how often each of these happened.
module tb_delta_mac_run #(
  parameter delta_pkg::delta_mode_e MODE = delta_pkg::DELTA_FIXED,
  parameter int unsigned N_WEIGHTS = 84,
  parameter int unsigned N_MULT    = 4,
  parameter int unsigned N_OPS     = 12
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_code_sat,     // deltas clipped by the encoder (saturated codes stored)
  output int   n_ysat_pos,
  output int   n_ysat_neg,
  output int   n_ignored_start,
  output int   n_back2back,
  output int   n_partial_group
);
  localparam int unsigned DATA_W   = 8;
  localparam int unsigned DELTA_W  = 4;
  localparam int unsigned ADDR_W   = (N_WEIGHTS > 1) ? $clog2(N_WEIGHTS) : 1;
  localparam int unsigned N_GROUPS = (N_WEIGHTS + N_MULT - 1) / N_MULT;
  localparam int unsigned ACC_W    = 2 * DATA_W + ((N_WEIGHTS > 1) ? $clog2(N_WEIGHTS) : 1);

  logic                     x_wr_en, w_wr_en, w_wr_ref, start, busy, done, y_sat;
  logic [ADDR_W-1:0]        x_wr_addr, w_wr_addr;
  logic [DATA_W-1:0]        x_wr_data, w_wr_data;
  logic signed [DATA_W-1:0] y;
  logic signed [ACC_W-1:0]  acc;

  delta_mac #(.MODE(MODE), .N_WEIGHTS(N_WEIGHTS), .N_MULT(N_MULT)) dut (.*);

  logic signed [DATA_W-1:0] x_m   [N_WEIGHTS];
  logic signed [DATA_W-1:0] w_m   [N_WEIGHTS];
  logic [DELTA_W-1:0]       code_m[N_WEIGHTS];

  function automatic logic signed [DATA_W-1:0] expand(input logic [DELTA_W-1:0] c);
    // independent sign extension: value = c - 2^m if the top bit is set
    int v;
    v = int'(c);
    if (c[DELTA_W-1]) v = v - (1 << DELTA_W);
    return DATA_W'(v);
  endfunction

  function automatic int rand_range(input int lo, input int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [mode=%0d N=%0d P=%0d] %s", MODE, N_WEIGHTS, N_MULT, what);
    end
  endtask

  // scenario: 0 random, 1 large positive result, 2 large negative result.
  // own_ref: the reference is w[0] itself (delta 0), else a separate value.
  task automatic make_and_load(input int scenario, input bit own_ref);
    logic signed [DATA_W-1:0] refv, base, target;
    logic signed [DATA_W-1:0] d;
    refv = (scenario == 0) ? DATA_W'(rand_range(-60, 60)) : DATA_W'(rand_range(90, 100));
    base   = refv;
    for (int i = 0; i < int'(N_WEIGHTS); i++) begin
      if (i == 0 && own_ref) target = refv;
      else if (scenario == 0) target = DATA_W'(int'(base) - rand_range(-10, 10));
      else               target = DATA_W'(int'(refv) - rand_range(-3, 3));
      d         = DATA_W'(base - target);
      code_m[i] = delta_pkg::compress_delta(d);
      if (expand(code_m[i]) != d) n_code_sat++;
      w_m[i]    = DATA_W'(base - expand(code_m[i]));
      if (MODE == delta_pkg::DELTA_CONSECUTIVE) base = w_m[i];
    end
    for (int i = 0; i < int'(N_WEIGHTS); i++) begin
      if (scenario == 1)      x_m[i] = 8'sd127;
      else if (scenario == 2) x_m[i] = -8'sd128;
      else                    x_m[i] = DATA_W'(rand_range(-128, 127));
    end
    // load: reference, then deltas and inputs side by side
    @(negedge clk);
    w_wr_en   = 1'b1;
    w_wr_ref  = 1'b1;
    w_wr_data = refv;
    for (int i = 0; i < int'(N_WEIGHTS); i++) begin
      @(negedge clk);
      w_wr_en   = 1'b1;
      w_wr_ref  = 1'b0;
      w_wr_addr = ADDR_W'(i);
      w_wr_data = {{(DATA_W-DELTA_W){1'b0}}, code_m[i]};
      x_wr_en   = 1'b1;
      x_wr_addr = ADDR_W'(i);
      x_wr_data = x_m[i];
    end
    @(negedge clk);
    w_wr_en = 1'b0;
    x_wr_en = 1'b0;
  endtask

  // Starts an operation (start must already be set up by the caller at a point
  // before the sampling edge), waits for done and checks the result.
  task automatic run_and_check(input bit poke_busy, output bit ended_ok);
    longint exp_acc;
    int     exp_y, cycles;
    bit     exp_sat;
    exp_acc = 0;
    for (int i = 0; i < int'(N_WEIGHTS); i++) exp_acc += longint'(x_m[i]) * longint'(w_m[i]);
    exp_y   = int'(exp_acc >>> 5);
    exp_sat = 1'b0;
    if (exp_y > 127)  begin exp_y = 127;  exp_sat = 1'b1; end
    if (exp_y < -128) begin exp_y = -128; exp_sat = 1'b1; end

    @(posedge clk);   // edge 0 samples start
    #1 start = 1'b0;
    cycles = 0;
    while (!done && cycles < 4 * int'(N_GROUPS) + 10) begin
      @(posedge clk);
      #1;
      cycles++;
      start = poke_busy && (cycles == 2);
      if (start) begin
        check(busy, "busy during operation");
        n_ignored_start++;
      end
    end
    start = 1'b0;
    check(cycles == int'(N_GROUPS) + 2,
          $sformatf("latency %0d, expected %0d", cycles, N_GROUPS + 2));
    check(longint'(acc) == exp_acc, $sformatf("acc %0d, expected %0d", acc, exp_acc));
    check(int'(y) == exp_y, $sformatf("y %0d, expected %0d", y, exp_y));
    check(y_sat == exp_sat, "y_sat");
    if (exp_sat && exp_y > 0) n_ysat_pos++;
    if (exp_sat && exp_y < 0) n_ysat_neg++;
    if (N_WEIGHTS % N_MULT != 0) n_partial_group++;
    ended_ok = done;
  endtask

  initial begin
    bit ok;
    finished = 1'b0;
    checks = 0; failures = 0; n_code_sat = 0; n_ysat_pos = 0; n_ysat_neg = 0;
    n_ignored_start = 0; n_back2back = 0; n_partial_group = 0;
    x_wr_en = 0; w_wr_en = 0; w_wr_ref = 0; start = 0;
    x_wr_addr = '0; w_wr_addr = '0; x_wr_data = '0; w_wr_data = '0;
    wait (go);
    for (int op = 0; op < int'(N_OPS); op++) begin
      make_and_load((op % 4 == 1) ? 1 : (op % 4 == 3) ? 2 : 0, op % 5 != 4);
      @(negedge clk);
      start = 1'b1;
      run_and_check(op % 3 == 2, ok);
      if (op % 2 == 0 && ok) begin
        // restart in the done cycle, same operands: same result, same latency
        check(!busy, "idle while done");
        start = 1'b1;
        n_back2back++;
        run_and_check(1'b0, ok);
      end
      check(!busy, "idle after operation");
    end
    finished = 1'b1;
  end

endmodule
