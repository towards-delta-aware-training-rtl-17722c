// weight_reconstruct -- rebuilds N_MULT full-width weights per cycle from delta codes.
//
// Each DELTA_W-bit code is first expanded to a signed DATA_W-bit value by two's
// complement sign extension, then combined with the reference r:
//   MODE = DELTA_FIXED:       w[i] = r      - sext(d[i])
//   MODE = DELTA_CONSECUTIVE: w[i] = w[i-1] - sext(d[i]),  with w[-1] = r
// When r is the vector's own first weight, d[0] is 0 and w[0] = r. The subtraction
// follows the delta figures of the paper, which print the stored values as
// X0 - Xi (fixed) and X(i-1) - Xi (consecutive); the paper's text says the expanded
// delta is "added to the reference value", which is the same adder with the stored
// sign flipped. Arithmetic wraps at DATA_W bits (the text says deltas are expanded
// "to signed n bit numbers" before the addition; overflow handling is not given).
//
// Consecutive mode chains the lanes of a group combinationally (a ripple of
// N_MULT subtractors) and keeps the last weight of the group in a register for the
// next group; `step` marks a cycle whose group is consumed, `first_group` marks
// group 0, which restarts the chain from the reference. clk, rst_n, step and
// first_group are used only in consecutive mode; fixed mode is purely
// combinational. Lanes with lane_valid low produce weight 0, so a partly filled last
// group contributes nothing to the sum.
module weight_reconstruct
#(
  parameter delta_pkg::delta_mode_e MODE = delta_pkg::DELTA_FIXED,
  parameter int unsigned N_MULT  = delta_pkg::N_MULT,
  parameter int unsigned DATA_W  = delta_pkg::DATA_W,
  parameter int unsigned DELTA_W = delta_pkg::DELTA_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            step,
  input  logic                            first_group,
  input  logic [DATA_W-1:0]               ref_value,
  input  logic [N_MULT-1:0][DELTA_W-1:0]  delta,
  input  logic [N_MULT-1:0]               lane_valid,
  output logic [N_MULT-1:0][DATA_W-1:0]   weight
);

  function automatic logic [DATA_W-1:0] sext(input logic [DELTA_W-1:0] d);
    return {{(DATA_W-DELTA_W){d[DELTA_W-1]}}, d};
  endfunction

  if (MODE == delta_pkg::DELTA_FIXED) begin : g_fixed
    // every weight depends on the reference only
    always_comb begin
      for (int j = 0; j < int'(N_MULT); j++) begin
        if (lane_valid[j]) weight[j] = DATA_W'(ref_value - sext(delta[j]));
        else               weight[j] = '0;
      end
    end
  end else begin : g_consecutive
    // chain[j] is the running weight before lane j; chain[N_MULT] ends the group
    logic [DATA_W-1:0] prev_q;
    logic [N_MULT:0][DATA_W-1:0] chain;

    always_comb begin
      chain[0] = first_group ? ref_value : prev_q;
      for (int j = 0; j < int'(N_MULT); j++) begin
        if (lane_valid[j]) chain[j+1] = DATA_W'(chain[j] - sext(delta[j]));
        else               chain[j+1] = chain[j];
        weight[j] = lane_valid[j] ? chain[j+1] : '0;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    prev_q <= '0;
      else if (step) prev_q <= chain[N_MULT];
    end
  end

endmodule
