// mac_accumulator -- adder tree and accumulator of the MAC operator.
//
// Each cycle with in_valid high, the N_MULT signed products are summed (sign
// extended to ACC_W) and added to the accumulator register. `clear` zeroes the
// accumulator at the start of an operation and takes priority over in_valid.
// ACC_W must hold the sum of N_WEIGHTS full products: 2*DATA_W + ceil(log2 N)
// bits, 23 bits for 84 weights of 8 bits, so the sum never overflows. The paper
// names "parallel buffers and adders"; the adder shape and width are this design's
// choice. Timing: the result of a valid cycle is in `acc` after the next edge.
module mac_accumulator #(
  parameter int unsigned N_MULT = delta_pkg::N_MULT,
  parameter int unsigned PROD_W = 2 * delta_pkg::DATA_W,
  parameter int unsigned ACC_W  = 2 * delta_pkg::DATA_W + $clog2(delta_pkg::N_WEIGHTS)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  input  logic                            in_valid,
  input  logic [N_MULT-1:0][PROD_W-1:0]   prod,
  output logic signed [ACC_W-1:0]         acc
);

  logic signed [ACC_W-1:0] group_sum;

  always_comb begin
    group_sum = '0;
    for (int j = 0; j < int'(N_MULT); j++)
      group_sum += ACC_W'($signed(prod[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (clear)    acc <= '0;
    else if (in_valid) acc <= acc + group_sum;
  end

endmodule
