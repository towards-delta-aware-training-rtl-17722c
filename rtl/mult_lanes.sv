// mult_lanes -- N_MULT parallel signed multipliers with registered products.
//
// Lane j computes a[j] * b[j] as DATA_W x DATA_W -> 2*DATA_W signed, two's
// complement. The product and the valid bit are registered, so products appear one
// cycle after their operands (one pipeline stage, as a DSP slice with its output
// register). The number of lanes follows the paper's "parallel-used multipliers"
// (1, 2 or 4 in its table, 4 by default here). The paper maps them to DSP slices
// and notes that plain HDL multipliers can replace them; this module is the plain
// HDL form, which FPGA synthesis maps to DSPs.
module mult_lanes #(
  parameter int unsigned N_MULT = delta_pkg::N_MULT,
  parameter int unsigned DATA_W = delta_pkg::DATA_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [N_MULT-1:0][DATA_W-1:0]      a,
  input  logic [N_MULT-1:0][DATA_W-1:0]      b,
  output logic                               out_valid,
  output logic [N_MULT-1:0][2*DATA_W-1:0]    prod
);

  localparam int unsigned PROD_W = 2 * DATA_W;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      prod      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int j = 0; j < int'(N_MULT); j++)
          prod[j] <= PROD_W'($signed(a[j]) * $signed(b[j]));
      end
    end
  end

endmodule
