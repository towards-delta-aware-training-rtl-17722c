// requantize -- converts the accumulator back to the DATA_W-bit data format.
//
// The product of two Q(I).(F) numbers has 2F fraction bits, so the accumulator is
// in Q.(2*FRAC_W). This block shifts it right by FRAC_W (arithmetic shift, i.e.
// rounding toward minus infinity) and saturates the result to the signed DATA_W
// range [-2^(DATA_W-1), 2^(DATA_W-1)-1]; `sat` reports that the value was clipped.
// Purely combinational. The paper fixes the data format (8-bit Q2.5) but not how
// the operator returns to it: truncation and saturation are this design's choice.
module requantize #(
  parameter int unsigned ACC_W  = 2 * delta_pkg::DATA_W + $clog2(delta_pkg::N_WEIGHTS),
  parameter int unsigned DATA_W = delta_pkg::DATA_W,
  parameter int unsigned FRAC_W = delta_pkg::FRAC_W
) (
  input  logic signed [ACC_W-1:0]  acc,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat
);

  localparam logic signed [ACC_W-1:0] MAX_V = ACC_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MIN_V = -ACC_W'(1 << (DATA_W - 1));

  logic signed [ACC_W-1:0] shifted;

  always_comb begin
    shifted = acc >>> FRAC_W;
    sat     = 1'b0;
    if (shifted > MAX_V) begin
      y   = MAX_V[DATA_W-1:0];
      sat = 1'b1;
    end else if (shifted < MIN_V) begin
      y   = MIN_V[DATA_W-1:0];
      sat = 1'b1;
    end else begin
      y   = shifted[DATA_W-1:0];
    end
  end

endmodule
