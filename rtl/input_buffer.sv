// input_buffer -- register file for the input activations of one MAC operation.
//
// Holds the N_WEIGHTS input values x[0] .. x[N_WEIGHTS-1] (DATA_W-bit Q2.5) that
// are multiplied with the reconstructed weights. The paper states that the operator
// buffers the data feeding its multipliers; the register-file form, the write port
// and the group read are this design's choices.
//
// Write port: one value per cycle, wr_addr selects x[wr_addr]; addresses at or
// above N_WEIGHTS are ignored. Read port (combinational): rd_group selects
// x[rd_group*N_MULT + j] on lane j; lanes past the end read as zero. Reset clears
// the buffer.
module input_buffer #(
  parameter int unsigned N_WEIGHTS = delta_pkg::N_WEIGHTS,
  parameter int unsigned N_MULT    = delta_pkg::N_MULT,
  parameter int unsigned DATA_W    = delta_pkg::DATA_W,
  localparam int unsigned ADDR_W   = (N_WEIGHTS > 1) ? $clog2(N_WEIGHTS) : 1,
  localparam int unsigned N_GROUPS = (N_WEIGHTS + N_MULT - 1) / N_MULT,
  localparam int unsigned GRP_W    = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           wr_en,
  input  logic [ADDR_W-1:0]              wr_addr,
  input  logic [DATA_W-1:0]              wr_data,
  input  logic [GRP_W-1:0]               rd_group,
  output logic [N_MULT-1:0][DATA_W-1:0]  rd_data
);

  logic [DATA_W-1:0] x_q [N_WEIGHTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_WEIGHTS); i++) x_q[i] <= '0;
    end else if (wr_en && 32'(wr_addr) < N_WEIGHTS) begin
      x_q[wr_addr] <= wr_data;
    end
  end

  always_comb begin
    for (int j = 0; j < int'(N_MULT); j++) begin
      automatic int unsigned idx = 32'(rd_group) * N_MULT + 32'(j);
      rd_data[j] = (idx < N_WEIGHTS) ? x_q[idx] : '0;
    end
  end

endmodule
