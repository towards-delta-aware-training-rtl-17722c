// delta_weight_store -- flip-flop storage of one compressed weight vector.
//
// Holds the weight vector of one MAC operator in compressed form: one reference
// value at full DATA_W width and one DELTA_W-bit delta code for every weight
// w[0] .. w[N_WEIGHTS-1], i.e. DATA_W + DELTA_W * N_WEIGHTS bits (344 for the
// defaults). This is the count of the paper's compression-rate formula and of its
// flip-flop figures. When the reference is the vector's own first weight, as in the
// paper's delta diagrams, code 0 is simply zero; a reference shared by a whole layer
// is stored the same way. Storage is in flip-flops, as in the paper's FPGA operator;
// a BRAM variant is not built.
//
// Write port (one word per cycle): with wr_ref high the reference is loaded from
// wr_data; otherwise delta code wr_addr is loaded from wr_data[DELTA_W-1:0].
// Addresses at or above N_WEIGHTS are ignored. The write port layout is this
// design's own choice (the paper loads parameters through an SPI middleware it does
// not describe).
//
// Read port (combinational): rd_group selects weights rd_group*N_MULT + j for lane
// j = 0 .. N_MULT-1. rd_delta[j] is that weight's code, rd_valid[j] says the index
// is below N_WEIGHTS (the last group may be partly empty). The reference is always
// on ref_value. Reset clears everything to zero.
module delta_weight_store #(
  parameter int unsigned N_WEIGHTS = delta_pkg::N_WEIGHTS,
  parameter int unsigned N_MULT    = delta_pkg::N_MULT,
  parameter int unsigned DATA_W    = delta_pkg::DATA_W,
  parameter int unsigned DELTA_W   = delta_pkg::DELTA_W,
  localparam int unsigned ADDR_W   = (N_WEIGHTS > 1) ? $clog2(N_WEIGHTS) : 1,
  localparam int unsigned N_GROUPS = (N_WEIGHTS + N_MULT - 1) / N_MULT,
  localparam int unsigned GRP_W    = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             wr_en,
  input  logic                             wr_ref,
  input  logic [ADDR_W-1:0]                wr_addr,
  input  logic [DATA_W-1:0]                wr_data,
  input  logic [GRP_W-1:0]                 rd_group,
  output logic [DATA_W-1:0]                ref_value,
  output logic [N_MULT-1:0][DELTA_W-1:0]   rd_delta,
  output logic [N_MULT-1:0]                rd_valid
);

  logic [DATA_W-1:0]  ref_q;
  logic [DELTA_W-1:0] delta_q [N_WEIGHTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_q <= '0;
      for (int i = 0; i < int'(N_WEIGHTS); i++) delta_q[i] <= '0;
    end else if (wr_en) begin
      if (wr_ref)
        ref_q <= wr_data;
      else if (32'(wr_addr) < N_WEIGHTS)
        delta_q[wr_addr] <= wr_data[DELTA_W-1:0];
    end
  end

  assign ref_value = ref_q;

  always_comb begin
    for (int j = 0; j < int'(N_MULT); j++) begin
      automatic int unsigned idx = 32'(rd_group) * N_MULT + 32'(j);
      rd_valid[j] = (idx < N_WEIGHTS);
      rd_delta[j] = (idx < N_WEIGHTS) ? delta_q[idx] : '0;
    end
  end

endmodule
