// delta_mac -- delta-compressed multiply-and-accumulate operator (top level).
//
// Computes one dot product y = sum_i x[i] * w[i] over N_WEIGHTS inputs, where the
// weights are held in compressed form: one DATA_W-bit reference plus one DELTA_W-bit
// delta per weight (8 + 84*4 = 344 bits instead of 84*8 = 672 for the defaults). During
// the pipeline each delta is sign-extended and combined with the reference (MODE =
// DELTA_FIXED, the paper's main scheme) or with the previous weight (MODE =
// DELTA_CONSECUTIVE), and N_MULT multipliers work on N_MULT weights per cycle.
//
// Datapath, one group of N_MULT weights per cycle:
//   delta_weight_store + input_buffer (read group g)
//     -> weight_reconstruct (combinational)
//     -> mult_lanes (registered products)
//     -> mac_accumulator (adder tree + accumulator register)
//     -> requantize -> output register y
// sequenced by mac_controller.
//
// Interface:
//   x_wr_*     load input x[addr] (DATA_W bits, Q2.5)
//   w_wr_*     load the weight vector: with w_wr_ref high, the reference
//              (DATA_W bits); otherwise the delta code of w[w_wr_addr] in
//              w_wr_data[DELTA_W-1:0]
//   start      begin an operation (ignored while busy)
//   busy       operation in progress; the buffers must not be written while busy
//   done       one-cycle pulse: y, y_sat and acc hold the result of the operation
//   y          result in Q2.5, truncated and saturated from the accumulator
//   y_sat      y was saturated
//   acc        full-precision accumulator, Q.(2*FRAC_W), valid with done and held
//              until the next start
// Timing: done rises ceil(N_WEIGHTS/N_MULT) + 2 clock edges after the edge that
// samples start (23 for the defaults), the cycle count the paper gives; a new start
// may be given in the cycle done is high. Reset is asynchronous, active low.
//
// From the paper: the delta code, the two reconstruction schemes, 8-bit Q2.5 data,
// 4-bit deltas, 84 weights, 4 parallel multipliers, flip-flop weight storage and the
// cycle count. This design's own choices: the load ports, the start/busy/done
// handshake, the pipeline split, the accumulator width and the requantisation.
// The SPI interface and middleware that carry these ports on the paper's board are
// not part of this design.
module delta_mac
#(
  parameter delta_pkg::delta_mode_e MODE = delta_pkg::DELTA_FIXED,
  parameter int unsigned N_WEIGHTS = delta_pkg::N_WEIGHTS,
  parameter int unsigned N_MULT    = delta_pkg::N_MULT,
  parameter int unsigned DATA_W    = delta_pkg::DATA_W,
  parameter int unsigned FRAC_W    = delta_pkg::FRAC_W,
  parameter int unsigned DELTA_W   = delta_pkg::DELTA_W,
  localparam int unsigned ADDR_W   = (N_WEIGHTS > 1) ? $clog2(N_WEIGHTS) : 1,
  localparam int unsigned N_GROUPS = (N_WEIGHTS + N_MULT - 1) / N_MULT,
  localparam int unsigned GRP_W    = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1,
  localparam int unsigned PROD_W   = 2 * DATA_W,
  localparam int unsigned ACC_W    = PROD_W + ((N_WEIGHTS > 1) ? $clog2(N_WEIGHTS) : 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     x_wr_en,
  input  logic [ADDR_W-1:0]        x_wr_addr,
  input  logic [DATA_W-1:0]        x_wr_data,
  input  logic                     w_wr_en,
  input  logic                     w_wr_ref,
  input  logic [ADDR_W-1:0]        w_wr_addr,
  input  logic [DATA_W-1:0]        w_wr_data,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic signed [DATA_W-1:0] y,
  output logic                     y_sat,
  output logic signed [ACC_W-1:0]  acc
);

  // controller
  logic             acc_clear, issue, first_group, out_load;
  logic [GRP_W-1:0] group;

  // datapath
  logic [DATA_W-1:0]               ref_value;
  logic [N_MULT-1:0][DELTA_W-1:0]  delta;
  logic [N_MULT-1:0]               lane_valid;
  logic [N_MULT-1:0][DATA_W-1:0]   x_lane;
  logic [N_MULT-1:0][DATA_W-1:0]   w_lane;
  logic                            prod_valid;
  logic [N_MULT-1:0][PROD_W-1:0]   prod;
  logic signed [DATA_W-1:0]        y_d;
  logic                            sat_d;

  mac_controller #(.N_GROUPS(N_GROUPS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .acc_clear, .issue, .group, .first_group,
    .out_load, .done
  );

  delta_weight_store #(
    .N_WEIGHTS(N_WEIGHTS), .N_MULT(N_MULT), .DATA_W(DATA_W), .DELTA_W(DELTA_W)
  ) u_wstore (
    .clk, .rst_n,
    .wr_en(w_wr_en), .wr_ref(w_wr_ref), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_group(group), .ref_value, .rd_delta(delta), .rd_valid(lane_valid)
  );

  input_buffer #(
    .N_WEIGHTS(N_WEIGHTS), .N_MULT(N_MULT), .DATA_W(DATA_W)
  ) u_xbuf (
    .clk, .rst_n,
    .wr_en(x_wr_en), .wr_addr(x_wr_addr), .wr_data(x_wr_data),
    .rd_group(group), .rd_data(x_lane)
  );

  weight_reconstruct #(
    .MODE(MODE), .N_MULT(N_MULT), .DATA_W(DATA_W), .DELTA_W(DELTA_W)
  ) u_recon (
    .clk, .rst_n, .step(issue), .first_group, .ref_value, .delta, .lane_valid,
    .weight(w_lane)
  );

  mult_lanes #(.N_MULT(N_MULT), .DATA_W(DATA_W)) u_mult (
    .clk, .rst_n, .in_valid(issue), .a(x_lane), .b(w_lane),
    .out_valid(prod_valid), .prod
  );

  mac_accumulator #(.N_MULT(N_MULT), .PROD_W(PROD_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .in_valid(prod_valid), .prod, .acc
  );

  requantize #(.ACC_W(ACC_W), .DATA_W(DATA_W), .FRAC_W(FRAC_W)) u_rq (
    .acc, .y(y_d), .sat(sat_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y     <= '0;
      y_sat <= 1'b0;
    end else if (out_load) begin
      y     <= y_d;
      y_sat <= sat_d;
    end
  end

  // The buffers feed the pipeline directly: the host must not change them mid-operation.
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(x_wr_en || w_wr_en))
    else $error("delta_mac: buffer written while an operation is running");

endmodule
