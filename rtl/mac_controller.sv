// mac_controller -- sequencer of one delta-MAC operation.
//
// A pulse on `start` while idle begins an operation. The controller then issues
// the N_GROUPS = ceil(N_WEIGHTS / N_MULT) weight groups on consecutive cycles
// (`issue`, `group`, `first_group`), waits one cycle for the last products to
// be accumulated (DRAIN), one more to register the result (OUT, `out_load`), and
// raises `done` for one cycle. Counting the clock edge that samples `start` as
// edge 0, `done` rises at edge N_GROUPS + 2, which is the cycle count the paper
// gives for every variant of its operator: ceil(#params / #mult) + 2. `done` falls
// back to idle in the same cycle, so a new `start` may be given while `done` is
// high and operations follow each other every N_GROUPS + 2 cycles. `start` while
// busy is ignored. `acc_clear` is a combinational strobe on the accepted start.
//
// States: IDLE -> ISSUE (N_GROUPS cycles) -> DRAIN -> OUT -> IDLE. The state
// machine itself is this design's; the paper gives only the cycle count.
module mac_controller #(
  parameter int unsigned N_GROUPS = (delta_pkg::N_WEIGHTS + delta_pkg::N_MULT - 1) / delta_pkg::N_MULT,
  localparam int unsigned GRP_W   = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             acc_clear,
  output logic             issue,
  output logic [GRP_W-1:0] group,
  output logic             first_group,
  output logic             out_load,
  output logic             done
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN, S_OUT} state_e;

  state_e           state_q;
  logic [GRP_W-1:0] group_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      group_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_ISSUE;
          group_q <= '0;
        end
        S_ISSUE: begin
          if (32'(group_q) == N_GROUPS - 1) state_q <= S_DRAIN;
          else                              group_q <= group_q + 1'b1;
        end
        S_DRAIN: state_q <= S_OUT;
        S_OUT: begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy        = (state_q != S_IDLE);
  assign acc_clear   = (state_q == S_IDLE) && start;
  assign issue       = (state_q == S_ISSUE);
  assign group       = group_q;
  assign first_group = (state_q == S_ISSUE) && (group_q == '0);
  assign out_load    = (state_q == S_OUT);

  // done is a single-cycle pulse given only once the controller is idle again
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);
  a_done_idle:  assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy);

endmodule
