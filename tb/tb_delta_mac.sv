// tb_delta_mac -- end-to-end test of the delta-compressed MAC operator.
//
// Runs the configurations of the paper's utilisation table side by side on one
// clock: fixed-reference and consecutive reconstruction with 1, 2 and 4 parallel
// multipliers at 84 weights (latencies 86, 44 and 23 cycles), plus a 10-weight,
// 4-multiplier operator whose last group is only half full. Every configuration
// checks latency, accumulator, result and saturation flag of each operation (see
// tb_delta_mac_run). Each mechanism must occur at least once: saturated delta codes,
// positive and negative result saturation, a start ignored while busy, a
// back-to-back restart, and a partly filled last group; one that never occurs is
// counted as a failure.
module tb_delta_mac;
  localparam int NCFG = 7;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;

  logic fin [NCFG];
  int   ck [NCFG], fl [NCFG], cs [NCFG], sp [NCFG], sn [NCFG], ig [NCFG], bb [NCFG], pg [NCFG];
  int   checks = 0, failures = 0;

  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_FIXED), .N_WEIGHTS(84), .N_MULT(4)) r0 (
    .clk, .rst_n, .go, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]), .n_code_sat(cs[0]),
    .n_ysat_pos(sp[0]), .n_ysat_neg(sn[0]), .n_ignored_start(ig[0]), .n_back2back(bb[0]),
    .n_partial_group(pg[0]));
  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_FIXED), .N_WEIGHTS(84), .N_MULT(2)) r1 (
    .clk, .rst_n, .go, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]), .n_code_sat(cs[1]),
    .n_ysat_pos(sp[1]), .n_ysat_neg(sn[1]), .n_ignored_start(ig[1]), .n_back2back(bb[1]),
    .n_partial_group(pg[1]));
  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_FIXED), .N_WEIGHTS(84), .N_MULT(1)) r2 (
    .clk, .rst_n, .go, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]), .n_code_sat(cs[2]),
    .n_ysat_pos(sp[2]), .n_ysat_neg(sn[2]), .n_ignored_start(ig[2]), .n_back2back(bb[2]),
    .n_partial_group(pg[2]));
  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_CONSECUTIVE), .N_WEIGHTS(84), .N_MULT(4)) r3 (
    .clk, .rst_n, .go, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]), .n_code_sat(cs[3]),
    .n_ysat_pos(sp[3]), .n_ysat_neg(sn[3]), .n_ignored_start(ig[3]), .n_back2back(bb[3]),
    .n_partial_group(pg[3]));
  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_CONSECUTIVE), .N_WEIGHTS(84), .N_MULT(2)) r4 (
    .clk, .rst_n, .go, .finished(fin[4]), .checks(ck[4]), .failures(fl[4]), .n_code_sat(cs[4]),
    .n_ysat_pos(sp[4]), .n_ysat_neg(sn[4]), .n_ignored_start(ig[4]), .n_back2back(bb[4]),
    .n_partial_group(pg[4]));
  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_CONSECUTIVE), .N_WEIGHTS(84), .N_MULT(1)) r5 (
    .clk, .rst_n, .go, .finished(fin[5]), .checks(ck[5]), .failures(fl[5]), .n_code_sat(cs[5]),
    .n_ysat_pos(sp[5]), .n_ysat_neg(sn[5]), .n_ignored_start(ig[5]), .n_back2back(bb[5]),
    .n_partial_group(pg[5]));
  tb_delta_mac_run #(.MODE(delta_pkg::DELTA_CONSECUTIVE), .N_WEIGHTS(10), .N_MULT(4)) r6 (
    .clk, .rst_n, .go, .finished(fin[6]), .checks(ck[6]), .failures(fl[6]), .n_code_sat(cs[6]),
    .n_ysat_pos(sp[6]), .n_ysat_neg(sn[6]), .n_ignored_start(ig[6]), .n_back2back(bb[6]),
    .n_partial_group(pg[6]));

  task automatic need(input int count, input string what);
    checks++;
    $display("mechanism %-28s occurred %0d times", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  function automatic bit all_done();
    for (int i = 0; i < NCFG; i++) if (!fin[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int s_cs, s_sp, s_sn, s_ig, s_bb, s_pg;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    go = 1'b1;
    while (!all_done()) @(posedge clk);
    s_cs = 0; s_sp = 0; s_sn = 0; s_ig = 0; s_bb = 0; s_pg = 0;
    for (int i = 0; i < NCFG; i++) begin
      checks += ck[i]; failures += fl[i];
      s_cs += cs[i]; s_sp += sp[i]; s_sn += sn[i]; s_ig += ig[i]; s_bb += bb[i]; s_pg += pg[i];
    end
    need(s_cs, "saturated delta code");
    need(s_sp, "positive result saturation");
    need(s_sn, "negative result saturation");
    need(s_ig, "start ignored while busy");
    need(s_bb, "back-to-back restart");
    need(s_pg, "partly filled last group");
    need(ck[2] + ck[5], "1 multiplier (86 cycles)");
    need(ck[1] + ck[4], "2 multipliers (44 cycles)");
    need(ck[0] + ck[3], "4 multipliers (23 cycles)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
