// tb_mac_controller -- checks the sequencing and the cycle count.
//
// Three instances, with 21, 42 and 84 groups (84 weights on 4, 2 and 1
// multipliers). For each operation: start is sampled at edge 0; issue must be high
// for exactly N_GROUPS cycles with group counting 0, 1, ... and first_group only
// on group 0; out_load must be high in the cycle before done; done must rise at
// edge N_GROUPS + 2 (23, 44, 86) for exactly one cycle. A start while busy must be
// ignored, and a start in the done cycle must begin the next operation at once.
module tb_mac_controller;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic start [3];
  logic busy [3], acc_clear [3], issue [3], first_group [3], out_load [3], done [3];
  logic [6:0] group [3];
  logic [4:0] g0; logic [5:0] g1; logic [6:0] g2;

  mac_controller #(.N_GROUPS(21)) c0 (.clk, .rst_n, .start(start[0]), .busy(busy[0]),
    .acc_clear(acc_clear[0]), .issue(issue[0]), .group(g0), .first_group(first_group[0]),
    .out_load(out_load[0]), .done(done[0]));
  mac_controller #(.N_GROUPS(42)) c1 (.clk, .rst_n, .start(start[1]), .busy(busy[1]),
    .acc_clear(acc_clear[1]), .issue(issue[1]), .group(g1), .first_group(first_group[1]),
    .out_load(out_load[1]), .done(done[1]));
  mac_controller #(.N_GROUPS(84)) c2 (.clk, .rst_n, .start(start[2]), .busy(busy[2]),
    .acc_clear(acc_clear[2]), .issue(issue[2]), .group(g2), .first_group(first_group[2]),
    .out_load(out_load[2]), .done(done[2]));
  assign group[0] = 7'(g0);
  assign group[1] = 7'(g1);
  assign group[2] = 7'(g2);

  task automatic run(input int k, input int ng, input bit poke, input bit chain);
    int cycles, issued, loads;
    bit seen_done;
    // caller has set start[k] = 1 before the sampling edge
    #1 check(acc_clear[k] == 1'b1, "acc_clear with accepted start");
    @(posedge clk);
    #1 start[k] = 0;
    cycles = 0; issued = 0; loads = 0; seen_done = 0;
    while (!seen_done && cycles < ng + 20) begin
      if (issue[k]) begin
        check(int'(group[k]) == issued, $sformatf("k%0d group %0d expected %0d", k, group[k], issued));
        check(first_group[k] == (issued == 0), "first_group");
        issued++;
      end
      if (out_load[k]) loads++;
      start[k] = poke && cycles == 3;
      if (start[k]) check(busy[k] && !acc_clear[k], "start while busy is not accepted");
      @(posedge clk);
      #1 cycles++;
      seen_done = done[k];
      if (seen_done) check(loads == 1, "out_load once before done");
    end
    check(cycles == ng + 2, $sformatf("k%0d latency %0d expected %0d", k, cycles, ng + 2));
    check(issued == ng, $sformatf("k%0d issued %0d groups", k, issued));
    check(!busy[k], "idle when done");
    if (chain) begin
      start[k] = 1;
      run(k, ng, 1'b0, 1'b0);
    end else begin
      start[k] = 0;
      @(posedge clk);
      #1 check(!done[k], "done is a single pulse");
    end
  endtask

  initial begin
    for (int k = 0; k < 3; k++) start[k] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      for (int k = 0; k < 3; k++) begin
        int ng;
        ng = (k == 0) ? 21 : (k == 1) ? 42 : 84;
        @(negedge clk);
        start[k] = 1;
        run(k, ng, r % 2 == 1, r % 3 == 0);
        repeat (r) @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
