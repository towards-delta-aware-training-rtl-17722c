// tb_delta_weight_store -- checks the compressed weight storage.
//
// Writes a random reference (wr_ref) and random 4-bit codes for every weight (upper
// data bits random too, they must be dropped), then reads every group and compares
// reference, lane codes and lane-valid flags with a model. A second instance with 10 weights and 4 lanes checks the partly
// filled last group. Writes to addresses past the end must change nothing.
module tb_delta_weight_store;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // default size: 84 weights, 4 lanes
  logic       wr_en = 0, wr_ref = 0;
  logic [6:0] wr_addr = '0;
  logic [7:0] wr_data = '0;
  logic [4:0] rd_group = '0;
  logic [7:0] ref_value;
  logic [3:0][3:0] rd_delta;
  logic [3:0] rd_valid;
  delta_weight_store dut (.*);

  // small: 10 weights, 4 lanes, 3 groups
  logic       s_wr_en = 0, s_wr_ref = 0;
  logic [3:0] s_wr_addr = '0;
  logic [7:0] s_wr_data = '0;
  logic [1:0] s_rd_group = '0;
  logic [7:0] s_ref;
  logic [3:0][3:0] s_delta;
  logic [3:0] s_valid;
  delta_weight_store #(.N_WEIGHTS(10), .N_MULT(4)) dut_s (
    .clk, .rst_n, .wr_en(s_wr_en), .wr_ref(s_wr_ref), .wr_addr(s_wr_addr), .wr_data(s_wr_data),
    .rd_group(s_rd_group), .ref_value(s_ref), .rd_delta(s_delta), .rd_valid(s_valid));

  logic [7:0] m_ref, s_m_ref;
  logic [3:0] m_code [84];
  logic [3:0] s_m_code [10];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_ref = 8'($urandom); s_m_ref = 8'($urandom);
    @(negedge clk);
    wr_en = 1; wr_ref = 1; wr_addr = 7'd5; wr_data = m_ref;
    s_wr_en = 1; s_wr_ref = 1; s_wr_addr = 4'd3; s_wr_data = s_m_ref;
    @(negedge clk);
    wr_ref = 0; s_wr_ref = 0;
    for (int i = 0; i < 84; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      m_code[i] = v[3:0];
      @(negedge clk);
      wr_en = 1; wr_addr = 7'(i); wr_data = v;
      if (i < 10) begin
        s_m_code[i] = v[3:0];
        s_wr_en = 1; s_wr_addr = 4'(i); s_wr_data = v;
      end else s_wr_en = 0;
    end
    // out-of-range addresses are ignored
    @(negedge clk); wr_addr = 7'd100; wr_data = 8'hff; s_wr_en = 1; s_wr_addr = 4'd12; s_wr_data = 8'hff;
    @(negedge clk); wr_en = 0; s_wr_en = 0;
    for (int g = 0; g < 21; g++) begin
      rd_group = 5'(g);
      #1;
      check(ref_value == m_ref, "reference");
      for (int j = 0; j < 4; j++) begin
        check(rd_valid[j] == 1'b1, $sformatf("valid g%0d l%0d", g, j));
        check(rd_delta[j] == m_code[g*4+j], $sformatf("code g%0d l%0d: %h vs %h", g, j, rd_delta[j], m_code[g*4+j]));
      end
    end
    for (int g = 0; g < 3; g++) begin
      s_rd_group = 2'(g);
      #1;
      check(s_ref == s_m_ref, "small reference");
      for (int j = 0; j < 4; j++) begin
        automatic int idx = g * 4 + j;
        check(s_valid[j] == (idx < 10), $sformatf("small valid g%0d l%0d", g, j));
        check(s_delta[j] == ((idx < 10) ? s_m_code[idx] : 4'h0), $sformatf("small code g%0d l%0d %h %h", g, j, s_delta[j], s_m_code[idx]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
