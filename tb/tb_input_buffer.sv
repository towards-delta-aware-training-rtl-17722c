// tb_input_buffer -- checks the input activation register file.
//
// Fills all 84 entries with random values, then reads every group of 4 lanes and
// compares with a model; a 10-entry instance checks that lanes past the end read 0.
// Writes to addresses past the end must change nothing.
module tb_input_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       wr_en = 0;
  logic [6:0] wr_addr = '0;
  logic [7:0] wr_data = '0;
  logic [4:0] rd_group = '0;
  logic [3:0][7:0] rd_data;
  input_buffer dut (.*);

  logic       s_wr_en = 0;
  logic [3:0] s_wr_addr = '0;
  logic [7:0] s_wr_data = '0;
  logic [1:0] s_rd_group = '0;
  logic [3:0][7:0] s_rd_data;
  input_buffer #(.N_WEIGHTS(10), .N_MULT(4)) dut_s (
    .clk, .rst_n, .wr_en(s_wr_en), .wr_addr(s_wr_addr), .wr_data(s_wr_data),
    .rd_group(s_rd_group), .rd_data(s_rd_data));

  logic [7:0] m [84];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 84; i++) begin
      m[i] = 8'($urandom);
      @(negedge clk);
      wr_en = 1; wr_addr = 7'(i); wr_data = m[i];
      s_wr_en = (i < 10); s_wr_addr = 4'(i); s_wr_data = m[i];
    end
    @(negedge clk); wr_addr = 7'd90; wr_data = ~m[0]; s_wr_en = 1; s_wr_addr = 4'd11; s_wr_data = 8'hff;
    @(negedge clk); wr_en = 0; s_wr_en = 0;
    for (int g = 0; g < 21; g++) begin
      rd_group = 5'(g);
      #1;
      for (int j = 0; j < 4; j++)
        check(rd_data[j] == m[g*4+j], $sformatf("g%0d l%0d: %h vs %h", g, j, rd_data[j], m[g*4+j]));
    end
    for (int g = 0; g < 3; g++) begin
      s_rd_group = 2'(g);
      #1;
      for (int j = 0; j < 4; j++)
        check(s_rd_data[j] == ((g*4+j < 10) ? m[g*4+j] : 8'h00), $sformatf("small g%0d l%0d", g, j));
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
