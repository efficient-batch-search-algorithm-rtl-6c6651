// tb_search_key_buffer: fills all 1000 entries with random keys, then
// reads them back in random order and checks that each read returns the
// written key exactly one clock after the address is applied.
module tb_search_key_buffer;
  import bpt_pkg::*;
  localparam int DEPTH = 1000;
  logic clk = 0;
  logic wr_en;
  logic [9:0] wr_addr, rd_addr;
  logic [KEY_W-1:0] wr_data, rd_data;
  logic [KEY_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  search_key_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      for (int w = 0; w < 8; w++) wr_data[32*w +: 32] = $urandom;
      wr_en = 1; wr_addr = 10'(i); model[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      rd_addr = 10'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d", a);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
