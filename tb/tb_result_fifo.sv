// tb_result_fifo: random pushes and pops (including simultaneous ones and
// runs that fill the 1000-entry FIFO completely and drain it) against a
// queue model; head, empty, full and count are checked every cycle.
module tb_result_fifo;
  import bpt_pkg::*;
  localparam int DEPTH = 1000;
  logic clk = 0, rst;
  logic push, pop, empty, full;
  fifo_entry_t push_data, head;
  logic [10:0] count;
  fifo_entry_t model [$];
  int checks = 0, failures = 0, max_fill = 0;

  result_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check();
    checks++;
    if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
        int'(count) != model.size() || (model.size() > 0 && head != model[0])) begin
      failures++;
      if (failures < 10) $display("FAIL size=%0d count=%0d empty=%b full=%b", model.size(), count, empty, full);
    end
  endtask

  initial begin
    rst = 1; push = 0; pop = 0; push_data = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 12000; t++) begin
      automatic int phase = (t / 1500) % 2;   // alternately filling and draining
      @(negedge clk);
      check();
      push = (model.size() < DEPTH) && ($urandom_range(0, 9) < (phase == 0 ? 8 : 3));
      pop  = (model.size() > 0)     && ($urandom_range(0, 9) < (phase == 0 ? 2 : 8));
      if (model.size() == DEPTH && $urandom_range(0, 1)) begin push = 1; pop = 1; end
      push_data = '{addr: {$urandom, $urandom}, cnt: $urandom};
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
      if (model.size() > max_fill) max_fill = model.size();
    end
    checks++;
    if (max_fill != DEPTH) begin
      failures++;
      $display("FAIL FIFO never filled (max %0d)", max_fill);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
