// tb_result_writer: fills the result FIFO with n random 8-byte results,
// lets the writer store them at a random 32-byte aligned
// address, and checks every stored result, that the bytes just after the
// last result (in a partly filled last beat) are left untouched, that the
// FIFO ends empty and that exactly one burst of ceil(n/4) beats is used.
// Batch sizes include 0, 1, multiples of 4 and 1000.
module tb_result_writer;
  import bpt_pkg::*;
  logic clk = 0, rst;
  logic start, busy, done;
  logic [ADDR_W-1:0] addr;
  logic [9:0] num;
  logic f_push, f_pop, f_empty, f_full;
  fifo_entry_t f_data, f_head;
  logic [10:0] f_count;
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready, wr_last, wr_done;
  mem_req_t wr_req;
  logic [BEAT_W-1:0] wr_data;
  logic [BEAT_BYTES-1:0] wr_strb;
  logic rd_req_ready, rd_valid;
  logic [BEAT_W-1:0] rd_data;
  int checks = 0, failures = 0;

  result_fifo #(.DEPTH(1000)) u_fifo (
    .clk(clk), .rst(rst), .push(f_push), .push_data(f_data), .pop(f_pop),
    .head(f_head), .empty(f_empty), .full(f_full), .count(f_count));

  result_writer #(.MAX_BATCH(1000)) dut (
    .clk(clk), .rst(rst), .start(start), .addr(addr), .num(num), .busy(busy), .done(done),
    .fifo_data(f_head.addr), .fifo_empty(f_empty), .fifo_pop(f_pop),
    .wr_req_valid(wr_req_valid), .wr_req_ready(wr_req_ready), .wr_req(wr_req),
    .wr_valid(wr_valid), .wr_ready(wr_ready), .wr_data(wr_data), .wr_strb(wr_strb),
    .wr_last(wr_last), .wr_done(wr_done));

  ddr_model #(.SEED(5)) u_mem (
    .clk(clk), .rst(rst), .rd_req_valid(1'b0), .rd_req_ready(rd_req_ready), .rd_req('0),
    .rd_valid(rd_valid), .rd_ready(1'b0), .rd_data(rd_data),
    .wr_req_valid(wr_req_valid), .wr_req_ready(wr_req_ready), .wr_req(wr_req), .wr_valid(wr_valid),
    .wr_ready(wr_ready), .wr_data(wr_data), .wr_strb(wr_strb), .wr_last(wr_last), .wr_done(wr_done));

  always #5 clk = ~clk;

  // wr_last must mark the final beat of the burst
  int beats_seen;
  always @(posedge clk) if (wr_valid && wr_ready) beats_seen++;

  task automatic run(int n);
    logic [63:0] vals [$];
    longint unsigned a = 64'h10_0000 + 64'($urandom_range(0, 1023)) * 8;
    int f = int'(a[4:3]);
    longint unsigned writes0 = u_mem.writes;
    int c = 0;
    // poison the region, including the beat after the results
    for (int b = 0; b <= (n + 3) / 4 + 4; b++) u_mem.put_beat(a - 32 + 32 * b, {4{64'hDEAD_BEEF_0BAD_F00D}});
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      f_push = 1; f_data = '{addr: {$urandom, $urandom}, cnt: '0};
      vals.push_back(f_data.addr);
    end
    @(negedge clk);
    f_push = 0;
    beats_seen = 0;
    addr = a; num = 10'(n); start = 1;
    @(negedge clk);
    start = 0;
    while (!done && c < 20000) begin @(negedge clk); c++; end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (u_mem.get_u64(a + 8 * i) != vals[i]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d result %0d", n, i);
      end
    end
    for (int i = 1; i <= 4; i++) begin
      checks++;
      if (u_mem.get_u64(a - 8 * i) != 64'hDEAD_BEEF_0BAD_F00D) begin
        failures++;
        $display("FAIL n=%0d wrote before the results at -%0d", n, i);
      end
    end
    for (int i = n; i < n + 8; i++) begin
      checks++;
      if (u_mem.get_u64(a + 8 * i) != 64'hDEAD_BEEF_0BAD_F00D) begin
        failures++;
        $display("FAIL n=%0d wrote past the results at %0d", n, i);
      end
    end
    checks++;
    if (!f_empty || u_mem.writes - writes0 != ((n > 0) ? 1 : 0) || beats_seen != ((n > 0) ? (f + n + 3) / 4 : 0)) begin
      failures++;
      $display("FAIL n=%0d empty=%b bursts=%0d beats=%0d", n, f_empty, u_mem.writes - writes0, beats_seen);
    end
  endtask

  initial begin
    rst = 1; start = 0; f_push = 0; f_data = '0; addr = '0; num = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(0); run(1); run(2); run(3); run(4); run(7); run(64); run(250); run(1000);
    for (int t = 0; t < 6; t++) run($urandom_range(1, 300));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
