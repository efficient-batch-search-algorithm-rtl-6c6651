// tb_batch_distributor: for P=4 and many batch sizes (0 .. 4000, among
// them the evaluated 1000 = 4 x 250) checks that the kernels' slices are
// contiguous, cover the batch exactly, differ in size by at most one, and
// that key and result addresses point at the start of each slice.
module tb_batch_distributor;
  import bpt_pkg::*;
  localparam int P = 4;
  logic [11:0] num_keys;
  logic [ADDR_W-1:0] key_addr, result_addr;
  logic [P-1:0][9:0] k_num;
  logic [P-1:0][ADDR_W-1:0] k_key_addr, k_result_addr;
  int checks = 0, failures = 0;

  batch_distributor #(.P(P), .MAX_BATCH(1000)) dut (.*);

  task automatic run(int n);
    int off = 0, mn = 1 << 30, mx = 0;
    num_keys = 12'(n);
    key_addr = 64'h1000_0000 + 64'($urandom_range(0, 1000)) * 32;
    result_addr = 64'h2000_0000 + 64'($urandom_range(0, 1000)) * 8;
    #1;
    for (int i = 0; i < P; i++) begin
      checks++;
      if (k_key_addr[i] != key_addr + 64'(off) * 32 || k_result_addr[i] != result_addr + 64'(off) * 8) begin
        failures++;
        $display("FAIL n=%0d kernel %0d address", n, i);
      end
      off += int'(k_num[i]);
      if (int'(k_num[i]) < mn) mn = k_num[i];
      if (int'(k_num[i]) > mx) mx = k_num[i];
    end
    checks++;
    if (off != n || mx - mn > 1) begin
      failures++;
      $display("FAIL n=%0d sum=%0d min=%0d max=%0d", n, off, mn, mx);
    end
  endtask

  initial begin
    run(1000);
    checks++;
    if (k_num[0] != 250 || k_num[3] != 250) failures++;
    for (int n = 0; n <= 4000; n += 7) run(n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
