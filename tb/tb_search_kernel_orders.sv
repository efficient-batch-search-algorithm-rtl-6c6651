// tb_search_kernel_orders: one search kernel (the single-instance design)
// built for each of the three tree orders evaluated: m = 16 (KMAX = 15,
// 640-byte nodes of 20 beats), m = 32 (KMAX = 31, 1280-byte nodes of 40
// beats) and m = 64 (KMAX = 63, 2560-byte nodes of 80 beats), each on its own memory
// model. For each order, a one-entry tree is searched with 3 keys, then a
// tree of 1,000,000 entries with sorted batches of 1, 10, 100 and 1000 keys
// (the single-instance batch sweep); every result and the level count are
// checked, and node loads and cycles are printed. As in the published
// measurements, the smallest order must be the fastest: for every batch on
// the large tree the cycle counts must rise from m = 16 to 32 to 64. The three orders and the
// batch sweep follow the published evaluation; the leaf fill (KMAX-3
// keys), key values and memory model are this testbench's own choices.
module tb_search_kernel_orders;
  import bpt_pkg::*;
  import bpt_tb_pkg::*;

  logic clk = 0, rst;
  int checks = 0, failures = 0;
  bit [2:0] finished;
  int cyc_tab [3][5];

  always #5 clk = ~clk;

  for (genvar g = 0; g < 3; g++) begin : g_order
    localparam int KMAX = (g == 0) ? 15 : (g == 1) ? 31 : 63;
    logic start, busy, done;
    logic [ADDR_W-1:0] root_addr, key_addr, result_addr;
    logic [9:0] num_keys;
    logic [31:0] stat_nodes, stat_levels, stat_cycles;
    logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
    mem_req_t rd_req, wr_req;
    logic [BEAT_W-1:0] rd_data, wr_data;
    logic wr_req_valid, wr_req_ready, wr_valid, wr_ready, wr_last, wr_done;
    logic [BEAT_BYTES-1:0] wr_strb;

    search_kernel #(.KMAX(KMAX)) dut (.*);
    ddr_model #(.SEED(21 + g)) u_mem (.*);

    initial begin
      longint unsigned root, n;
      int height, cyc, fill, b;
      logic [255:0] keys [$];
      longint unsigned idx [$];
      longint unsigned ka, ra;
      start = 0; root_addr = '0; key_addr = '0; result_addr = '0; num_keys = '0;
      ka = 64'h8000_0000;
      ra = 64'hC000_0000;
      @(negedge clk);
      while (rst) @(negedge clk);
      for (int r = 0; r < 5; r++) begin
        n = (r == 0) ? 1 : 1000000;
        fill = (r == 0) ? KMAX : KMAX - 3;
        b = (r == 0) ? 3 : (r == 1) ? 1 : (r == 2) ? 10 : (r == 3) ? 100 : 1000;
        keys.delete();
        idx.delete();
        if (r < 2) begin
          u_mem.mem.delete();
          u_mem.build_tree(n, KMAX, fill, 64'h1_0000, root, height);
        end
        for (int q = 0; q < b; q++) idx.push_back($urandom_range(0, 32'(n)));
        idx.sort();
        foreach (idx[q]) keys.push_back(probe_key(idx[q], (q % 2 == 0) ? 0 : $urandom_range(0, 3), $urandom));
        keys.sort();
        foreach (keys[q]) u_mem.put_beat(ka + 32 * q, keys[q]);
        @(negedge clk);
        root_addr = root; key_addr = ka; result_addr = ra; num_keys = 10'(b); start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1;
        while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
        for (int q = 0; q < b; q++) begin
          logic [63:0] e;
          e = expected(keys[q], n);
          checks++;
          if (u_mem.get_u64(ra + 8 * q) != e) begin
            failures++;
            if (failures < 10) $display("FAIL m=%0d n=%0d key %0d", KMAX + 1, n, q);
          end
        end
        checks++;
        if (int'(stat_levels) != height) begin
          failures++;
          $display("FAIL m=%0d n=%0d levels %0d exp %0d", KMAX + 1, n, stat_levels, height);
        end
        cyc_tab[g][r] = cyc;
        $display("m=%0d n=%0d b=%0d height=%0d nodes=%0d cycles=%0d", KMAX + 1, n, b, height, stat_nodes, cyc);
      end
      finished[g] = 1'b1;
    end
  end

  initial begin
    rst = 1;
    finished = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (finished == 3'b111);
    for (int r = 1; r < 5; r++) begin
      checks++;
      if (!(cyc_tab[0][r] < cyc_tab[1][r] && cyc_tab[1][r] < cyc_tab[2][r])) begin
        failures++;
        $display("FAIL batch run %0d: cycles m=16 %0d m=32 %0d m=64 %0d not rising", r,
                 cyc_tab[0][r], cyc_tab[1][r], cyc_tab[2][r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
