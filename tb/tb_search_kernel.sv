// tb_search_kernel: end-to-end test of one search kernel at its default
// size (order 16, 1000-key buffer) on a memory model with random stalls.
// For several trees (1 entry = a lone leaf, up to 200,000 entries = 5
// levels) and batch sizes (1 .. 1000, sorted, with hits, misses, keys
// between entries, keys beyond both ends and duplicates) it checks:
//  - every result against the entry generator (data value or -1);
//  - the number of levels visited against the tree height;
//  - the number of node loads against a software walk of the same tree
//    (each distinct node on the keys' paths loaded exactly once);
//  - the cycle count against a bound of node loads x (20 beats + memory
//    latency) plus one cycle per key per level plus preload and write-back.
module tb_search_kernel;
  import bpt_pkg::*;
  import bpt_tb_pkg::*;
  localparam int KMAX = 15;
  localparam int NB   = node_beats(KMAX);

  logic clk = 0, rst;
  logic start, busy, done;
  logic [ADDR_W-1:0] root_addr, key_addr, result_addr;
  logic [9:0] num_keys;
  logic [31:0] stat_nodes, stat_levels, stat_cycles;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  mem_req_t rd_req, wr_req;
  logic [BEAT_W-1:0] rd_data, wr_data;
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready, wr_last, wr_done;
  logic [BEAT_BYTES-1:0] wr_strb;
  int checks = 0, failures = 0;

  search_kernel dut (.*);

  ddr_model #(.SEED(7)) u_mem (.*);

  always #5 clk = ~clk;

  // software walk: number of distinct nodes visited by a sorted batch
  function automatic longint unsigned walk_nodes(logic [255:0] keys [$], longint unsigned root, int height);
    longint unsigned total = 0;
    longint unsigned cur [$];
    longint unsigned nxt [$];
    foreach (keys[q]) cur.push_back(root);
    for (int l = 0; l < height; l++) begin
      longint unsigned last = '1;
      nxt = {};
      foreach (keys[q]) begin
        longint unsigned a = cur[q];
        logic [255:0] hdr = u_mem.get_beat(a);
        int su = int'(hdr[31:0]);
        int idx = su;
        if (a != last) begin total++; last = a; end
        for (int s = su - 1; s >= 0; s--) if (keys[q] <= u_mem.get_beat(a + 32 * (1 + s))) idx = s;
        nxt.push_back(u_mem.get_u64(a + 32 * (1 + KMAX) + 8 * idx));
      end
      cur = nxt;
    end
    return total;
  endfunction

  task automatic run(longint unsigned n, int fill, int b);
    longint unsigned root, exp_nodes;
    int height, cyc, bound;
    logic [255:0] keys [$];
    longint unsigned idx [$];
    longint unsigned ka = 64'h8000_0000, ra = 64'hC000_0000;
    u_mem.mem.delete();
    u_mem.build_tree(n, KMAX, fill, 64'h1_0000, root, height);
    for (int q = 0; q < b; q++) idx.push_back($urandom_range(0, 32'(n)));
    idx.sort();
    foreach (idx[q]) keys.push_back(probe_key(idx[q], (q % 5 == 4) ? 0 : $urandom_range(0, 3), $urandom));
    keys.sort();
    foreach (keys[q]) u_mem.put_beat(ka + 32 * q, keys[q]);
    exp_nodes = walk_nodes(keys, root, height);
    @(negedge clk);
    root_addr = root; key_addr = ka; result_addr = ra; num_keys = 10'(b); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
    for (int q = 0; q < b; q++) begin
      logic [63:0] e = expected(keys[q], n);
      checks++;
      if (u_mem.get_u64(ra + 8 * q) != e) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d b=%0d key %0d got %h exp %h", n, b, q, u_mem.get_u64(ra + 8 * q), e);
      end
    end
    bound = int'(exp_nodes) * (2 * NB + 16) + height * (b + 10) + 2 * b + 100;
    checks++;
    if (int'(stat_levels) != height || longint'(stat_nodes) != exp_nodes || cyc > bound) begin
      failures++;
      $display("FAIL n=%0d b=%0d levels %0d/%0d nodes %0d/%0d cycles %0d bound %0d",
               n, b, stat_levels, height, stat_nodes, exp_nodes, cyc, bound);
    end
    $display("n=%0d b=%0d height=%0d nodes=%0d cycles=%0d", n, b, height, stat_nodes, cyc);
  endtask

  initial begin
    rst = 1; start = 0; root_addr = '0; key_addr = '0; result_addr = '0; num_keys = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(1, 15, 1);
    run(1, 15, 5);
    run(20, 15, 7);
    run(300, 15, 64);
    run(3000, 8, 100);
    run(3000, 15, 1000);
    run(50000, 12, 333);
    run(200000, 15, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
