// tb_bptree_accel: end-to-end test of the accelerator at its default size
// (four kernels, order 16, 1000-key buffers) on four memory bank models
// with random stalls. The same B+ tree is built in every bank and the
// whole sorted batch is placed in every bank; after done, the result of
// key q is read from the bank of the kernel whose slice holds q.
// Several trees and batch sizes are run back to back. Checked: every
// result, each kernel's level count against the tree height, and that
// the mechanisms of the design all occur at least once (counted below):
// multi-level traversal, reuse of a loaded node by several keys, hits,
// misses, an even 4-way split, an uneven split, an idle kernel (batch
// smaller than four), a partly filled last result beat, memory stalls,
// and the host overlapping the kernels: once every active kernel has
// finished its key preload (its second read request, the root node, has
// been accepted), the key area is overwritten with the next batch while
// the search is still running, which must not change any result.
module tb_bptree_accel;
  import bpt_pkg::*;
  import bpt_tb_pkg::*;
  localparam int P = 4;

  logic clk = 0, rst;
  logic start, busy, done;
  logic [ADDR_W-1:0] root_addr, key_addr, result_addr;
  logic [11:0] num_keys;
  logic [P-1:0][31:0] stat_nodes, stat_levels, stat_cycles;
  logic [P-1:0] rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  mem_req_t [P-1:0] rd_req, wr_req;
  logic [P-1:0][BEAT_W-1:0] rd_data, wr_data;
  logic [P-1:0] wr_req_valid, wr_req_ready, wr_valid, wr_ready, wr_last, wr_done;
  logic [P-1:0][BEAT_BYTES-1:0] wr_strb;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_multilevel, n_reuse, n_hit, n_miss, n_even, n_uneven, n_idle, n_partial, n_stall, n_overlap;
  int nreq [P];

  bptree_accel dut (.*);

  always #5 clk = ~clk;

  for (genvar i = 0; i < P; i++) begin : g_bank
    ddr_model #(.SEED(11 + i)) u_mem (
      .clk(clk), .rst(rst), .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]), .rd_req(rd_req[i]),
      .rd_valid(rd_valid[i]), .rd_ready(rd_ready[i]), .rd_data(rd_data[i]),
      .wr_req_valid(wr_req_valid[i]), .wr_req_ready(wr_req_ready[i]), .wr_req(wr_req[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_data(wr_data[i]), .wr_strb(wr_strb[i]),
      .wr_last(wr_last[i]), .wr_done(wr_done[i]));
  end

  always @(posedge clk)
    for (int i = 0; i < P; i++) if (rd_ready[i] && !rd_valid[i] && busy) n_stall++;

  always @(posedge clk)
    for (int i = 0; i < P; i++)
      if (start) nreq[i] <= 0;
      else if (rd_req_valid[i] && rd_req_ready[i]) nreq[i] <= nreq[i] + 1;

  task automatic put_all(longint unsigned a, logic [255:0] d);
    g_bank[0].u_mem.put_beat(a, d); g_bank[1].u_mem.put_beat(a, d);
    g_bank[2].u_mem.put_beat(a, d); g_bank[3].u_mem.put_beat(a, d);
  endtask

  function automatic logic [63:0] get_res(int bank, longint unsigned a);
    case (bank)
      0: return g_bank[0].u_mem.get_u64(a);
      1: return g_bank[1].u_mem.get_u64(a);
      2: return g_bank[2].u_mem.get_u64(a);
      default: return g_bank[3].u_mem.get_u64(a);
    endcase
  endfunction

  task automatic run(longint unsigned n, int fill, int b);
    longint unsigned root, r1, r2, r3;
    int height, h1, h2, h3, cyc;
    bit ovl, loaded;
    int sz [P];
    int owner [$];
    logic [255:0] keys [$];
    longint unsigned idx [$];
    longint unsigned ka = 64'h8000_0000, ra = 64'hC000_0000;
    g_bank[0].u_mem.build_tree(n, 15, fill, 64'h1_0000, root, height);
    g_bank[1].u_mem.build_tree(n, 15, fill, 64'h1_0000, r1, h1);
    g_bank[2].u_mem.build_tree(n, 15, fill, 64'h1_0000, r2, h2);
    g_bank[3].u_mem.build_tree(n, 15, fill, 64'h1_0000, r3, h3);
    for (int q = 0; q < b; q++) idx.push_back($urandom_range(0, 32'(n)));
    idx.sort();
    foreach (idx[q]) keys.push_back(probe_key(idx[q], (q % 3 == 0) ? 0 : $urandom_range(0, 3), $urandom));
    keys.sort();
    foreach (keys[q]) put_all(ka + 32 * q, keys[q]);
    for (int q = 0; q < b + 4; q++) put_all(ra + 8 * q, {4{64'h5A5A_5A5A_5A5A_5A5A}});
    // slice of each kernel: sizes differ by at most one, larger ones first
    for (int i = 0; i < P; i++) begin
      sz[i] = b / P + ((i < b % P) ? 1 : 0);
      for (int k = 0; k < sz[i]; k++) owner.push_back(i);
      if (sz[i] == 0) n_idle++;
      if (sz[i] % 4 != 0) n_partial++;
    end
    if (b % P == 0 && b > 0) n_even++; else if (b % P != 0) n_uneven++;
    @(negedge clk);
    root_addr = root; key_addr = ka; result_addr = ra; num_keys = 12'(b); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    ovl = 0;
    while (!done && cyc < 2000000) begin
      @(negedge clk);
      cyc++;
      loaded = 1;
      for (int i = 0; i < P; i++) if (sz[i] > 0 && nreq[i] < 2) loaded = 0;
      if (!ovl && !done && loaded) begin
        // the host writes its next batch over the keys being searched
        foreach (keys[q]) put_all(ka + 32 * q, ~keys[q]);
        ovl = 1;
        n_overlap++;
      end
    end
    for (int q = 0; q < b; q++) begin
      logic [63:0] e = expected(keys[q], n);
      logic [63:0] g = get_res(owner[q], ra + 8 * q);
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d b=%0d key %0d got %h exp %h", n, b, q, g, e);
      end
      if (e == '1) n_miss++; else n_hit++;
    end
    for (int i = 0; i < P; i++) begin
      if (sz[i] > 0) begin
        checks++;
        if (int'(stat_levels[i]) != height) begin
          failures++;
          $display("FAIL n=%0d kernel %0d levels %0d exp %0d", n, i, stat_levels[i], height);
        end
        if (int'(stat_nodes[i]) < sz[i] * height) n_reuse++;
      end
    end
    if (height > 1) n_multilevel++;
    $display("n=%0d b=%0d height=%0d cycles=%0d nodes=%0d/%0d/%0d/%0d", n, b, height, cyc,
             stat_nodes[0], stat_nodes[1], stat_nodes[2], stat_nodes[3]);
  endtask

  initial begin
    rst = 1; start = 0; root_addr = '0; key_addr = '0; result_addr = '0; num_keys = '0;
    n_multilevel = 0; n_reuse = 0; n_hit = 0; n_miss = 0; n_even = 0; n_uneven = 0;
    n_idle = 0; n_partial = 0; n_stall = 0; n_overlap = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(1, 15, 2);          // lone leaf, two kernels idle
    run(3, 2, 3);           // order-16 tree, tiny leaves
    run(500, 15, 37);
    run(20000, 12, 1000);   // 4 x 250
    run(20000, 12, 4000);   // 4 x 1000, full buffers
    run(100000, 15, 999);
    checks++;
    if (n_multilevel == 0 || n_reuse == 0 || n_hit == 0 || n_miss == 0 || n_even == 0 ||
        n_uneven == 0 || n_idle == 0 || n_partial == 0 || n_stall == 0 || n_overlap == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("mechanisms: multilevel=%0d reuse=%0d hit=%0d miss=%0d even=%0d uneven=%0d idle=%0d partial_beat=%0d stall=%0d overlap=%0d",
             n_multilevel, n_reuse, n_hit, n_miss, n_even, n_uneven, n_idle, n_partial, n_stall, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
