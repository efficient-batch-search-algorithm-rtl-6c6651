// tb_bptree_accel_full: the accelerator at its default size (four
// kernels, order 16, 1000-key buffers) on the evaluated workload: a tree
// of one million entries (leaves filled to 12 of 15 slots, five levels),
// with sorted batches of 1, 10, 100 and 1000 search keys, the last split
// into four slices of 250. The tree is built once in each of the four
// bank models. Every result is checked against the entry generator, and
// each kernel's level count against the tree height; cycles per batch
// are printed.
module tb_bptree_accel_full;
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

  int n_hit, n_miss, n_stall;

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

  longint unsigned N_ENTRIES = 1000000;
  longint unsigned root;
  int height;

  task automatic run(int b);
    int cyc;
    int sz [P];
    int owner [$];
    logic [255:0] keys [$];
    longint unsigned idx [$];
    longint unsigned ka = 64'h8000_0000, ra = 64'hC000_0000;
    for (int q = 0; q < b; q++) idx.push_back($urandom_range(0, 32'(N_ENTRIES)));
    idx.sort();
    foreach (idx[q]) keys.push_back(probe_key(idx[q], (q % 2 == 0) ? 0 : $urandom_range(0, 3), $urandom));
    keys.sort();
    foreach (keys[q]) put_all(ka + 32 * q, keys[q]);
    for (int i = 0; i < P; i++) begin
      sz[i] = b / P + ((i < b % P) ? 1 : 0);
      for (int k = 0; k < sz[i]; k++) owner.push_back(i);
    end
    @(negedge clk);
    root_addr = root; key_addr = ka; result_addr = ra; num_keys = 12'(b); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
    for (int q = 0; q < b; q++) begin
      logic [63:0] e, g;
      e = expected(keys[q], N_ENTRIES);
      g = get_res(owner[q], ra + 8 * q);
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 10) $display("FAIL b=%0d key %0d got %h exp %h", b, q, g, e);
      end
      if (e == '1) n_miss++; else n_hit++;
    end
    for (int i = 0; i < P; i++) begin
      if (sz[i] > 0) begin
        checks++;
        if (int'(stat_levels[i]) != height) begin
          failures++;
          $display("FAIL kernel %0d levels %0d exp %0d", i, stat_levels[i], height);
        end
      end
    end
    $display("entries=%0d batch=%0d height=%0d cycles=%0d node loads per kernel=%0d/%0d/%0d/%0d",
             N_ENTRIES, b, height, cyc, stat_nodes[0], stat_nodes[1], stat_nodes[2], stat_nodes[3]);
  endtask

  initial begin
    longint unsigned r1, r2, r3;
    int h1, h2, h3;
    rst = 1; start = 0; root_addr = '0; key_addr = '0; result_addr = '0; num_keys = '0;
    g_bank[0].u_mem.build_tree(N_ENTRIES, 15, 12, 64'h1_0000, root, height);
    g_bank[1].u_mem.build_tree(N_ENTRIES, 15, 12, 64'h1_0000, r1, h1);
    g_bank[2].u_mem.build_tree(N_ENTRIES, 15, 12, 64'h1_0000, r2, h2);
    g_bank[3].u_mem.build_tree(N_ENTRIES, 15, 12, 64'h1_0000, r3, h3);
    repeat (3) @(negedge clk);
    rst = 0;
    run(1);
    run(10);
    run(100);
    run(1000);
    checks++;
    if (n_hit == 0 || n_miss == 0) failures++;
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
