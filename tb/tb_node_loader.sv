// tb_node_loader: builds a small B+ tree (order 16) in the memory model,
// loads every node of it through the node_loader and checks slotUse,
// depth, every key and every child address / data value against the
// beats in memory. Also checks that each load issues one burst of 20
// beats (the 640-byte node of order 16) and finishes within that many
// beats plus the memory latency and stalls.
module tb_node_loader;
  import bpt_pkg::*;
  localparam int KMAX = 15;
  localparam int NB   = node_beats(KMAX);
  logic clk = 0, rst;
  logic start, busy, done;
  logic [ADDR_W-1:0] addr;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  mem_req_t rd_req;
  logic [BEAT_W-1:0] rd_data;
  logic [31:0] slot_use, depth;
  logic [KMAX-1:0][KEY_W-1:0] keys;
  logic [KMAX:0][ADDR_W-1:0] ptrs;
  logic wr_req_ready, wr_ready, wr_done;
  int checks = 0, failures = 0;

  node_loader #(.KMAX(KMAX)) dut (.*);

  ddr_model #(.SEED(3)) u_mem (
    .clk(clk), .rst(rst), .rd_req_valid(rd_req_valid), .rd_req_ready(rd_req_ready), .rd_req(rd_req),
    .rd_valid(rd_valid), .rd_ready(rd_ready), .rd_data(rd_data),
    .wr_req_valid(1'b0), .wr_req_ready(wr_req_ready), .wr_req('0), .wr_valid(1'b0),
    .wr_ready(wr_ready), .wr_data('0), .wr_strb('0), .wr_last(1'b0), .wr_done(wr_done));

  always #5 clk = ~clk;

  task automatic expect_eq(logic [255:0] got, logic [255:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    longint unsigned root, nodes;
    int height, cycles;
    rst = 1; start = 0; addr = '0;
    u_mem.build_tree(3000, KMAX, 12, 64'h4000, root, height);
    nodes = 0;
    for (int l = 0; l < height; l++) nodes += u_mem.b_cnt[l];
    repeat (3) @(negedge clk);
    rst = 0;
    expect_eq(256'(NB), 256'd20, "node beats for m=16");
    for (longint unsigned j = 0; j < nodes; j++) begin
      longint unsigned a;
      logic [255:0] hdr;
      a   = root + j * NB * 32;
      hdr = u_mem.get_beat(a);
      @(negedge clk);
      addr = a; start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      expect_eq(256'(slot_use), 256'(hdr[31:0]), "slotUse");
      expect_eq(256'(depth), 256'(hdr[63:32]), "depth");
      for (int k = 0; k < KMAX; k++) expect_eq(keys[k], u_mem.get_beat(a + 32 * (1 + k)), "key");
      for (int c = 0; c <= KMAX; c++) expect_eq(256'(ptrs[c]), 256'(u_mem.get_u64(a + 32 * (1 + KMAX) + 8 * c)), "ptr");
      checks++;
      if (cycles < NB || cycles > 3 * NB + 20) begin
        failures++;
        $display("FAIL load took %0d cycles", cycles);
      end
    end
    checks++;
    if (u_mem.reads != nodes) begin
      failures++;
      $display("FAIL %0d bursts for %0d nodes", u_mem.reads, nodes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
