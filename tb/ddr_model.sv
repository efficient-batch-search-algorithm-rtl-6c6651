// ddr_model: behavioural model of one global memory bank (DDR channel with
// its memory controller) as seen by one search kernel. Not synthesizable.
//
// Synchronous reset rst abandons any burst in progress.
// Memory is a sparse array of 32-byte beats indexed by byte address / 32.
// Burst reads: a request is accepted when the model is idle; after
// RD_LAT cycles the len beats are returned in order on rd_data/rd_valid,
// with random one-cycle gaps when STALL is set. Burst writes: a request is
// accepted, then len beats are taken whenever wr_ready is high (random
// gaps when STALL is set), each merged under wr_strb; WR_LAT cycles after
// the last beat wr_done pulses. Unwritten beats read as zero.
// The tasks build_tree, put_beat, get_beat and get_u64 let a testbench
// load a B+ tree and read results back without going through the ports.
module ddr_model
  import bpt_pkg::*;
  import bpt_tb_pkg::*;
#(
  parameter int unsigned RD_LAT = 8,
  parameter int unsigned WR_LAT = 4,
  parameter bit          STALL  = 1'b1,
  parameter int unsigned SEED   = 1
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  rd_req_valid,
  output logic                  rd_req_ready,
  input  mem_req_t              rd_req,
  output logic                  rd_valid,
  input  logic                  rd_ready,
  output logic [BEAT_W-1:0]     rd_data,
  input  logic                  wr_req_valid,
  output logic                  wr_req_ready,
  input  mem_req_t              wr_req,
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic [BEAT_W-1:0]     wr_data,
  input  logic [BEAT_BYTES-1:0] wr_strb,
  input  logic                  wr_last,
  output logic                  wr_done
);
  logic [BEAT_W-1:0] mem [longint unsigned];

  longint unsigned rd_beat, wr_beat;
  int unsigned     rd_left, wr_left, rd_wait, wr_wait;
  bit              rd_busy, wr_busy, wr_resp;
  int unsigned     rng;
  longint unsigned reads, writes;   // bursts served

  function automatic logic [BEAT_W-1:0] get_beat(longint unsigned byte_addr);
    return mem.exists(byte_addr >> 5) ? mem[byte_addr >> 5] : '0;
  endfunction

  function automatic void put_beat(longint unsigned byte_addr, logic [BEAT_W-1:0] d);
    mem[byte_addr >> 5] = d;
  endfunction

  function automatic logic [63:0] get_u64(longint unsigned byte_addr);
    logic [BEAT_W-1:0] b = get_beat(byte_addr);
    return b[64 * ((byte_addr >> 3) % 4) +: 64];
  endfunction

  // ---------------------------------------------------------------- tree build
  // Builds a B+ tree of order KMAX+1 over entries 0..n-1 (keys key_of(i),
  // data data_of(i)) with FILL entries per leaf and up to KMAX+1 children
  // per inner node, lays it out breadth-first from byte address base, one
  // node of node_beats(KMAX) beats after the other, and returns the root
  // address and the height. Inner key s is the largest key below child s;
  // depth is 0 in leaves and counts up towards the root. Unused key and
  // pointer slots are filled with junk.
  int unsigned b_kmax, b_fill, b_m;
  longint unsigned b_n;
  longint unsigned b_cnt [16];

  function automatic longint unsigned max_idx(int l, longint unsigned j);
    longint unsigned last;
    if (l == 0) begin
      last = (j + 1) * b_fill;
      return ((last < b_n) ? last : b_n) - 1;
    end
    last = (j + 1) * b_m;
    return max_idx(l - 1, ((last < b_cnt[l-1]) ? last : b_cnt[l-1]) - 1);
  endfunction

  task automatic build_tree(input longint unsigned n, input int unsigned kmax,
                            input int unsigned fill, input longint unsigned base,
                            output longint unsigned root, output int height);
    int unsigned nb = node_beats(kmax);
    longint unsigned lvl_off [16];
    longint unsigned node_no;
    b_kmax = kmax; b_fill = fill; b_m = kmax + 1; b_n = n;
    b_cnt[0] = (n + fill - 1) / fill;
    height = 1;
    while (b_cnt[height-1] > 1) begin
      b_cnt[height] = (b_cnt[height-1] + b_m - 1) / b_m;
      height++;
    end
    // breadth-first numbering: root level first
    node_no = 0;
    for (int l = height - 1; l >= 0; l--) begin
      lvl_off[l] = node_no;
      node_no += b_cnt[l];
    end
    root = base;
    for (int l = height - 1; l >= 0; l--) begin
      for (longint unsigned j = 0; j < b_cnt[l]; j++) begin
        longint unsigned a = base + (lvl_off[l] + j) * nb * 32;
        longint unsigned first, cnt;
        logic [BEAT_W-1:0] beat;
        logic [63:0] ptr [];
        ptr = new[kmax + 1];
        if (l == 0) begin
          first = j * fill;
          cnt   = ((first + fill) < n) ? fill : n - first;
        end else begin
          first = j * b_m;
          cnt   = ((first + b_m) < b_cnt[l-1]) ? b_m : b_cnt[l-1] - first;
        end
        // header: slotUse, depth
        beat = {192'(h64(a, 11)), 32'(l), 32'((l == 0) ? cnt : cnt - 1)};
        put_beat(a, beat);
        for (int unsigned s = 0; s < kmax; s++) begin
          logic [255:0] k;
          if (l == 0)
            k = (s < cnt) ? key_of(first + s) : {h64(a, s), h64(a, s + 100), h64(a, s + 200), h64(a, s + 300)};
          else
            k = (s + 1 < cnt) ? key_of(max_idx(l - 1, first + s)) : {h64(a, s), h64(a, s + 100), h64(a, s + 200), h64(a, s + 300)};
          put_beat(a + 32 * (1 + s), k);
        end
        for (int unsigned c = 0; c <= kmax; c++) begin
          if (c < cnt)
            ptr[c] = (l == 0) ? data_of(first + c)
                              : base + (lvl_off[l-1] + first + c) * nb * 32;
          else
            ptr[c] = h64(a, c + 400);
        end
        for (int unsigned q = 0; q < (kmax + 1 + 3) / 4; q++) begin
          for (int unsigned w = 0; w < 4; w++)
            beat[64 * w +: 64] = (4 * q + w <= kmax) ? ptr[4 * q + w] : h64(a, 500);
          put_beat(a + 32 * (1 + kmax + q), beat);
        end
      end
    end
  endtask

  // ------------------------------------------------------------------- ports
  function automatic bit gap();
    rng = rng * 1103515245 + 12345;
    return STALL && (rng[20:18] == 3'd0);
  endfunction


  initial begin
    rng      = SEED;
    rd_busy  = 0; wr_busy = 0; wr_resp = 0;
    rd_valid = 0; wr_ready = 0; wr_done = 0;
    rd_req_ready = 1; wr_req_ready = 1;
    rd_data  = '0;
    reads    = 0; writes = 0;
  end

  always @(posedge clk) begin
    if (rst) begin
      rd_busy = 0; wr_busy = 0; wr_resp = 0;
      rd_left = 0; wr_left = 0; rd_wait = 0; wr_wait = 0;
    end
    // read channel
    if (rd_valid && rd_ready && !rst) begin
      rd_beat++;
      rd_left--;
      if (rd_left == 0) rd_busy = 0;
    end
    if (rd_req_ready && rd_req_valid && !rst) begin
      rd_busy = 1;
      rd_beat = rd_req.addr >> 5;
      rd_left = rd_req.len;
      rd_wait = RD_LAT;
      reads++;
    end
    if (rd_busy && rd_wait > 0) rd_wait--;
    rd_valid <= rd_busy && rd_wait == 0 && rd_left > 0 && !gap();
    rd_data  <= (rd_busy && mem.exists(rd_beat)) ? mem[rd_beat] : '0;

    // write channel
    wr_done <= 0;
    if (wr_valid && wr_ready && !rst) begin
      logic [BEAT_W-1:0] old;
      old = mem.exists(wr_beat) ? mem[wr_beat] : '0;
      for (int b = 0; b < BEAT_BYTES; b++)
        if (wr_strb[b]) old[8*b +: 8] = wr_data[8*b +: 8];
      mem[wr_beat] = old;
      wr_beat++;
      wr_left--;
      if (wr_left == 0) begin
        wr_resp = 1;
        wr_wait = WR_LAT;
      end
    end
    if (wr_req_ready && wr_req_valid && !rst) begin
      wr_busy = 1;
      wr_beat = wr_req.addr >> 5;
      wr_left = wr_req.len;
      writes++;
    end
    if (wr_resp) begin
      if (wr_wait == 0) begin
        wr_done <= 1;
        wr_resp = 0;
        wr_busy = 0;
      end else wr_wait--;
    end
    wr_ready <= wr_busy && !wr_resp && wr_left > 0 && !gap();
    // request acceptance is registered so that both sides see one value
    rd_req_ready <= !rd_busy;
    wr_req_ready <= !wr_busy;
  end
endmodule
