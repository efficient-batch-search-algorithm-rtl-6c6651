// search_kernel: one batch search kernel (compute unit) for a static B+ tree.
//
// The kernel answers a sorted batch of up to MAX_BATCH 32-byte search keys
// against a B+ tree of order KMAX+1 stored as a flat array of fixed-size
// nodes in its global memory bank, and writes one 8-byte result per key
// (the key's data value, or -1 if the key is not in the tree).
//
// Operation, in three phases:
//  1. Preload: one burst read copies the num_keys keys from key_addr into
//     the search_key_buffer.
//  2. Level-wise traversal: the entry (root_addr, num_keys) is put into the
//     result_fifo. Then, repeatedly, the head entry (A, #) is popped, node A
//     is loaded by the node_loader, and the next # keys of the buffer are
//     compared with it by compare_logic, one key per clock. Because the
//     batch is sorted, keys that go to the same child are adjacent: the
//     kernel counts them and appends one (child, count) entry per child to
//     the FIFO. A key index into the buffer advances with every key and
//     returns to 0 at the start of each level. When all entries of a level
//     are used up the next level starts. At the leaf level (node depth 0)
//     every key appends its result to the FIFO instead.
//  3. Write-back: the result_writer drains the num_keys results into
//     memory at result_addr with one burst write.
// start is sampled in the idle state; done pulses once at the end. The
// counters stat_nodes, stat_levels and stat_cycles report node loads,
// tree levels visited and cycles from start to done of the last batch.
//
// Timing: per node, one burst read of node_beats(KMAX) beats, then one
// cycle per key plus two cycles of pipeline and bookkeeping. The memory
// port carries valid/ready burst requests and data (see node_loader and
// result_writer). Assertions check that the FIFO never overflows or runs
// dry, that the loader and writer are started only when idle, and that
// each comparison result is consistent.
//
// Follows the design: batch preload into on-chip memory, the FIFO of
// (address, count) entries, sequential key processing per node, per-node
// parallel comparison, burst reads and writes. This design's choices: the
// leaf test (depth field 0 marks a leaf, i.e. depth counts levels up from
// the leaves), the single-issue (non-prefetching) node load, the key byte
// order and the memory port protocol.
module search_kernel
  import bpt_pkg::*;
#(
  parameter int unsigned KMAX      = 15,
  parameter int unsigned MAX_BATCH = 1000,
  parameter int unsigned CNT_BITS  = $clog2(MAX_BATCH + 1)
) (
  input  logic                  clk,
  input  logic                  rst,
  // kernel arguments and control
  input  logic                  start,
  input  logic [ADDR_W-1:0]     root_addr,
  input  logic [ADDR_W-1:0]     key_addr,
  input  logic [ADDR_W-1:0]     result_addr,
  input  logic [CNT_BITS-1:0]   num_keys,
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           stat_nodes,
  output logic [31:0]           stat_levels,
  output logic [31:0]           stat_cycles,
  // global memory port: burst reads
  output logic                  rd_req_valid,
  input  logic                  rd_req_ready,
  output mem_req_t              rd_req,
  input  logic                  rd_valid,
  output logic                  rd_ready,
  input  logic [BEAT_W-1:0]     rd_data,
  // global memory port: burst writes
  output logic                  wr_req_valid,
  input  logic                  wr_req_ready,
  output mem_req_t              wr_req,
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [BEAT_W-1:0]     wr_data,
  output logic [BEAT_BYTES-1:0] wr_strb,
  output logic                  wr_last,
  input  logic                  wr_done
);
  localparam int unsigned KB_AW = $clog2(MAX_BATCH);
  localparam int unsigned IDX_W = $clog2(KMAX + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_KREQ, S_KDATA, S_ROOT, S_POP, S_LOAD, S_CMP, S_WSTART, S_WRITE
  } state_t;
  state_t state;

  // latched arguments
  logic [ADDR_W-1:0]   root_q, key_q, res_q;
  logic [CNT_BITS-1:0] num_q;

  // ---------------------------------------------------------------- key buffer
  logic             kb_wr_en;
  logic [KB_AW-1:0] kb_wr_addr, kb_rd_addr;
  logic [KEY_W-1:0] kb_rd_data;

  search_key_buffer #(.DEPTH(MAX_BATCH)) u_keys (
    .clk    (clk),
    .wr_en  (kb_wr_en),
    .wr_addr(kb_wr_addr),
    .wr_data(rd_data),
    .rd_addr(kb_rd_addr),
    .rd_data(kb_rd_data)
  );

  // --------------------------------------------------------------- result FIFO
  logic                       f_rst, f_push, f_pop, f_empty, f_full;
  fifo_entry_t                f_push_data, f_head;
  logic [$clog2(MAX_BATCH):0] f_count;

  result_fifo #(.DEPTH(MAX_BATCH)) u_fifo (
    .clk      (clk),
    .rst      (f_rst),
    .push     (f_push),
    .push_data(f_push_data),
    .pop      (f_pop),
    .head     (f_head),
    .empty    (f_empty),
    .full     (f_full),
    .count    (f_count)
  );

  // --------------------------------------------------------------- node loader
  logic                       nl_start, nl_busy, nl_done;
  logic                       nl_rd_req_valid, nl_rd_ready;
  mem_req_t                   nl_rd_req;
  logic [31:0]                n_slot_use, n_depth;
  logic [KMAX-1:0][KEY_W-1:0] n_keys;
  logic [KMAX:0][ADDR_W-1:0]  n_ptrs;
  logic [ADDR_W-1:0]          node_addr;

  node_loader #(.KMAX(KMAX)) u_loader (
    .clk         (clk),
    .rst         (rst),
    .start       (nl_start),
    .addr        (node_addr),
    .busy        (nl_busy),
    .done        (nl_done),
    .rd_req_valid(nl_rd_req_valid),
    .rd_req_ready(rd_req_ready),
    .rd_req      (nl_rd_req),
    .rd_valid    (rd_valid),
    .rd_ready    (nl_rd_ready),
    .rd_data     (rd_data),
    .slot_use    (n_slot_use),
    .depth       (n_depth),
    .keys        (n_keys),
    .ptrs        (n_ptrs)
  );

  // ------------------------------------------------------------- compare logic
  logic              is_leaf;
  logic              c_leq, c_eq;
  logic [IDX_W-1:0]  c_index;
  logic [ADDR_W-1:0] c_result;

  assign is_leaf = (n_depth == 32'd0);

  compare_logic #(.KMAX(KMAX)) u_cmp (
    .search_key(kb_rd_data),
    .node_keys (n_keys),
    .node_ptrs (n_ptrs),
    .slot_use  (n_slot_use),
    .is_leaf   (is_leaf),
    .found_leq (c_leq),
    .found_eq  (c_eq),
    .index     (c_index),
    .result    (c_result)
  );

  // ------------------------------------------------------------- result writer
  logic w_start, w_busy, w_done, w_pop;

  result_writer #(.MAX_BATCH(MAX_BATCH)) u_writer (
    .clk         (clk),
    .rst         (rst),
    .start       (w_start),
    .addr        (res_q),
    .num         (num_q),
    .busy        (w_busy),
    .done        (w_done),
    .fifo_data   (f_head.addr),
    .fifo_empty  (f_empty),
    .fifo_pop    (w_pop),
    .wr_req_valid(wr_req_valid),
    .wr_req_ready(wr_req_ready),
    .wr_req      (wr_req),
    .wr_valid    (wr_valid),
    .wr_ready    (wr_ready),
    .wr_data     (wr_data),
    .wr_strb     (wr_strb),
    .wr_last     (wr_last),
    .wr_done     (wr_done)
  );

  // ------------------------------------------------------ traversal bookkeeping
  logic [CNT_BITS-1:0] kcount;        // preload: keys stored so far
  logic [CNT_BITS-1:0] key_idx;       // SearchKeyIndex within the level
  logic [CNT_BITS-1:0] issue_left;    // keys of this node not yet read
  logic                v1;            // a key is on kb_rd_data this cycle
  logic [CNT_BITS-1:0] node_cnt;      // # of the node being processed
  logic [CNT_BITS-1:0] level_left;    // entries of the level not yet popped
  logic [CNT_BITS-1:0] next_level;    // entries pushed for the next level
  logic                run_valid;
  logic [ADDR_W-1:0]   run_addr;
  logic [CNT_BITS-1:0] run_cnt;
  logic                node_end;

  assign node_end = (state == S_CMP) && (issue_left == 0) && !v1;

  // Memory read port: the preload owns it in S_KREQ/S_KDATA, else the loader.
  always_comb begin
    if (state == S_KREQ || state == S_KDATA) begin
      rd_req_valid = (state == S_KREQ);
      rd_req.addr  = key_q;
      rd_req.len   = LEN_W'(num_q);
      rd_ready     = (state == S_KDATA);
    end else begin
      rd_req_valid = nl_rd_req_valid;
      rd_req       = nl_rd_req;
      rd_ready     = nl_rd_ready;
    end
  end

  assign kb_wr_en   = (state == S_KDATA) && rd_valid;
  assign kb_wr_addr = KB_AW'(kcount);
  assign kb_rd_addr = KB_AW'(key_idx);

  assign nl_start = (state == S_POP);
  assign node_addr = f_head.addr;
  assign w_start  = (state == S_WSTART);
  assign f_rst    = rst || (state == S_IDLE && start);
  assign f_pop    = (state == S_POP) || w_pop;
  assign busy     = (state != S_IDLE);

  // FIFO writes: root entry, results / child runs during the comparison,
  // and the last child run of an inner node at its end.
  logic               run_change;
  assign run_change = !run_valid || (c_result != run_addr);

  always_comb begin
    f_push      = 1'b0;
    f_push_data = '0;
    if (state == S_ROOT) begin
      f_push      = 1'b1;
      f_push_data = '{addr: root_q, cnt: CNT_W'(num_q)};
    end else if (state == S_CMP && v1) begin
      if (is_leaf) begin
        f_push      = 1'b1;
        f_push_data = '{addr: c_result, cnt: '0};
      end else if (run_valid && run_change) begin
        f_push      = 1'b1;
        f_push_data = '{addr: run_addr, cnt: CNT_W'(run_cnt)};
      end
    end else if (node_end && !is_leaf && run_valid) begin
      f_push      = 1'b1;
      f_push_data = '{addr: run_addr, cnt: CNT_W'(run_cnt)};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      v1          <= 1'b0;
      run_valid   <= 1'b0;
      kcount      <= '0;
      key_idx     <= '0;
      issue_left  <= '0;
      level_left  <= '0;
      next_level  <= '0;
      stat_nodes  <= '0;
      stat_levels <= '0;
      stat_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) stat_cycles <= stat_cycles + 1;
      case (state)
        S_IDLE: if (start) begin
          root_q      <= root_addr;
          key_q       <= key_addr;
          res_q       <= result_addr;
          num_q       <= num_keys;
          kcount      <= '0;
          stat_nodes  <= '0;
          stat_levels <= '0;
          stat_cycles <= '0;
          state       <= (num_keys == 0) ? S_WSTART : S_KREQ;
        end
        S_KREQ: if (rd_req_ready) state <= S_KDATA;
        S_KDATA: if (rd_valid) begin
          kcount <= kcount + 1'b1;
          if (kcount == num_q - 1'b1) state <= S_ROOT;
        end
        S_ROOT: begin
          level_left  <= 1;
          next_level  <= '0;
          key_idx     <= '0;
          stat_levels <= 1;
          state       <= S_POP;
        end
        S_POP: begin
          node_cnt   <= CNT_BITS'(f_head.cnt);
          level_left <= level_left - 1'b1;
          stat_nodes <= stat_nodes + 1;
          state      <= S_LOAD;
        end
        S_LOAD: if (nl_done) begin
          issue_left <= node_cnt;
          v1         <= 1'b0;
          run_valid  <= 1'b0;
          state      <= S_CMP;
        end
        S_CMP: begin
          // stage 0: read the next key of this node from the buffer
          if (issue_left != 0) begin
            key_idx    <= key_idx + 1'b1;
            issue_left <= issue_left - 1'b1;
            v1         <= 1'b1;
          end else begin
            v1 <= 1'b0;
          end
          // stage 1: the key is compared; count keys per child
          if (v1 && !is_leaf) begin
            if (run_change) begin
              run_valid <= 1'b1;
              run_addr  <= c_result;
              run_cnt   <= 1;
              if (run_valid) next_level <= next_level + 1'b1;
            end else begin
              run_cnt <= run_cnt + 1'b1;
            end
          end
          // end of node
          if (node_end) begin
            run_valid <= 1'b0;
            if (level_left == 0) begin
              if (is_leaf) begin
                state <= S_WSTART;
              end else begin
                level_left  <= next_level + CNT_BITS'(run_valid);
                next_level  <= '0;
                key_idx     <= '0;
                stat_levels <= stat_levels + 1;
                state       <= S_POP;
              end
            end else begin
              if (!is_leaf && run_valid) next_level <= next_level + 1'b1;
              state <= S_POP;
            end
          end
        end
        S_WSTART: state <= S_WRITE;
        S_WRITE: if (w_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fifo_no_overflow : assert property (@(posedge clk) disable iff (rst) f_push |-> (!f_full || f_pop));
  a_fifo_has_entry : assert property (@(posedge clk) disable iff (rst) (state == S_POP) |-> !f_empty);
  a_fifo_bound     : assert property (@(posedge clk) disable iff (rst) f_count <= ($clog2(MAX_BATCH) + 1)'(MAX_BATCH));
  a_load_idle      : assert property (@(posedge clk) disable iff (rst) nl_start |-> !nl_busy);
  a_write_idle     : assert property (@(posedge clk) disable iff (rst) w_start |-> !w_busy);
  // a compared key goes to a used slot or just past them; an exact match is
  // also a less-or-equal match
  a_cmp_sane       : assert property (@(posedge clk) disable iff (rst)
    (state == S_CMP && v1) |-> (32'(c_index) <= n_slot_use && (!c_eq || c_leq)));
endmodule
