// bptree_accel: B+ tree batch search accelerator with P parallel kernels.
//
// P identical search_kernel instances each own one global memory bank
// (one DDR channel each); the B+ tree is stored at the same address in
// every bank. A batch of num_keys sorted search keys is cut by the
// batch_distributor into P contiguous, equal slices (the first
// num_keys % P slices get one key more); all kernels start together on
// start, search their slices level by level, and write their results to
// result_addr + 8*(first key index of the slice) in their own bank. done
// pulses once when every kernel has finished; busy is high in between.
// Each kernel handles at most MAX_BATCH keys, so num_keys may be up to
// P*MAX_BATCH. The memory ports are flat per-kernel arrays of the
// kernel's burst read and write channels.
//
// Defaults follow the evaluated configuration: tree order m = 16
// (KMAX = 15 keys per node), a 1000-entry key buffer per kernel and four
// kernels on the card's four DDR banks. Sharing root_addr and result
// layout across banks is this design's choice.
module bptree_accel
  import bpt_pkg::*;
#(
  parameter int unsigned P         = 4,
  parameter int unsigned KMAX      = 15,
  parameter int unsigned MAX_BATCH = 1000,
  parameter int unsigned TOT_BITS  = $clog2(P * MAX_BATCH + 1)
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           start,
  input  logic [ADDR_W-1:0]              root_addr,
  input  logic [ADDR_W-1:0]              key_addr,
  input  logic [ADDR_W-1:0]              result_addr,
  input  logic [TOT_BITS-1:0]            num_keys,
  output logic                           busy,
  output logic                           done,
  output logic [P-1:0][31:0]             stat_nodes,
  output logic [P-1:0][31:0]             stat_levels,
  output logic [P-1:0][31:0]             stat_cycles,
  // per-bank memory ports
  output logic [P-1:0]                   rd_req_valid,
  input  logic [P-1:0]                   rd_req_ready,
  output mem_req_t [P-1:0]               rd_req,
  input  logic [P-1:0]                   rd_valid,
  output logic [P-1:0]                   rd_ready,
  input  logic [P-1:0][BEAT_W-1:0]       rd_data,
  output logic [P-1:0]                   wr_req_valid,
  input  logic [P-1:0]                   wr_req_ready,
  output mem_req_t [P-1:0]               wr_req,
  output logic [P-1:0]                   wr_valid,
  input  logic [P-1:0]                   wr_ready,
  output logic [P-1:0][BEAT_W-1:0]       wr_data,
  output logic [P-1:0][BEAT_BYTES-1:0]   wr_strb,
  output logic [P-1:0]                   wr_last,
  input  logic [P-1:0]                   wr_done
);
  localparam int unsigned CNT_BITS = $clog2(MAX_BATCH + 1);

  logic [P-1:0][CNT_BITS-1:0] k_num;
  logic [P-1:0][ADDR_W-1:0]   k_key_addr, k_result_addr;
  logic [P-1:0]               k_busy, k_done;
  logic [P-1:0]               finished;
  logic                       running;

  batch_distributor #(.P(P), .MAX_BATCH(MAX_BATCH), .TOT_BITS(TOT_BITS)) u_dist (
    .num_keys     (num_keys),
    .key_addr     (key_addr),
    .result_addr  (result_addr),
    .k_num        (k_num),
    .k_key_addr   (k_key_addr),
    .k_result_addr(k_result_addr)
  );

  for (genvar i = 0; i < P; i++) begin : g_kernel
    search_kernel #(.KMAX(KMAX), .MAX_BATCH(MAX_BATCH)) u_kernel (
      .clk         (clk),
      .rst         (rst),
      .start       (start && !running),
      .root_addr   (root_addr),
      .key_addr    (k_key_addr[i]),
      .result_addr (k_result_addr[i]),
      .num_keys    (k_num[i]),
      .busy        (k_busy[i]),
      .done        (k_done[i]),
      .stat_nodes  (stat_nodes[i]),
      .stat_levels (stat_levels[i]),
      .stat_cycles (stat_cycles[i]),
      .rd_req_valid(rd_req_valid[i]),
      .rd_req_ready(rd_req_ready[i]),
      .rd_req      (rd_req[i]),
      .rd_valid    (rd_valid[i]),
      .rd_ready    (rd_ready[i]),
      .rd_data     (rd_data[i]),
      .wr_req_valid(wr_req_valid[i]),
      .wr_req_ready(wr_req_ready[i]),
      .wr_req      (wr_req[i]),
      .wr_valid    (wr_valid[i]),
      .wr_ready    (wr_ready[i]),
      .wr_data     (wr_data[i]),
      .wr_strb     (wr_strb[i]),
      .wr_last     (wr_last[i]),
      .wr_done     (wr_done[i])
    );
  end

  assign busy = running;

  always_ff @(posedge clk) begin
    if (rst) begin
      running  <= 1'b0;
      finished <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          running  <= 1'b1;
          finished <= '0;
        end
      end else if ((finished | k_done) == '1) begin
        running  <= 1'b0;
        done     <= 1'b1;
        finished <= '0;
      end else begin
        finished <= finished | k_done;
      end
    end
  end

  // a kernel only works while the accelerator reports busy
  a_kernels_inside : assert property (@(posedge clk) disable iff (rst) (|k_busy) |-> running);
endmodule
