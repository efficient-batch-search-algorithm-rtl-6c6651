// result_writer: writes the batch's final results back to global memory.
//
// After the leaf level the result FIFO holds one 8-byte result per search
// key, in key order. addr must be 8-byte aligned (an assertion checks
// it); with f = addr[4:3], the 8-byte lane of the first result within
// its 32-byte beat, the writer issues a single burst write of
// ceil((f+num)/4) beats starting at the beat that holds addr, pops the
// results from the FIFO one per cycle and packs them into the beats
// (result i goes to lane (f+i)%4 of beat (f+i)/4). In a first or last,
// partly filled beat only the lanes that hold results are enabled in
// wr_strb.
// After the last beat it waits for the write response (wr_done) and
// pulses done. num = 0 finishes at once without touching memory.
// Burst writes of the results follow the design; the packing, the strobe
// and the port protocol are this design's choices.
module result_writer
  import bpt_pkg::*;
#(
  parameter int unsigned MAX_BATCH = 1000,
  parameter int unsigned CNT_BITS  = $clog2(MAX_BATCH + 1)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  start,
  input  logic [ADDR_W-1:0]     addr,
  input  logic [CNT_BITS-1:0]   num,
  output logic                  busy,
  output logic                  done,
  // result FIFO read side (the 8-byte result field of the head entry)
  input  logic [DATA_W-1:0]     fifo_data,
  input  logic                  fifo_empty,
  output logic                  fifo_pop,
  // memory write port
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
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_FILL, S_SEND, S_RESP} state_t;
  state_t state;

  logic [CNT_BITS-1:0] left;     // results still to pop
  logic [1:0]          lane;
  logic [ADDR_W-4:0]   addr_q;   // result address in 8-byte words
  logic [CNT_BITS-1:0] num_q;

  assign busy         = (state != S_IDLE);
  assign wr_req_valid = (state == S_REQ);
  assign wr_req.addr  = {addr_q[ADDR_W-4:2], 5'b0};
  assign wr_req.len   = LEN_W'((32'(addr_q[1:0]) + 32'(num_q) + 32'd3) / 32'd4);
  assign wr_valid     = (state == S_SEND);
  assign wr_last      = (state == S_SEND) && (left == 0);
  assign fifo_pop     = (state == S_FILL) && !fifo_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      left  <= '0;
      lane  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          addr_q <= addr[ADDR_W-1:3];
          num_q  <= num;
          left   <= num;
          if (num == 0) done  <= 1'b1;
          else          state <= S_REQ;
        end
        S_REQ: if (wr_req_ready) begin
          lane    <= addr_q[1:0];
          wr_strb <= '0;
          state   <= S_FILL;
        end
        S_FILL: if (!fifo_empty) begin
          wr_data[64 * lane +: 64]  <= fifo_data;
          wr_strb[8 * lane +: 8]    <= '1;
          lane <= lane + 1'b1;
          left <= left - 1'b1;
          if (lane == 2'd3 || left == 1) state <= S_SEND;
        end
        S_SEND: if (wr_ready) begin
          lane    <= '0;
          wr_strb <= '0;
          state   <= (left == 0) ? S_RESP : S_FILL;
        end
        S_RESP: if (wr_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_addr_aligned : assert property (@(posedge clk) disable iff (rst)
    (state == S_IDLE && start) |-> (addr[2:0] == 3'b000));
endmodule
