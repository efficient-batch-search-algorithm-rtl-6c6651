// node_loader: fetches one B+ tree node from global memory ("Load Node").
//
// On start it issues one burst read of NB = 1 + KMAX + ceil((KMAX+1)/4)
// 32-byte beats (the 40*m-byte node of a tree of order m = KMAX+1) at
// byte address addr, and stores the beats in a node buffer of registers.
// The buffer is decoded by wiring alone into the node fields:
//   beat 0            : slotUse (bytes 0-3), depth (bytes 4-7), padding
//   beats 1..KMAX     : key[0..KMAX-1], 32 bytes each
//   beats KMAX+1..    : childAddress[0..KMAX] (leaf: data[0..KMAX-1]),
//                       four 8-byte values per beat, lowest bytes first
// done pulses for one cycle when the last beat has been stored; the
// fields stay valid until the next start. The handshake on the memory
// port is valid/ready on the request and on the read data. The node
// layout and the burst read follow the design; the byte order inside a
// beat and the port protocol are this design's choices.
module node_loader
  import bpt_pkg::*;
#(
  parameter int unsigned KMAX = 15,
  parameter int unsigned NB   = node_beats(KMAX)
) (
  input  logic                       clk,
  input  logic                       rst,
  // command
  input  logic                       start,
  input  logic [ADDR_W-1:0]          addr,
  output logic                       busy,
  output logic                       done,
  // memory read port
  output logic                       rd_req_valid,
  input  logic                       rd_req_ready,
  output mem_req_t                   rd_req,
  input  logic                       rd_valid,
  output logic                       rd_ready,
  input  logic [BEAT_W-1:0]          rd_data,
  // decoded node
  output logic [31:0]                slot_use,
  output logic [31:0]                depth,
  output logic [KMAX-1:0][KEY_W-1:0] keys,
  output logic [KMAX:0][ADDR_W-1:0]  ptrs
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA} state_t;
  state_t state;

  logic [NB-1:0][BEAT_W-1:0] buffer;
  logic [$clog2(NB+1)-1:0]   beat;
  logic [ADDR_W-1:0]         addr_q;

  assign busy         = (state != S_IDLE);
  assign rd_req_valid = (state == S_REQ);
  assign rd_req.addr  = addr_q;
  assign rd_req.len   = LEN_W'(NB);
  assign rd_ready     = (state == S_DATA);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      beat  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          addr_q <= addr;
          state  <= S_REQ;
        end
        S_REQ: if (rd_req_ready) begin
          beat  <= '0;
          state <= S_DATA;
        end
        S_DATA: if (rd_valid) begin
          buffer[beat] <= rd_data;
          beat         <= beat + 1'b1;
          if (beat == $bits(beat)'(NB - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Field decode of the node buffer.
  always_comb begin
    slot_use = buffer[0][31:0];
    depth    = buffer[0][63:32];
    for (int k = 0; k < KMAX; k++) keys[k] = buffer[1 + k];
    for (int c = 0; c <= KMAX; c++)
      ptrs[c] = buffer[1 + KMAX + c / 4][64 * (c % 4) +: 64];
  end
endmodule
