// search_key_buffer: on-chip buffer holding the current batch of search keys.
//
// A simple dual-port memory of DEPTH 32-byte entries: one write port used
// while the batch is preloaded from global memory, one read port used by
// the comparison during every tree level. Reads are synchronous: rd_data
// shows the entry addressed by rd_addr one clock after it is presented,
// as a block RAM does. No reset; the contents are only read after they
// have been written. DEPTH = 1000 entries follows the design; the port
// arrangement and the one-cycle read latency are this design's choices.
module search_key_buffer
  import bpt_pkg::*;
#(
  parameter int unsigned DEPTH  = 1000,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [KEY_W-1:0]  wr_data,
  input  logic [AW-1:0]     rd_addr,
  output logic [KEY_W-1:0]  rd_data
);
  logic [KEY_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
