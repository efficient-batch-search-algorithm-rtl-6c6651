// bpt_pkg: constants and types shared by the B+ tree batch search engine.
//
// Search keys and node keys are 32 bytes wide, child addresses and leaf
// data values 8 bytes, key counts 4 bytes, and global memory is moved in
// 32-byte chunks; these sizes follow the node layout of the design. A node
// of a tree of order m occupies 40*m bytes: a 32-byte header (slotUse and
// depth, 4 bytes each, then 24 bytes of padding), k_max = m-1 keys of 32
// bytes, and k_max+1 child addresses of 8 bytes (in a leaf: k_max data
// values and 8 unused bytes). Bytes are numbered little-endian inside a
// 32-byte beat: byte b of a beat is bits [8b+7:8b].
//
// The encoding of one byte comparison (one-hot LT/EQ/GT), the memory
// channel structs and the "not found" code (all ones, i.e. -1) are this
// design's own choices where the layout leaves them open.
package bpt_pkg;

  localparam int unsigned KEY_BYTES  = 32;               // 32-byte search / node keys
  localparam int unsigned KEY_W      = 8 * KEY_BYTES;    // 256
  localparam int unsigned BEAT_BYTES = 32;               // memory chunk size
  localparam int unsigned BEAT_W     = 8 * BEAT_BYTES;   // 256
  localparam int unsigned ADDR_W     = 64;               // 8-byte child addresses
  localparam int unsigned DATA_W     = 64;               // 8-byte leaf data values
  localparam int unsigned CNT_W      = 32;               // 4-byte key counts
  localparam int unsigned LEN_W      = 16;               // burst length field (beats)

  // Result of a leaf search that finds no matching key.
  localparam logic [DATA_W-1:0] NOT_FOUND = '1;

  // One-hot result of an 8-bit comparison: exactly one bit is set.
  typedef struct packed {
    logic lt;
    logic eq;
    logic gt;
  } cmp3_t;

  // An entry of the result FIFO. On inner levels addr is a child node
  // address and cnt the number of search keys routed to it; after the leaf
  // level addr carries the 8-byte result and cnt is unused.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [CNT_W-1:0]  cnt;
  } fifo_entry_t;

  // Burst read/write requests on a kernel's memory port; len is the
  // number of 32-byte beats.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;
  } mem_req_t;

  // Number of 32-byte beats in a node of order m (node size 40*m bytes).
  function automatic int unsigned node_beats(int unsigned kmax);
    return 1 + kmax + (kmax + 1 + 3) / 4;
  endfunction

endpackage
