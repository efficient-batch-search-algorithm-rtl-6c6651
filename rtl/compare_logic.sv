// compare_logic: parallel comparison of one search key with a whole node.
//
// KMAX key_compare units compare the search key with every key slot of
// the loaded node at once; a priority_encoder reduces their leq/eq flags
// to the routing decision. From it the block selects the child address
// (inner node) or the data value (leaf) of the chosen slot. For a leaf,
// result is the data value on an exact match and NOT_FOUND (-1) otherwise;
// for an inner node, result is childAddress[index]. Combinational: one
// search key per clock when driven every cycle. The parallel structure
// follows the design; the result selection is this design's wiring of it.
module compare_logic
  import bpt_pkg::*;
#(
  parameter int unsigned KMAX  = 15,
  parameter int unsigned IDX_W = $clog2(KMAX + 1)
) (
  input  logic [KEY_W-1:0]           search_key,
  input  logic [KMAX-1:0][KEY_W-1:0] node_keys,
  input  logic [KMAX:0][ADDR_W-1:0]  node_ptrs,   // child addresses or data values
  input  logic [31:0]                slot_use,
  input  logic                       is_leaf,
  output logic                       found_leq,
  output logic                       found_eq,
  output logic [IDX_W-1:0]           index,
  output logic [ADDR_W-1:0]          result
);
  logic [KMAX-1:0] leq, eq;

  for (genvar i = 0; i < KMAX; i++) begin : g_slot
    key_compare #(.NBYTES(KEY_BYTES)) u_kc (
      .search_key(search_key),
      .node_key  (node_keys[i]),
      .leq       (leq[i]),
      .eq        (eq[i])
    );
  end

  priority_encoder #(.KMAX(KMAX), .IDX_W(IDX_W)) u_pe (
    .leq      (leq),
    .eq       (eq),
    .slot_use (slot_use),
    .found_leq(found_leq),
    .found_eq (found_eq),
    .index    (index)
  );

  always_comb begin
    if (is_leaf) result = found_eq ? node_ptrs[index] : NOT_FOUND;
    else         result = node_ptrs[index];
  end
endmodule
