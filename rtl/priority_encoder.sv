// priority_encoder: picks the routing slot of a search key within a node.
//
// Inputs are the k_max per-slot outcomes of the key comparisons (leq[i]:
// search key <= node key i, eq[i]: search key == node key i) and the
// node's slotUse. Only the first slot_use slots hold keys. The encoder
// selects the lowest valid slot whose leq is set: found_leq is then true,
// index is that slot and found_eq tells whether that key is an exact
// match. If no valid slot has leq set the key is larger than every key in
// the node; index is then slot_use (the rightmost child) and both flags
// are false. Combinational. The LEQ/EQ outputs follow the design; the
// slot index output and the masking by slotUse are this design's choices
// (the routing rule matches a lower-bound search: equal keys go left).
module priority_encoder #(
  parameter int unsigned KMAX  = 15,
  parameter int unsigned IDX_W = $clog2(KMAX + 1)
) (
  input  logic [KMAX-1:0]  leq,
  input  logic [KMAX-1:0]  eq,
  input  logic [31:0]      slot_use,
  output logic             found_leq,
  output logic             found_eq,
  output logic [IDX_W-1:0] index
);
  logic [KMAX-1:0] valid;

  always_comb begin
    for (int i = 0; i < KMAX; i++) valid[i] = (32'(i) < slot_use);
    found_leq = 1'b0;
    found_eq  = 1'b0;
    index     = (slot_use > 32'(KMAX)) ? IDX_W'(KMAX) : IDX_W'(slot_use);
    for (int i = KMAX - 1; i >= 0; i--) begin
      if (valid[i] && leq[i]) begin
        found_leq = 1'b1;
        found_eq  = eq[i];
        index     = IDX_W'(i);
      end
    end
  end
endmodule
