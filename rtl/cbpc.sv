// cbpc: Cascading Bitwise Priority Comparison (CBPC) reduction.
//
// Reduces the NBYTES one-hot byte comparison results of a wide key
// comparison to two flags: leq (search key <= node key) and eq (search key
// == node key). The cascade walks from the most significant byte (index
// NBYTES-1) down: the first byte that is not equal decides the order, and
// if every byte is equal the keys are equal. It is combinational and
// resolves in one step. The design names the unit and its function; the
// cascade order (most significant byte = highest byte index, i.e. keys
// are little-endian 256-bit unsigned integers) is this design's choice.
module cbpc
  import bpt_pkg::*;
#(
  parameter int unsigned NBYTES = KEY_BYTES
) (
  input  cmp3_t [NBYTES-1:0] byte_res,
  output logic               leq,
  output logic               eq
);
  // lt_c[i]/eq_c[i]: result over bytes NBYTES-1 .. i
  logic [NBYTES:0] lt_c, eq_c;

  always_comb begin
    lt_c[NBYTES] = 1'b0;
    eq_c[NBYTES] = 1'b1;
    for (int i = NBYTES - 1; i >= 0; i--) begin
      lt_c[i] = lt_c[i+1] | (eq_c[i+1] & byte_res[i].lt);
      eq_c[i] = eq_c[i+1] & byte_res[i].eq;
    end
    leq = lt_c[0] | eq_c[0];
    eq  = eq_c[0];
  end
endmodule
