// key_compare: full-width comparison of a search key with one node key.
//
// NBYTES byte comparators work in parallel on corresponding bytes of the
// two keys; a CBPC unit reduces their results to leq (search <= node) and
// eq (search == node). Combinational. The structure (32 parallel 8-bit
// comparators feeding one CBPC) follows the design; keys are treated as
// little-endian unsigned integers (byte NBYTES-1 most significant).
module key_compare
  import bpt_pkg::*;
#(
  parameter int unsigned NBYTES = KEY_BYTES
) (
  input  logic [8*NBYTES-1:0] search_key,
  input  logic [8*NBYTES-1:0] node_key,
  output logic                leq,
  output logic                eq
);
  cmp3_t [NBYTES-1:0] byte_res;

  for (genvar b = 0; b < NBYTES; b++) begin : g_byte
    byte_compare u_cmp (
      .a  (search_key[8*b +: 8]),
      .b  (node_key[8*b +: 8]),
      .res(byte_res[b])
    );
  end

  cbpc #(.NBYTES(NBYTES)) u_cbpc (
    .byte_res(byte_res),
    .leq     (leq),
    .eq      (eq)
  );
endmodule
