// byte_compare: one 8-bit comparator of the key comparison array.
//
// Compares byte a (from the search key) with byte b (from a node key) as
// unsigned numbers and raises exactly one of lt, eq, gt (a<b, a==b, a>b).
// Purely combinational. The three-output form is the one the design
// describes; the unsigned interpretation of a byte is this design's choice.
module byte_compare
  import bpt_pkg::*;
(
  input  logic [7:0] a,
  input  logic [7:0] b,
  output cmp3_t      res
);
  always_comb begin
    res.lt = (a < b);
    res.eq = (a == b);
    res.gt = (a > b);
  end
endmodule
