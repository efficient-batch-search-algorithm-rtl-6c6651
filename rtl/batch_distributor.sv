// batch_distributor: splits one sorted batch evenly among P search kernels.
//
// The batch of num_keys sorted search keys lies at key_addr; its results
// go to result_addr. Kernel i gets a contiguous slice: with
// base = num_keys / P and rem = num_keys % P, it takes base + (i < rem)
// keys starting at key index off_i = i*base + min(i, rem), reads them at
// key_addr + 32*off_i and writes its results at result_addr + 8*off_i,
// all in its own memory bank. Each slice is itself sorted, so each kernel
// runs the unchanged level-wise search. Combinational. The even split
// into contiguous slices follows the design; the remainder rule and the
// address arithmetic are this design's choices.
module batch_distributor
  import bpt_pkg::*;
#(
  parameter int unsigned P          = 4,
  parameter int unsigned MAX_BATCH  = 1000,
  parameter int unsigned TOT_BITS   = $clog2(P * MAX_BATCH + 1),
  parameter int unsigned CNT_BITS   = $clog2(MAX_BATCH + 1)
) (
  input  logic [TOT_BITS-1:0]             num_keys,
  input  logic [ADDR_W-1:0]               key_addr,
  input  logic [ADDR_W-1:0]               result_addr,
  output logic [P-1:0][CNT_BITS-1:0]      k_num,
  output logic [P-1:0][ADDR_W-1:0]        k_key_addr,
  output logic [P-1:0][ADDR_W-1:0]        k_result_addr
);
  logic [TOT_BITS-1:0] base, rem;
  logic [TOT_BITS-1:0] off [P];

  always_comb begin
    base = num_keys / TOT_BITS'(P);
    rem  = num_keys % TOT_BITS'(P);
    for (int i = 0; i < P; i++) begin
      off[i]           = TOT_BITS'(i) * base + ((TOT_BITS'(i) < rem) ? TOT_BITS'(i) : rem);
      k_num[i]         = CNT_BITS'(base + ((TOT_BITS'(i) < rem) ? 1 : 0));
      k_key_addr[i]    = key_addr + (ADDR_W'(off[i]) << 5);
      k_result_addr[i] = result_addr + (ADDR_W'(off[i]) << 3);
    end
  end
endmodule
