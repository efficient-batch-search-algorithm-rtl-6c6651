// tb_cbpc: tests the CBPC reduction. Random key pairs, many sharing long
// equal prefixes from the most significant byte down, are turned into
// per-byte one-hot results by the testbench itself; leq and eq must equal
// a 256-bit unsigned comparison of the two keys.
module tb_cbpc;
  import bpt_pkg::*;
  cmp3_t [KEY_BYTES-1:0] byte_res;
  logic leq, eq;
  logic [KEY_W-1:0] a, b;
  int checks = 0, failures = 0;

  cbpc dut (.byte_res(byte_res), .leq(leq), .eq(eq));

  function automatic logic [KEY_W-1:0] rnd256();
    logic [KEY_W-1:0] r;
    for (int w = 0; w < 8; w++) r[32*w +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int p;
      a = rnd256();
      b = rnd256();
      p = $urandom_range(0, 33);           // bytes of shared prefix (33: equal)
      for (int k = 0; k < 32; k++)
        if (k < p) b[8*(31-k) +: 8] = a[8*(31-k) +: 8];
      if ($urandom_range(0, 3) == 0) begin  // single-bit difference in one byte
        b = a;
        b[$urandom_range(0, 255)] ^= 1'b1;
      end
      for (int k = 0; k < 32; k++) begin
        byte_res[k].lt = a[8*k +: 8] <  b[8*k +: 8];
        byte_res[k].eq = a[8*k +: 8] == b[8*k +: 8];
        byte_res[k].gt = a[8*k +: 8] >  b[8*k +: 8];
      end
      #1;
      checks++;
      if (leq != (a <= b) || eq != (a == b)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h leq=%b eq=%b", a, b, leq, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
