// tb_key_compare: tests the 32-byte key comparison (byte comparators plus
// CBPC) against a 256-bit unsigned comparison, using random keys, keys
// with shared prefixes, single-bit differences and equal keys.
module tb_key_compare;
  import bpt_pkg::*;
  logic [KEY_W-1:0] a, b;
  logic leq, eq;
  int checks = 0, failures = 0;

  key_compare dut (.search_key(a), .node_key(b), .leq(leq), .eq(eq));

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
      p = $urandom_range(0, 33);
      for (int k = 0; k < 32; k++)
        if (k < p) b[8*(31-k) +: 8] = a[8*(31-k) +: 8];
      if ($urandom_range(0, 3) == 0) begin
        b = a;
        b[$urandom_range(0, 255)] ^= 1'b1;
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
