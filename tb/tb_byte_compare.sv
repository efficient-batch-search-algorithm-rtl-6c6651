// tb_byte_compare: exhaustive test of the 8-bit comparator. Every pair
// (a, b) of bytes is applied; lt/eq/gt must match a<b, a==b, a>b and be
// one-hot.
module tb_byte_compare;
  import bpt_pkg::*;
  logic [7:0] a, b;
  cmp3_t      res;
  int checks = 0, failures = 0;

  byte_compare dut (.a(a), .b(b), .res(res));

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        checks++;
        if (res.lt != (i < j) || res.eq != (i == j) || res.gt != (i > j) ||
            (32'(res.lt) + 32'(res.eq) + 32'(res.gt)) != 1) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d res=%b", i, j, res);
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
