// tb_priority_encoder: random leq/eq vectors and slot counts for KMAX=15.
// The expected decision is the lowest slot below slot_use with leq set
// (index = slot_use when there is none), computed by a plain loop.
module tb_priority_encoder;
  localparam int KMAX = 15;
  logic [KMAX-1:0] leq, eq;
  logic [31:0] slot_use;
  logic found_leq, found_eq;
  logic [3:0] index;
  int checks = 0, failures = 0;

  priority_encoder #(.KMAX(KMAX)) dut (
    .leq(leq), .eq(eq), .slot_use(slot_use),
    .found_leq(found_leq), .found_eq(found_eq), .index(index));

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int e_idx; bit e_leq, e_eq;
      leq = KMAX'($urandom);
      eq  = KMAX'($urandom);
      if (t % 3 == 0) begin                 // sorted-node shape: leq is a suffix
        automatic int s = $urandom_range(0, KMAX);
        leq = ~((KMAX'(1) << s) - 1);
        if (s == KMAX) leq = '0;
      end
      slot_use = $urandom_range(0, KMAX);
      e_idx = slot_use; e_leq = 0; e_eq = 0;
      for (int i = 0; i < KMAX; i++)
        if (!e_leq && i < slot_use && leq[i]) begin
          e_leq = 1; e_eq = eq[i]; e_idx = i;
        end
      #1;
      checks++;
      if (found_leq != e_leq || found_eq != e_eq || int'(index) != e_idx) begin
        failures++;
        if (failures < 10)
          $display("FAIL leq=%b eq=%b su=%0d -> %b %b %0d exp %b %b %0d",
                   leq, eq, slot_use, found_leq, found_eq, index, e_leq, e_eq, e_idx);
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
