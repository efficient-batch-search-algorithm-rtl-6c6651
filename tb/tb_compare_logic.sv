// tb_compare_logic: a node of KMAX=15 sorted keys (random slotUse, junk in
// the unused slots) is compared with random search keys that hit, miss,
// or fall between node keys. For an inner node the expected child is the
// first used slot whose key is >= the search key (slotUse if none); for a
// leaf the expected result is the data of an equal key or -1.
module tb_compare_logic;
  import bpt_pkg::*;
  import bpt_tb_pkg::*;
  localparam int KMAX = 15;
  logic [KEY_W-1:0]           skey;
  logic [KMAX-1:0][KEY_W-1:0] nkeys;
  logic [KMAX:0][ADDR_W-1:0]  nptrs;
  logic [31:0]                slot_use;
  logic                       is_leaf;
  logic                       f_leq, f_eq;
  logic [3:0]                 index;
  logic [ADDR_W-1:0]          result;
  int checks = 0, failures = 0;

  compare_logic #(.KMAX(KMAX)) dut (
    .search_key(skey), .node_keys(nkeys), .node_ptrs(nptrs), .slot_use(slot_use),
    .is_leaf(is_leaf), .found_leq(f_leq), .found_eq(f_eq), .index(index), .result(result));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic longint unsigned base = $urandom_range(0, 100000);
      int e_idx; logic [63:0] e_res;
      slot_use = $urandom_range(1, KMAX);
      is_leaf  = $urandom_range(0, 1);
      for (int s = 0; s < KMAX; s++)
        nkeys[s] = (s < slot_use) ? key_of(base + 2 * s) : {h64(t, s), h64(t, s + 1), h64(t, s + 2), h64(t, s + 3)};
      for (int c = 0; c <= KMAX; c++) nptrs[c] = h64(t, 50 + c);
      for (int q = 0; q < 8; q++) begin
        automatic longint unsigned i = base + $urandom_range(0, 2 * KMAX + 1);
        skey = probe_key(i, $urandom_range(0, 3), $urandom);
        e_idx = slot_use;
        for (int s = KMAX - 1; s >= 0; s--) if (s < slot_use && skey <= nkeys[s]) e_idx = s;
        if (is_leaf) e_res = (e_idx < slot_use && skey == nkeys[e_idx]) ? nptrs[e_idx] : '1;
        else         e_res = nptrs[e_idx];
        #1;
        checks++;
        if (result != e_res || int'(index) != e_idx) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d leaf=%b su=%0d idx=%0d exp %0d", t, is_leaf, slot_use, index, e_idx);
        end
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
