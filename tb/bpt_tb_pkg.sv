// bpt_tb_pkg: key and data generators shared by the testbenches.
//
// Tree entry i (i = 0 .. n-1) has the 32-byte key key_of(i) and the data
// value data_of(i). The top 8 bytes of a key (bytes 24..31, most
// significant) hold 3*i+1, so entries sort by i; the lower 24 bytes are a
// hash of i, so every byte of a key matters for equality. A search key
// made by probe_key() may be an entry's key, a key with the same top bytes
// but different lower bytes, or a key that falls between two entries;
// expected() tells, independently of any tree, which result it must get.
package bpt_tb_pkg;

  function automatic logic [63:0] h64(longint unsigned x, longint unsigned salt);
    logic [63:0] z;
    z = x * 64'h9E3779B97F4A7C15 + salt * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  function automatic logic [255:0] key_of(longint unsigned i);
    return {64'(3 * i + 1), h64(i, 1), h64(i, 2), h64(i, 3)};
  endfunction

  function automatic logic [63:0] data_of(longint unsigned i);
    return {1'b0, h64(i, 7)[62:0]};
  endfunction

  // kind 0: key of entry i; 1: same top bytes, other lower bytes;
  // 2: just above entry i; 3: just below entry i.
  function automatic logic [255:0] probe_key(longint unsigned i, int kind, int unsigned r);
    case (kind)
      0:       return key_of(i);
      1:       return {64'(3 * i + 1), h64(i, 1), h64(i, 2), h64(i, 3) ^ 64'(r | 1)};
      2:       return {64'(3 * i + 2), h64(i, 5), 128'(r)};
      default: return {64'(3 * i), h64(i, 6), 128'(r)};
    endcase
  endfunction

  function automatic logic [63:0] expected(logic [255:0] key, longint unsigned n);
    longint unsigned t, i;
    t = key[255:192];
    if (t % 3 != 1) return '1;
    i = (t - 1) / 3;
    if (i >= n) return '1;
    if (key != key_of(i)) return '1;
    return data_of(i);
  endfunction

endpackage
