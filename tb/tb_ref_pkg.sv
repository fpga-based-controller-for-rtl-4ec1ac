// tb_ref_pkg: reference functions shared by the system testbenches, written
// independently of the RTL: the lit segments of each hexadecimal glyph as
// letters, the GP2D12 distance law in floating point, and the L293 truth
// table as pin strings.
package tb_ref_pkg;

  // Active-high segments {g..a} of a hexadecimal glyph.
  function automatic logic [6:0] seg_ref(int v);
    string l;
    logic [6:0] r = '0;
    case (v)
      0: l = "abcdef";   1: l = "bc";      2: l = "abdeg";   3: l = "abcdg";
      4: l = "bcfg";     5: l = "acdfg";   6: l = "acdefg";  7: l = "abc";
      8: l = "abcdefg";  9: l = "abcdfg";  10: l = "abcefg"; 11: l = "cdefg";
      12: l = "adef";    13: l = "bcdeg";  14: l = "adefg";  default: l = "aefg";
    endcase
    foreach (l[i]) r[l[i] - "a"] = 1'b1;
    return r;
  endfunction

  // Distance in cm for an 8-bit code: V = code * 5 / 256, L = 24.8 / (V - 0.11).
  function automatic int law_cm(int code);
    real v, l;
    v = code * 5.0 / 256.0;
    if (v <= 0.11) return 80;
    l = 24.8 / (v - 0.11);
    if (l > 80.0) return 80;
    if (l < 10.0) return 10;
    return int'($floor(l + 0.5));
  endfunction

  // L293 pins ENA ENB 1A 2A 3A 4A for command 0..3 (Forward, Reverse, Left, Right).
  function automatic logic [5:0] l293_ref(int cmd, logic pwm);
    string row;
    logic [5:0] r;
    case (cmd)
      0: row = "111010";
      1: row = "110101";
      2: row = "010010";
      default: row = "101000";
    endcase
    foreach (row[i]) r[5 - i] = (row[i] == "1");
    r[5] &= pwm;
    r[4] &= pwm;
    return r;
  endfunction

endpackage
