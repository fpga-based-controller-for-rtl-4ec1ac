// tb_seg7_decoder: self-checking testbench of the seven-segment decoder.
//
// Checks every digit against an independent table of which segments each
// glyph lights (written as segment letters, not as bit patterns), in both
// polarities and with the decimal point on and off. It also checks the
// printed values of the paper's waveforms: active low, "2" gives 36 and
// "A" with the point lit gives 8; active high, "0", "1", "4", "5" give 63, 6,
// 102, 109.
module tb_seg7_decoder;
  logic [3:0] d;
  logic       dp;
  logic [7:0] s_low, s_high;

  int checks = 0, failures = 0;

  seg7_decoder dut_low (.d(d), .dp(dp), .s(s_low));
  seg7_decoder #(.ACTIVE_LOW(1'b0)) dut_high (.d(d), .dp(dp), .s(s_high));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Lit segments of each hexadecimal glyph.
  function automatic string lit(int v);
    case (v)
      0: return "abcdef";   1: return "bc";      2: return "abdeg";
      3: return "abcdg";    4: return "bcfg";    5: return "acdfg";
      6: return "acdefg";   7: return "abc";     8: return "abcdefg";
      9: return "abcdfg";   10: return "abcefg"; 11: return "cdefg";
      12: return "adef";    13: return "bcdeg";  14: return "adefg";
      default: return "aefg";
    endcase
  endfunction

  function automatic logic [6:0] segs(string l);
    logic [6:0] r = '0;
    foreach (l[i]) r[l[i] - "a"] = 1'b1;
    return r;
  endfunction

  initial begin
    for (int v = 0; v < 16; v++) begin
      for (int p = 0; p < 2; p++) begin
        d = 4'(v);
        dp = p[0];
        #1;
        check(s_high == {dp, segs(lit(v))}, $sformatf("active high %0d dp %0d: %b", v, p, s_high));
        check(s_low == ~{dp, segs(lit(v))}, $sformatf("active low %0d dp %0d: %b", v, p, s_low));
      end
    end
    // Printed waveform values.
    d = 4'd2;  dp = 1'b1; #1; check(s_low == 8'd36,  "d=2, dp=1 gives 36");
    d = 4'd2;  dp = 1'b0; #1; check(s_low == 8'd164, "d=2, dp=0 gives 164");
    d = 4'd10; dp = 1'b1; #1; check(s_low == 8'd8,   "d=10, dp=1 gives 8");
    d = 4'd10; dp = 1'b0; #1; check(s_low == 8'd136, "d=10, dp=0 gives 136");
    dp = 1'b0;
    d = 4'd0; #1; check(s_high[6:0] == 7'd63,  "0 gives 63");
    d = 4'd1; #1; check(s_high[6:0] == 7'd6,   "1 gives 6");
    d = 4'd4; #1; check(s_high[6:0] == 7'd102, "4 gives 102");
    d = 4'd5; #1; check(s_high[6:0] == 7'd109, "5 gives 109");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
