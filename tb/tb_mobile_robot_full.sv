// tb_mobile_robot_full: the controller at its default parameters, replaying
// the full-system waveform of the design: the sensor code goes 0, 20, 85.
//
// Expected on the digit pins (active high {g..a}): "00" = 63, 63; "14" = 6,
// 102; "55" = 109, 109. The address stays 0, ALE and START pulses last at
// least 100 ns, and pwm_out is high for code cycles out of every 256. The
// robot is told to go forward, so the L293 pins must read 1x1010 with both
// enables following pwm_out one clock later.
module tb_mobile_robot_full;
  import robot_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [7:0]  vin [8];
  logic [7:0]  adc_in;
  logic        eoc, ale, start, oe, pwm;
  logic [2:0]  addr;
  logic [6:0]  seg1, seg2;
  l293_t       l293;

  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  adc0809_model u_adc (.vin(vin), .addr(addr), .ale(ale), .start(start), .oe(oe),
                       .fast(1'b0), .eoc(eoc), .dout(adc_in));

  mobile_robot dut (
    .glclk(clk), .rst_n(rst_n), .adc_in(adc_in), .adc_eoc(eoc), .addr(addr),
    .adc_ale(ale), .adc_start(start), .adc_oe(oe), .seg_grp1(seg1), .seg_grp2(seg2),
    .pwm_out(pwm), .motion_cmd(MOVE_FORWARD), .l293(l293),
    .cal_we(1'b0), .cal_addr(8'd0), .cal_data(8'd0));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Enables follow pwm_out one clock later; direction pins are 1A=1 2A=0 3A=1 4A=0.
  logic pwm_q = 1'b0;
  always @(negedge clk) pwm_q <= pwm;
  always @(posedge clk) if (rst_n) begin
    #1 check(l293 == {pwm_q, pwm_q, 4'b1010}, "forward pins");
  end

  initial begin
    automatic int codes [3] = '{0, 20, 85};
    automatic int exp1 [3]  = '{63, 6, 109};
    automatic int exp2 [3]  = '{63, 102, 109};
    foreach (vin[i]) vin[i] = 8'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (codes[k]) begin
      int c0, high;
      vin[0] = 8'(codes[k]);
      c0 = u_adc.conversions;
      while (u_adc.conversions < c0 + 2) @(posedge clk);
      repeat (40) @(posedge clk);
      check(seg1 == 7'(exp1[k]), $sformatf("code %0d: seg_grp1 %0d expected %0d", codes[k], seg1, exp1[k]));
      check(seg2 == 7'(exp2[k]), $sformatf("code %0d: seg_grp2 %0d expected %0d", codes[k], seg2, exp2[k]));
      check(addr == 3'd0, "address 0");
      repeat (256) @(posedge clk);
      high = 0;
      for (int i = 0; i < 256; i++) begin
        @(posedge clk);
        if (pwm) high++;
      end
      check(high == codes[k], $sformatf("code %0d: pwm high %0d of 256", codes[k], high));
    end
    check(u_adc.short_pulses == 0, "START at least 100 ns");
    check(u_adc.overlapped == 0, "no START during a conversion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20 * 100000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
