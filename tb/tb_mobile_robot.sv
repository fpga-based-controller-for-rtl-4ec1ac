// tb_mobile_robot: end-to-end testbench of the robot controller.
//
// Two controllers run side by side, each with its own ADC0809 model, both
// converting the same sensor code: A shows the raw reading in hexadecimal
// (DISPLAY_DISTANCE = 0), B the distance in centimetres (DISPLAY_DISTANCE = 1).
// A's EOC timeout is shortened to 400 ns so the converter that never drops EOC
// can be tested in reasonable time. For each sensor code the testbench checks
// both displays against reference segment tables, A's PWM duty over a full
// period, and, on every clock, that the L293 pins equal the truth-table row of
// the previous cycle's command with the enables gated by the previous cycle's
// pwm_out. It then rewrites one table entry of B through the calibration port,
// and runs A with the fast converter. Each mechanism is counted: normal
// conversions, timeout conversions, raw and distance display, a PWM duty
// change, PWM gating of the enables, each of the four movements, and a
// calibration write; one that never happened counts as a failure.
module tb_mobile_robot;
  import robot_pkg::*;
  import tb_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [7:0]  vin [8];
  logic        fast_a = 1'b0;
  motion_cmd_e cmd = MOVE_FORWARD;
  logic        cal_we = 1'b0;
  logic [7:0]  cal_addr = 8'd0, cal_data = 8'd0;

  // controller A (raw display)
  logic [7:0] adc_a;
  logic       eoc_a, ale_a, start_a, oe_a, pwm_a;
  logic [2:0] addr_a;
  logic [6:0] s1_a, s2_a;
  l293_t      l293_a;
  // controller B (distance display)
  logic [7:0] adc_b;
  logic       eoc_b, ale_b, start_b, oe_b, pwm_b;
  logic [2:0] addr_b;
  logic [6:0] s1_b, s2_b;
  l293_t      l293_b;

  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  adc0809_model u_adc_a (.vin(vin), .addr(addr_a), .ale(ale_a), .start(start_a),
                         .oe(oe_a), .fast(fast_a), .eoc(eoc_a), .dout(adc_a));
  adc0809_model u_adc_b (.vin(vin), .addr(addr_b), .ale(ale_b), .start(start_b),
                         .oe(oe_b), .fast(1'b0), .eoc(eoc_b), .dout(adc_b));

  mobile_robot #(.EOC_TIMEOUT_NS(400), .DISPLAY_DISTANCE(1'b0)) dut_a (
    .glclk(clk), .rst_n(rst_n), .adc_in(adc_a), .adc_eoc(eoc_a), .addr(addr_a),
    .adc_ale(ale_a), .adc_start(start_a), .adc_oe(oe_a),
    .seg_grp1(s1_a), .seg_grp2(s2_a), .pwm_out(pwm_a), .motion_cmd(cmd),
    .l293(l293_a), .cal_we(1'b0), .cal_addr(8'd0), .cal_data(8'd0));

  mobile_robot #(.DISPLAY_DISTANCE(1'b1)) dut_b (
    .glclk(clk), .rst_n(rst_n), .adc_in(adc_b), .adc_eoc(eoc_b), .addr(addr_b),
    .adc_ale(ale_b), .adc_start(start_b), .adc_oe(oe_b),
    .seg_grp1(s1_b), .seg_grp2(s2_b), .pwm_out(pwm_b), .motion_cmd(cmd),
    .l293(l293_b), .cal_we(cal_we), .cal_addr(cal_addr), .cal_data(cal_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Mechanism counters.
  int n_raw = 0, n_dist = 0, n_duty_change = 0, n_gate = 0, n_cal = 0;
  int n_move [4] = '{0, 0, 0, 0};
  int n_timeout_conv = 0;

  // L293 pins of both controllers against the previous cycle's inputs.
  // Inputs are sampled in the middle of the low clock phase, after any
  // change the testbench makes on the falling edge.
  motion_cmd_e cmd_q = MOVE_FORWARD;
  logic pwm_a_q = 1'b0, pwm_b_q = 1'b0, started = 1'b0;
  always @(negedge clk) begin
    #2;
    cmd_q   = cmd;
    pwm_a_q = pwm_a;
    pwm_b_q = pwm_b;
  end
  always @(posedge clk) begin
    #1;
    if (started) begin
      check(l293_a == l293_ref(int'(cmd_q), pwm_a_q), "L293 pins of A");
      check(l293_b == l293_ref(int'(cmd_q), pwm_b_q), "L293 pins of B");
      if (pwm_a_q && l293_ref(int'(cmd_q), 1'b1) != l293_ref(int'(cmd_q), 1'b0)) n_gate++;
      n_move[int'(cmd_q)]++;
    end
    started = rst_n;
  end

  // Wait until a new code has reached the outputs of both controllers: the
  // conversion that may be running, one complete one and a margin, then the
  // cycles from EOC to the display pins.
  task automatic settle();
    int ca, cb, guard;
    ca = u_adc_a.conversions;
    cb = u_adc_b.conversions;
    guard = 0;
    while ((u_adc_a.conversions < ca + 3 || u_adc_b.conversions < cb + 3) && guard < 50000) begin
      @(posedge clk);
      guard++;
    end
    // EOC synchroniser, OE time, table read and display register.
    repeat (40) @(posedge clk);
  endtask

  task automatic check_displays(input int code);
    int cm;
    check(s1_a == seg_ref(code / 16), $sformatf("A upper digit of %0d: %0d", code, s1_a));
    check(s2_a == seg_ref(code % 16), $sformatf("A lower digit of %0d: %0d", code, s2_a));
    n_raw++;
    cm = law_cm(code);
    check(s1_b == seg_ref(cm / 10), $sformatf("B tens of %0d cm: %0d", cm, s1_b));
    check(s2_b == seg_ref(cm % 10), $sformatf("B ones of %0d cm: %0d", cm, s2_b));
    n_dist++;
  endtask

  // pwm_out of A is high for code cycles out of 256.
  task automatic check_duty(input int code);
    int high = 0;
    repeat (256) @(posedge clk);   // let the period boundary pass
    for (int i = 0; i < 256; i++) begin
      @(posedge clk);
      if (pwm_a) high++;
    end
    check(high == code, $sformatf("A duty: %0d high of 256, expected %0d", high, code));
  endtask

  initial begin
    automatic int codes [8] = '{0, 20, 85, 255, 130, 47, 9, 200};
    int prev_code = -1;
    foreach (vin[i]) vin[i] = 8'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (codes[k]) begin
      @(negedge clk);
      vin[0] = 8'(codes[k]);
      cmd = motion_cmd_e'(k % 4);
      settle();
      check_displays(codes[k]);
      check_duty(codes[k]);
      if (prev_code >= 0 && prev_code != codes[k]) n_duty_change++;
      prev_code = codes[k];
    end
    // Calibration: give code 150 of B the distance 42 cm.
    @(negedge clk);
    cal_we = 1'b1; cal_addr = 8'd150; cal_data = 8'h42;
    @(negedge clk);
    cal_we = 1'b0;
    vin[0] = 8'd150;
    settle();
    check(s1_b == seg_ref(4) && s2_b == seg_ref(2), "B shows the calibrated 42 cm");
    n_cal++;
    check(s1_a == seg_ref(9) && s2_a == seg_ref(6), "A shows 0x96 for code 150");
    // Converter that never drops EOC: A must carry on through its timeout.
    fast_a = 1'b1;
    vin[0] = 8'd61;
    begin
      int low_count, conv_count;
      low_count  = u_adc_a.eoc_low_seen;
      conv_count = u_adc_a.conversions;
      settle();
      check(u_adc_a.eoc_low_seen == low_count, "fast converter never dropped EOC");
      n_timeout_conv = u_adc_a.conversions - conv_count;
    end
    check(s1_a == seg_ref(3) && s2_a == seg_ref(13), "A shows 0x3D after timeout conversions");
    check(u_adc_a.short_pulses == 0 && u_adc_b.short_pulses == 0, "no START pulse under 100 ns");
    check(u_adc_a.overlapped == 0 && u_adc_b.overlapped == 0, "no START during a conversion");
    check(addr_a == 3'd0 && addr_b == 3'd0, "channel 0 addressed");
    // Every mechanism happened.
    $display("mechanisms: raw %0d distance %0d duty changes %0d gating %0d calibration %0d timeout %0d moves %0d %0d %0d %0d conversions A %0d B %0d",
             n_raw, n_dist, n_duty_change, n_gate, n_cal, n_timeout_conv,
             n_move[0], n_move[1], n_move[2], n_move[3], u_adc_a.conversions, u_adc_b.conversions);
    check(n_raw > 0, "raw display used");
    check(n_dist > 0, "distance display used");
    check(n_duty_change > 0, "PWM duty changed");
    check(n_gate > 0, "enables gated by PWM");
    check(n_cal > 0, "calibration write");
    check(n_timeout_conv > 0, "EOC timeout path");
    foreach (n_move[m]) check(n_move[m] > 0, $sformatf("movement %0d used", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20 * 400000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
