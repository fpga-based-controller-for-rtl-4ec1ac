// tb_pwm_generate: self-checking testbench of the PWM generator.
//
// For a list of duty values, including the 0, 80 and 85 of the paper's PWM
// waveform and the extremes 1 and 255, the testbench lets the new duty take
// effect, then samples pwm_out over whole 256-cycle periods and checks the
// number of high cycles (equal to the duty), that the high time is one
// unbroken run starting at the period boundary, and that the period is 256
// cycles. A second instance with PRESCALE = 3 checks the stretched period.
module tb_pwm_generate;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic [7:0] pwm_in = 8'd0;
  logic       pwm_out, pwm_out3;

  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  pwm_generate dut (.clk(clk), .rst_n(rst_n), .pwm_in(pwm_in), .pwm_out(pwm_out));
  pwm_generate #(.WIDTH(8), .PRESCALE(3)) dut3 (
    .clk(clk), .rst_n(rst_n), .pwm_in(pwm_in), .pwm_out(pwm_out3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Measure one period of pwm_out starting at its rising edge (or, for a
  // duty of 0, a plain window of 256 cycles).
  task automatic measure(input int duty);
    int high, rises;
    high = 0;
    rises = 0;
    if (duty != 0) @(posedge clk iff pwm_out);
    for (int i = 0; i < 256; i++) begin
      logic prev;
      prev = pwm_out;
      @(posedge clk);
      if (pwm_out) high++;
      if (pwm_out && !prev) rises++;
    end
    check(high == duty, $sformatf("duty %0d: %0d high cycles of 256", duty, high));
    check(rises <= 1, $sformatf("duty %0d: one pulse per period (%0d rises)", duty, rises));
  endtask

  initial begin
    automatic int duties [7] = '{0, 80, 85, 1, 255, 128, 0};
    repeat (2) @(posedge clk);
    check(pwm_out == 1'b0, "low in reset");
    rst_n = 1'b1;
    foreach (duties[k]) begin
      pwm_in = 8'(duties[k]);
      // The new duty is taken at the next period boundary.
      repeat (2 * 256) @(posedge clk);
      measure(duties[k]);
      measure(duties[k]);
    end
    // Period: two consecutive rising edges 256 cycles apart.
    begin
      int t0, t1;
      pwm_in = 8'd40;
      repeat (2 * 256) @(posedge clk);
      @(posedge pwm_out) t0 = $time;
      @(posedge pwm_out) t1 = $time;
      check((t1 - t0) / 20 == 256, $sformatf("period %0d cycles, expected 256", (t1 - t0) / 20));
      // Prescaled instance: period 3 * 256, high 3 * 40 cycles.
      repeat (3 * 256) @(posedge clk);
      @(posedge pwm_out3) t0 = $time;
      @(negedge pwm_out3) t1 = $time;
      check((t1 - t0) / 20 == 120, $sformatf("prescaled high time %0d, expected 120", (t1 - t0) / 20));
      t0 = t1;
      @(posedge pwm_out3) t1 = $time;
      check((t1 - t0) / 20 == 768 - 120, $sformatf("prescaled low time %0d, expected 648", (t1 - t0) / 20));
    end
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
