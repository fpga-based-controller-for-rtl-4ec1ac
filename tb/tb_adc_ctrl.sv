// tb_adc_ctrl: self-checking testbench of the ADC0809 sequencer.
//
// The controller runs against the behavioural converter model. For a series
// of input codes the testbench checks that every sample_valid pulse delivers
// the code the converter held, that ALE and START are high together for at
// least 100 ns (5 cycles of the 20 ns clock) and never overlap OE, that the
// address is channel 0, that OE lasts its set number of cycles, and that no
// conversion is started while one is running. It then switches the model to
// a converter whose EOC never falls and checks that the timeout path still
// delivers samples, and that a complete conversion takes the expected number
// of cycles.
module tb_adc_ctrl;
  localparam int unsigned CLK_NS     = 20;
  localparam int unsigned TIMEOUT_NS = 400;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic [7:0] vin [8];
  logic [7:0] adc_in;
  logic       eoc, fast = 1'b0;
  logic [2:0] addr;
  logic       ale, start, oe;
  logic [7:0] sample;
  logic       sample_valid;

  int checks = 0, failures = 0;

  always #(CLK_NS / 2) clk = ~clk;

  adc0809_model #(.T_EOC_LOW_NS(200), .T_CONV_NS(2000)) u_model (
    .vin(vin), .addr(addr), .ale(ale), .start(start), .oe(oe), .fast(fast),
    .eoc(eoc), .dout(adc_in)
  );

  adc_ctrl #(.CLK_PERIOD_NS(CLK_NS), .EOC_TIMEOUT_NS(TIMEOUT_NS)) dut (
    .clk(clk), .rst_n(rst_n), .adc_in(adc_in), .adc_eoc(eoc), .addr(addr),
    .adc_ale(ale), .adc_start(start), .adc_oe(oe),
    .sample(sample), .sample_valid(sample_valid)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Pulse-width and exclusivity monitors.
  int start_len = 0, ale_len = 0, oe_len = 0;
  int start_pulses = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) start_len++;
    else if (start_len != 0) begin
      check(start_len >= 5, "START high for at least 100 ns");
      start_pulses++;
      start_len = 0;
    end
    if (ale) ale_len++;
    else if (ale_len != 0) begin
      check(ale_len >= 5, "ALE high for at least 100 ns");
      ale_len = 0;
    end
    if (oe) oe_len++;
    else if (oe_len != 0) begin
      check(oe_len == 13, "OE high for 13 cycles (260 ns)");
      oe_len = 0;
    end
    if (start && oe) check(1'b0, "START and OE never together");
  end

  task automatic wait_sample();
    @(posedge clk iff sample_valid);
  endtask

  // Wait for the next sample and compare it with the converter input.
  task automatic expect_sample(input logic [7:0] code, input string what);
    int guard = 0;
    @(posedge clk);
    while (!sample_valid && guard < 20000) begin
      @(posedge clk);
      guard++;
    end
    check(sample_valid, {what, ": sample_valid seen"});
    check(sample == code, $sformatf("%s: sample %0d expected %0d", what, sample, code));
    check(addr == 3'd0, "address is channel 0");
  endtask

  initial begin
    automatic logic [7:0] codes [6] = '{8'd0, 8'd20, 8'd85, 8'd255, 8'd128, 8'd1};
    foreach (vin[i]) vin[i] = 8'(i * 17 + 3);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(sample == 8'd0, "sample is 0 after reset");
    foreach (codes[k]) begin
      vin[0] = codes[k];
      // A conversion already under way may hold the previous code: skip one.
      wait_sample();
      expect_sample(codes[k], $sformatf("normal conversion %0d", k));
    end
    // Cycle count of a full conversion: START 5 + EOC sync/low wait + conversion + read.
    begin
      int t0, t1;
      @(posedge clk iff sample_valid);
      t0 = $time;
      @(posedge clk iff sample_valid);
      t1 = $time;
      // 5 (START) + ~10 (EOC falls 200 ns after START) + 100 (2000 ns) + 2 sync + 13 (OE)
      check((t1 - t0) / CLK_NS >= 125 && (t1 - t0) / CLK_NS <= 135,
            $sformatf("conversion period %0d cycles, expected 125..135", (t1 - t0) / CLK_NS));
    end
    check(u_model.short_pulses == 0, "no START pulse shorter than 100 ns");
    check(u_model.overlapped == 0, "no conversion started while busy");
    // Converter with EOC that never falls: the timeout path must carry on.
    fast = 1'b1;
    vin[0] = 8'd77;
    wait_sample();
    expect_sample(8'd77, "fast converter, timeout path");
    begin
      int t0, t1;
      @(posedge clk iff sample_valid);
      t0 = $time;
      @(posedge clk iff sample_valid);
      t1 = $time;
      // 5 (START) + 20 (timeout 400 ns) + 1 + 13 (OE)
      check((t1 - t0) / CLK_NS >= 38 && (t1 - t0) / CLK_NS <= 41,
            $sformatf("timeout period %0d cycles, expected 38..41", (t1 - t0) / CLK_NS));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(CLK_NS * 200000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
