// tb_distance_lut: self-checking testbench of the distance lookup table.
//
// Every one of the 256 power-up entries is compared with the sensor law
// evaluated here in floating point: V = code * 5 V / 256, L = 24.8 / (V - 0.11)
// cm, rounded and held to 10..80 cm, then split into two BCD digits. A few
// points are also checked against the sensor's voltage-distance curve read by
// eye (about 2.4 V at 10 cm, 1.35 V at 20 cm, 0.75 V at 40 cm) with a
// tolerance of 2 cm. Then calibration writes replace some entries and the
// testbench reads them back, checks that the other entries are unchanged and
// that the read data arrives one clock after the address.
module tb_distance_lut;
  logic       clk = 1'b0;
  logic [7:0] rd_addr = 8'd0, rd_data;
  logic       cal_we = 1'b0;
  logic [7:0] cal_addr = 8'd0, cal_data = 8'd0;

  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  distance_lut dut (.clk(clk), .rd_addr(rd_addr), .rd_data(rd_data),
                    .cal_we(cal_we), .cal_addr(cal_addr), .cal_data(cal_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int law_cm(int code);
    real v, l;
    v = code * 5.0 / 256.0;
    if (v <= 0.11) return 80;
    l = 24.8 / (v - 0.11);
    if (l > 80.0) return 80;
    if (l < 10.0) return 10;
    return int'($floor(l + 0.5));
  endfunction

  function automatic int bcd_to_int(logic [7:0] b);
    return int'(b[7:4]) * 10 + int'(b[3:0]);
  endfunction

  task automatic read(input logic [7:0] a, output logic [7:0] q);
    @(negedge clk);
    rd_addr = a;
    @(posedge clk);
    #1 q = rd_data;
  endtask

  initial begin
    logic [7:0] q;
    for (int c = 0; c < 256; c++) begin
      read(8'(c), q);
      check(q[3:0] <= 4'd9 && q[7:4] <= 4'd9, $sformatf("code %0d: BCD digits", c));
      check(bcd_to_int(q) == law_cm(c),
            $sformatf("code %0d: %0d cm expected %0d", c, bcd_to_int(q), law_cm(c)));
    end
    // Curve points: code = V / 5 * 256.
    read(8'(int'(2.4 / 5.0 * 256.0)), q);
    check(bcd_to_int(q) >= 9 && bcd_to_int(q) <= 12, $sformatf("2.4 V near 10 cm: %0d", bcd_to_int(q)));
    read(8'(int'(1.35 / 5.0 * 256.0)), q);
    check(bcd_to_int(q) >= 18 && bcd_to_int(q) <= 22, $sformatf("1.35 V near 20 cm: %0d", bcd_to_int(q)));
    read(8'(int'(0.75 / 5.0 * 256.0)), q);
    check(bcd_to_int(q) >= 38 && bcd_to_int(q) <= 42, $sformatf("0.75 V near 40 cm: %0d", bcd_to_int(q)));
    // Calibration writes.
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      cal_we   = 1'b1;
      cal_addr = 8'(k * 30 + 7);
      cal_data = {4'(k), 4'(9 - k)};
      @(posedge clk);
    end
    @(negedge clk);
    cal_we = 1'b0;
    for (int k = 0; k < 8; k++) begin
      read(8'(k * 30 + 7), q);
      check(q == {4'(k), 4'(9 - k)}, $sformatf("calibrated entry %0d", k * 30 + 7));
      read(8'(k * 30 + 8), q);
      check(bcd_to_int(q) == law_cm(k * 30 + 8), $sformatf("neighbour %0d unchanged", k * 30 + 8));
    end
    // Latency: before the edge the old data is still shown.
    read(8'd200, q);
    @(negedge clk);
    rd_addr = 8'd7;
    #1 check(rd_data == q, "read data changes only on the clock edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
