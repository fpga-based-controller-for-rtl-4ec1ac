// mobile_robot: FPGA controller of a two-wheel differential-drive robot.
//
// A GP2D12 infrared range sensor feeds an ADC0809 converter. This controller
// runs the converter (adc_ctrl), shows the reading on two seven-segment
// digits (two seg7_decoder), and drives the wheel motors through an L293D
// bridge: the 8-bit reading sets the PWM duty (pwm_generate), which is both
// brought out on pwm_out and used to switch the bridge enables for the
// direction chosen by motion_cmd (motion_ctrl).
//
// What the digits show is set by DISPLAY_DISTANCE:
//   0  the raw 8-bit reading in hexadecimal, upper nibble on seg_grp1,
//      lower nibble on seg_grp2 (a reading of 85 shows "55", 20 shows "14");
//   1  the distance in centimetres, tens on seg_grp1 and ones on seg_grp2,
//      through the calibratable lookup table distance_lut.
// The segments are active high, bit 0 = segment a ... bit 6 = segment g.
//
// Timing: a new reading is latched once per conversion (see adc_ctrl); the
// digits change on the next clock (DISPLAY_DISTANCE = 1: two clocks, one more
// for the table read); the PWM duty changes at the next PWM period boundary,
// and the bridge pins follow pwm_out by one clock.
//
// From the paper: the ports glclk, adc_in[7:0], adc_eoc, addr[2:0],
// seg_grp1[6:0], seg_grp2[6:0], adc_ale, adc_start and pwm_out; the duty taken
// from the reading; the raw hexadecimal display of the full-system waveform
// (default mode); the lookup table for distance in cm; the L293D truth table.
// This design's own: rst_n, adc_oe, motion_cmd, the bridge outputs, the
// calibration port and the DISPLAY_DISTANCE switch. The decoders' decimal-point
// bit and the converter's sample_valid pulse are not needed here and stay
// unconnected inside the top.
module mobile_robot
  import robot_pkg::*;
#(
  parameter int unsigned CLK_PERIOD_NS    = 20,
  parameter int unsigned MIN_PULSE_NS     = 100,
  parameter int unsigned EOC_TIMEOUT_NS   = 16000,
  parameter int unsigned PWM_PRESCALE     = 1,
  parameter bit          DISPLAY_DISTANCE = 1'b0
) (
  input  logic        glclk,
  input  logic        rst_n,        // asynchronous, active low
  // ADC0809
  input  logic [7:0]  adc_in,
  input  logic        adc_eoc,
  output logic [2:0]  addr,
  output logic        adc_ale,
  output logic        adc_start,
  output logic        adc_oe,
  // seven-segment digits, active high {g..a}
  output logic [6:0]  seg_grp1,
  output logic [6:0]  seg_grp2,
  // motor drive
  output logic        pwm_out,
  input  motion_cmd_e motion_cmd,
  output l293_t       l293,         // ENA ENB 1A 2A 3A 4A
  // distance table calibration
  input  logic        cal_we,
  input  logic [7:0]  cal_addr,
  input  logic [7:0]  cal_data      // BCD {tens, ones}
);

  logic [7:0] sample;
  logic       sample_valid;
  logic [7:0] distance_bcd;
  logic [7:0] shown;
  logic [7:0] seg1_full, seg2_full;

  adc_ctrl #(
    .CLK_PERIOD_NS  (CLK_PERIOD_NS),
    .MIN_PULSE_NS   (MIN_PULSE_NS),
    .EOC_TIMEOUT_NS (EOC_TIMEOUT_NS),
    .CHANNEL        (3'd0)
  ) u_adc (
    .clk          (glclk),
    .rst_n        (rst_n),
    .adc_in       (adc_in),
    .adc_eoc      (adc_eoc),
    .addr         (addr),
    .adc_ale      (adc_ale),
    .adc_start    (adc_start),
    .adc_oe       (adc_oe),
    .sample       (sample),
    .sample_valid (sample_valid)
  );

  distance_lut u_lut (
    .clk      (glclk),
    .rd_addr  (sample),
    .rd_data  (distance_bcd),
    .cal_we   (cal_we),
    .cal_addr (cal_addr),
    .cal_data (cal_data)
  );

  assign shown = DISPLAY_DISTANCE ? distance_bcd : sample;

  seg7_decoder #(.ACTIVE_LOW(1'b0)) u_seg1 (
    .d  (shown[7:4]),
    .dp (1'b0),
    .s  (seg1_full)
  );

  seg7_decoder #(.ACTIVE_LOW(1'b0)) u_seg2 (
    .d  (shown[3:0]),
    .dp (1'b0),
    .s  (seg2_full)
  );

  // Registered so the digit pins do not glitch while the nibble changes.
  always_ff @(posedge glclk or negedge rst_n) begin
    if (!rst_n) begin
      seg_grp1 <= 7'b0111111;   // "0"
      seg_grp2 <= 7'b0111111;
    end else begin
      seg_grp1 <= seg1_full[6:0];
      seg_grp2 <= seg2_full[6:0];
    end
  end

  pwm_generate #(
    .WIDTH    (8),
    .PRESCALE (PWM_PRESCALE)
  ) u_pwm (
    .clk     (glclk),
    .rst_n   (rst_n),
    .pwm_in  (sample),
    .pwm_out (pwm_out)
  );

  motion_ctrl u_motion (
    .clk   (glclk),
    .rst_n (rst_n),
    .cmd   (motion_cmd),
    .pwm   (pwm_out),
    .drive (l293)
  );

endmodule
