// motion_ctrl: L293D direction and enable logic for the two driven wheels.
//
// The robot has two wheels on one axis, each driven by one half of an L293D
// dual H-bridge. A movement command selects one row of the driver truth table
// (pins ENA ENB 1A 2A 3A 4A):
//
//   Forward 111010   Reverse 110101   Left 010010   Right 101000
//
// The enable bits of the chosen row are ANDed with the PWM signal, so the
// enabled bridges are switched at the PWM duty and the wheel speed follows it;
// the direction pins 1A..4A are static. Outputs are registered: they follow
// cmd and pwm one clock later. After reset all six pins are 0 (both bridges
// off).
//
// The truth table and gating the enables with the PWM output follow the paper;
// the register stage, the reset value and the command encoding (robot_pkg) are
// this design's own.
module motion_ctrl
  import robot_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,   // asynchronous, active low
  input  motion_cmd_e cmd,
  input  logic        pwm,     // speed PWM for the enable pins
  output l293_t       drive
);

  l293_t row;

  always_comb begin
    unique case (cmd)
      MOVE_FORWARD: row = L293_FORWARD;
      MOVE_REVERSE: row = L293_REVERSE;
      MOVE_LEFT:    row = L293_LEFT;
      MOVE_RIGHT:   row = L293_RIGHT;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drive <= '0;
    end else begin
      drive     <= row;
      drive.ena <= row.ena & pwm;
      drive.enb <= row.enb & pwm;
    end
  end

endmodule
