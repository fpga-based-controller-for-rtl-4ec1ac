// pwm_generate: pulse-width modulator for the motor-driver enable pins.
//
// A WIDTH-bit counter runs from 0 to 2**WIDTH - 1 and wraps. pwm_out is high
// while the counter is below the duty value, so the output is high for
// pwm_in out of every 2**WIDTH counter steps: pwm_in = 0 keeps it low,
// pwm_in = 255 keeps it high for 255 of 256 steps. The duty value is taken
// from pwm_in when the counter wraps, so a change of pwm_in never produces a
// cut-short or stretched pulse; it takes effect with the next period.
//
// The counter advances once every PRESCALE clock cycles (PRESCALE = 1: every
// cycle), giving a period of PRESCALE * 2**WIDTH cycles. pwm_out is a register
// output. After reset the duty is 0 and pwm_out is low; a new pwm_in first
// shows at most one period (plus one cycle) later.
//
// Ports clk, PWM_in[7:0] and PWM_out are those of the paper's PWM_generate
// symbol; the counter-compare scheme, the period-boundary update, the
// prescaler and the reset are this design's choices.
module pwm_generate #(
  parameter int unsigned WIDTH    = 8,
  parameter int unsigned PRESCALE = 1
) (
  input  logic             clk,
  input  logic             rst_n,     // asynchronous, active low
  input  logic [WIDTH-1:0] pwm_in,    // duty: high steps per period
  output logic             pwm_out
);

  localparam int unsigned PW = (PRESCALE > 1) ? $clog2(PRESCALE) : 1;

  logic [PW-1:0]    pre_cnt;
  logic             step;             // counter advances this cycle
  logic [WIDTH-1:0] cnt;
  logic [WIDTH-1:0] duty;

  assign step = (PRESCALE <= 1) || (pre_cnt == PW'(PRESCALE - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_cnt <= '0;
      cnt     <= '0;
      duty    <= '0;
      pwm_out <= 1'b0;
    end else begin
      if (step) begin
        pre_cnt <= '0;
        cnt     <= cnt + 1'b1;
        // Take the new duty at the start of each period.
        if (cnt == '1) duty <= pwm_in;
      end else begin
        pre_cnt <= pre_cnt + 1'b1;
      end
      pwm_out <= (cnt < duty);
    end
  end

endmodule
