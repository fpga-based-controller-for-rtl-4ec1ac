// adc0809_model: behavioural model of the ADC0809 converter, for testbenches.
//
// Not synthesizable. Eight analog inputs are given directly as 8-bit codes
// (vin). A rising edge of ALE latches the channel address; a rising edge of
// START resets the converter and its falling edge starts a conversion of the
// addressed input. EOC falls T_EOC_LOW_NS after START falls and rises
// T_CONV_NS after that, when the result register is loaded. Data is driven on
// dout only while OE is high (0 otherwise: there is no high-impedance state in
// a two-state simulation). With fast = 1 the model converts instantly and EOC
// stays high, which exercises a controller's timeout path. The model also
// counts START pulses that were too short (under MIN_PULSE_NS) and conversions
// started while one was still running.
module adc0809_model #(
  parameter int unsigned T_EOC_LOW_NS = 200,
  parameter int unsigned T_CONV_NS    = 2000,
  parameter int unsigned MIN_PULSE_NS = 100
) (
  input  logic [7:0] vin [8],
  input  logic [2:0] addr,
  input  logic       ale,
  input  logic       start,
  input  logic       oe,
  input  logic       fast,
  output logic       eoc,
  output logic [7:0] dout
);

  logic [2:0]  chan    = 3'd0;
  logic [7:0]  result  = 8'd0;
  logic        busy    = 1'b0;
  int unsigned conversions   = 0;
  int unsigned short_pulses  = 0;
  int unsigned overlapped    = 0;
  realtime     t_start_rise  = 0;
  realtime     t_ale_rise    = 0;
  int unsigned eoc_low_seen  = 0;   // conversions in which EOC went low

  initial eoc = 1'b1;

  always @(posedge ale) begin
    chan       = addr;
    t_ale_rise = $realtime;
  end

  always @(posedge start) t_start_rise = $realtime;

  always @(negedge start) begin
    if ($realtime - t_start_rise < MIN_PULSE_NS) short_pulses++;
    if (busy) overlapped++;
    if (fast) begin
      result = vin[chan];
      conversions++;
    end else begin
      busy = 1'b1;
      #(T_EOC_LOW_NS);
      eoc = 1'b0;
      eoc_low_seen++;
      #(T_CONV_NS);
      result = vin[chan];
      eoc    = 1'b1;
      busy   = 1'b0;
      conversions++;
    end
  end

  assign dout = oe ? result : 8'd0;

endmodule
