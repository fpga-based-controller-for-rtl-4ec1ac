// adc_ctrl: conversion sequencer for an ADC0809 8-channel, 8-bit converter.
//
// The ADC0809 latches its channel address on ALE, begins a conversion on
// START, drops EOC while it converts and raises EOC again when the result is
// ready; the result appears on its data pins while OE is high. This block runs
// that sequence in a loop:
//
//   START_PULSE  ALE and START high for PULSE cycles (at least MIN_PULSE_NS)
//   WAIT_BUSY    wait for EOC to fall, or EOC_TIMEOUT cycles if it never does
//   WAIT_DONE    wait for EOC to be high again (conversion complete)
//   READ         OE high for OE_CYCLES cycles; the data is latched on the last
//                one, sample_valid pulses for one cycle, and the loop restarts
//
// addr is the fixed channel CHANNEL. sample holds the last result (0 after
// reset) and changes only together with a sample_valid pulse.
//
// Taken from the paper: the pin names and widths (adc_in[7:0], adc_eoc,
// addr[2:0], ale, start), address 0 (the address output is tied to ground in
// the authors' schematic and reads 0 in their waveforms), START and ALE held
// high for at least 100 ns, EOC and OE high when the conversion is complete.
// This design's own choices: the clock period, the state sequence, the
// timeouts, the OE length and latching the data while OE is high (the
// converter's outputs are only driven then).
module adc_ctrl
  import robot_pkg::*;
#(
  parameter int unsigned CLK_PERIOD_NS  = 20,     // system clock period
  parameter int unsigned MIN_PULSE_NS   = 100,    // ALE/START high time
  parameter int unsigned OE_NS          = 260,    // OE high before data is taken
  parameter int unsigned EOC_TIMEOUT_NS = 16000,  // longest wait for EOC to fall
  parameter logic [2:0]  CHANNEL        = 3'd0
) (
  input  logic       clk,
  input  logic       rst_n,         // asynchronous, active low
  // ADC0809 pins
  input  logic [7:0] adc_in,        // converter data outputs
  input  logic       adc_eoc,       // end of conversion
  output logic [2:0] addr,          // channel address
  output logic       adc_ale,       // address latch enable
  output logic       adc_start,     // start of conversion
  output logic       adc_oe,        // output enable
  // result
  output logic [7:0] sample,
  output logic       sample_valid
);

  localparam int unsigned PULSE_CYCLES = ns_to_cycles(MIN_PULSE_NS, CLK_PERIOD_NS);
  localparam int unsigned OE_CYCLES    = ns_to_cycles(OE_NS, CLK_PERIOD_NS);
  localparam int unsigned TO_CYCLES    = ns_to_cycles(EOC_TIMEOUT_NS, CLK_PERIOD_NS);
  localparam int unsigned MAXC = (TO_CYCLES > PULSE_CYCLES) ?
                                 ((TO_CYCLES > OE_CYCLES) ? TO_CYCLES : OE_CYCLES) :
                                 ((PULSE_CYCLES > OE_CYCLES) ? PULSE_CYCLES : OE_CYCLES);
  localparam int unsigned CW = $clog2(MAXC + 1);

  typedef enum logic [1:0] {
    START_PULSE,
    WAIT_BUSY,
    WAIT_DONE,
    READ
  } state_e;

  state_e        state;
  logic [CW-1:0] cnt;               // cycles spent in the current state
  logic          eoc_q, eoc_qq;     // EOC synchronised to clk

  assign addr = CHANNEL;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eoc_q  <= 1'b0;
      eoc_qq <= 1'b0;
    end else begin
      eoc_q  <= adc_eoc;
      eoc_qq <= eoc_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= START_PULSE;
      cnt          <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      cnt          <= cnt + 1'b1;
      unique case (state)
        START_PULSE:
          if (cnt == CW'(PULSE_CYCLES - 1)) begin
            state <= WAIT_BUSY;
            cnt   <= '0;
          end
        WAIT_BUSY:
          if (!eoc_qq || cnt == CW'(TO_CYCLES - 1)) begin
            state <= WAIT_DONE;
            cnt   <= '0;
          end
        WAIT_DONE:
          if (eoc_qq) begin
            state <= READ;
            cnt   <= '0;
          end
        READ:
          if (cnt == CW'(OE_CYCLES - 1)) begin
            sample       <= adc_in;
            sample_valid <= 1'b1;
            state        <= START_PULSE;
            cnt          <= '0;
          end
      endcase
    end
  end

  assign adc_ale   = (state == START_PULSE);
  assign adc_start = (state == START_PULSE);
  assign adc_oe    = (state == READ);

  // START and OE are never high together.
  a_start_oe_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(adc_start && adc_oe));
  // Each START pulse lasts at least the minimum pulse width.
  a_start_width: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(adc_start) |-> adc_start [*PULSE_CYCLES]);

endmodule
