// distance_lut: calibratable lookup table from raw GP2D12 reading to distance.
//
// The Sharp GP2D12 infrared range sensor gives a voltage that falls roughly
// as the inverse of the distance to the reflecting object, so the raw 8-bit
// ADC code is not proportional to distance. The table holds, for every raw
// code, the distance in centimetres as two BCD digits {tens, ones}, ready for
// two seven-segment digits.
//
// Read: rd_addr is the raw code; rd_data is valid one clock later (registered
// read, as in an FPGA block RAM). Calibration write: when cal_we is high,
// cal_data is written to entry cal_addr on the clock edge, so the table can
// be fitted to an individual sensor at run time.
//
// Power-up contents, computed at elaboration: the code c stands for
// V = c * VREF_MV / 256 millivolts, and the distance is
//     L = K_MV_CM / (V - V0_MV)    centimetres,
// rounded to the nearest centimetre and held to the range L_MIN..L_MAX.
// The defaults K = 24800 mV*cm, V0 = 110 mV come from a fit of this inverse
// law to the sensor's voltage-versus-distance curve (about 2.4 V at 10 cm,
// 1.35 V at 20 cm, 0.42 V at 80 cm); L_MIN = 10 and L_MAX = 80 are the
// sensor's measuring range. A lookup table that can be calibrated per sensor
// follows the paper; the inverse-law fit, its constants, the BCD format and
// the write port are this design's own.
module distance_lut #(
  parameter int unsigned VREF_MV = 5000,   // ADC full scale (0 to 5 V input range)
  parameter int unsigned K_MV_CM = 24800,
  parameter int unsigned V0_MV   = 110,
  parameter int unsigned L_MIN   = 10,
  parameter int unsigned L_MAX   = 80
) (
  input  logic       clk,
  input  logic [7:0] rd_addr,     // raw ADC code
  output logic [7:0] rd_data,     // distance, BCD {tens, ones}
  input  logic       cal_we,
  input  logic [7:0] cal_addr,
  input  logic [7:0] cal_data     // BCD {tens, ones}
);

  // Distance in cm for raw code c, as BCD.
  function automatic logic [7:0] default_entry(int unsigned c);
    longint num, den, l;
    num = longint'(K_MV_CM) * 256;                      // K scaled by the 256 codes
    den = longint'(c) * VREF_MV - longint'(V0_MV) * 256; // (V - V0) * 256
    if (den <= 0) l = longint'(L_MAX);
    else          l = (2 * num / den + 1) / 2;          // round to nearest
    if (l > longint'(L_MAX)) l = longint'(L_MAX);
    if (l < longint'(L_MIN)) l = longint'(L_MIN);
    return {4'(l / 10), 4'(l % 10)};
  endfunction

  logic [7:0] table_q [256];

  initial begin
    for (int unsigned c = 0; c < 256; c++) table_q[c] = default_entry(c);
  end

  always_ff @(posedge clk) begin
    if (cal_we) table_q[cal_addr] <= cal_data;
    rd_data <= table_q[rd_addr];
  end

endmodule
