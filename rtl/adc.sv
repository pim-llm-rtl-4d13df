// adc: behavioural model of the 8-bit analog-to-digital converter that
// digitises one crossbar column (after the differential amplifier). Not a
// synthesizable circuit: the analog input is an integer voltage in
// microvolts. The output is the signed code round(v / LSB_UV) (half away
// from zero), clipped to the BITS-bit range. The 8-bit resolution is the
// paper's; the LSB size (a calibration choice: 1/16 of one weight-times-code
// unit with the default DAC and crossbar), the rounding rule and one ADC per
// column are this design's assumptions. Combinational.
module adc #(
  parameter int unsigned BITS   = 8,
  parameter int unsigned LSB_UV = 12375
) (
  input  logic signed [31:0]     v_uv,
  output logic signed [BITS-1:0] code
);
  localparam longint MAXC = (longint'(1) <<< (BITS-1)) - 1;
  localparam longint MINC = -(longint'(1) <<< (BITS-1));
  longint mag, q;
  always_comb begin
    mag = (v_uv < 0) ? -longint'(v_uv) : longint'(v_uv);
    q   = (mag + longint'(LSB_UV / 2)) / longint'(LSB_UV);
    if (v_uv < 0) q = -q;
    if (q > MAXC)      code = BITS'(MAXC);
    else if (q < MINC) code = BITS'(MINC);
    else               code = BITS'(q);
  end
endmodule
