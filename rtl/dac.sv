// dac: behavioural model of the digital-to-analog converter that drives one
// crossbar row (word line). Not synthesizable logic in a real chip: it stands
// in for an analog circuit. The analog output is represented by an integer
// voltage in microvolts, so the model can be read by tools without real
// number support. A signed BITS-bit activation code becomes
//     v = code * LSB_UV   [uV]
// (about +-1 V full scale with the defaults). The paper places DACs in every
// PIM PE but gives neither resolution nor range; an 8-bit, +-1 V, one-step
// (not bit-serial) DAC is this design's assumption. Purely combinational
// (settling is folded into the crossbar's evaluation cycle).
module dac #(
  parameter int unsigned BITS   = 8,
  parameter int unsigned LSB_UV = 7812      // ~1 V / 128
) (
  input  logic signed [BITS-1:0] code,
  output logic signed [31:0]     v_uv
);
  assign v_uv = 32'(code) * $signed(32'(LSB_UV));
endmodule
