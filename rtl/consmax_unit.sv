// consmax_unit: the nonlinear functional unit of the TPU, computing a
// ConSmax-style softmax replacement on one attention score:
//     p = exp(s - beta) / gamma
// with learned constants beta and gamma instead of the running maximum and
// the sum of exponentials, so that each score is normalised on its own and no
// reduction over the context is needed. The paper names ConSmax as the kind of
// hardware used for softmax but gives no circuit; the formula above is the
// published ConSmax definition and the circuit below is this design's.
//
// Arithmetic: the score s is the raw systolic accumulator scaled by
// 2^-IN_FRAC. z = s - beta is formed in Q8, y = z*log2(e) in Q8, and
// exp(z) = 2^y is split into 2^floor(y) (a shift) and 2^frac(y) (a 16-entry
// table of 2^(i/16) in Q15, indexed by the top four fraction bits). The
// product with 1/gamma (INV_GAMMA_Q8) is returned as an unsigned Q0.8
// probability, saturated at 255. Worst-case relative error from the table is
// about 4.4 %. One register stage: out is valid one cycle after in_valid.
module consmax_unit
  import pim_llm_pkg::*;
#(
  parameter int unsigned IN_W        = ACC_W,
  parameter int unsigned IN_FRAC     = 10,   // score = acc / 2^IN_FRAC
  parameter int          BETA_Q8     = 0,    // beta in Q8
  parameter int unsigned INV_GAMMA_Q8 = 8    // 1/gamma in Q8 (gamma = 32)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] score,
  output logic                   out_valid,
  output logic [7:0]             prob
);
  localparam int LOG2E_Q12 = 5909;  // log2(e) = 1.44263 in Q12

  function automatic logic [15:0] pow2_frac(input logic [3:0] idx);
    case (idx)
      4'd0:  return 16'd32768;  4'd1:  return 16'd34219;
      4'd2:  return 16'd35734;  4'd3:  return 16'd37316;
      4'd4:  return 16'd38968;  4'd5:  return 16'd40693;
      4'd6:  return 16'd42495;  4'd7:  return 16'd44376;
      4'd8:  return 16'd46341;  4'd9:  return 16'd48393;
      4'd10: return 16'd50535;  4'd11: return 16'd52773;
      4'd12: return 16'd55109;  4'd13: return 16'd57549;
      4'd14: return 16'd60097;  default: return 16'd62757;
    endcase
  endfunction

  logic signed [63:0] z_q8, y_q8, ip;
  logic        [63:0] mant, val;
  logic        [7:0]  prob_c;

  always_comb begin
    // z = s - beta in Q8
    if (IN_FRAC >= 8) z_q8 = (64'(score) >>> (IN_FRAC - 8)) - 64'(BETA_Q8);
    else              z_q8 = (64'(score) <<< (8 - IN_FRAC)) - 64'(BETA_Q8);
    y_q8   = (z_q8 * LOG2E_Q12) >>> 12;
    ip     = y_q8 >>> 8;
    mant   = 64'(pow2_frac(y_q8[7:4])) * 64'(INV_GAMMA_Q8);   // Q23
    val    = '0;
    if (ip > 16) begin
      prob_c = 8'hFF;
    end else if (ip < -40) begin
      prob_c = 8'h00;
    end else begin
      if (ip >= 0) val = (mant << ip) >> 15;
      else         val = mant >> (15 - ip);
      prob_c = (val > 255) ? 8'hFF : val[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      prob      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) prob <= prob_c;
    end
  end
endmodule
