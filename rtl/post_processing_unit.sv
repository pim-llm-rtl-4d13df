// post_processing_unit: digital post-processing of one crossbar's ADC output
// vector inside a PIM PE. The paper states that the PE's post-processing unit
// performs the LayerNorm and GELU operations of the projection layers; the
// circuits below are this design's.
// Values are int8 in Q4 (value = code/16).
//   PP_BYPASS    : y = x.
//   PP_GELU      : y = GELU(x) with the integer-friendly erf polynomial of
//                  I-BERT, GELU(x) = x/2 * (1 + L(x/sqrt2)),
//                  L(u) = sgn(u) * (a*(min(|u|,-b) + b)^2 + 1),
//                  a = -0.2888, b = -1.769 (coefficient in Q16: 37/2^16*512).
//   PP_LAYERNORM : y = (x - mean) / std over the N elements (unit gain, zero
//                  bias), in Q4. Statistics in one cycle (adder trees), then
//                  a digit-serial square root (12 cycles) and a restoring
//                  reciprocal divider (25 cycles), then all outputs at once.
// Timing: done pulses 1 cycle after start for bypass and GELU, and
// 1+12+25+1 = 39 cycles after start for LayerNorm. y holds until the next
// start.
module post_processing_unit
  import pim_llm_pkg::*;
#(
  parameter int unsigned N = XBAR_COLS   // vector length, a power of two
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  pp_mode_t                    mode,
  input  logic signed [N-1:0][7:0]    x,
  output logic                        done,
  output logic signed [N-1:0][7:0]    y
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int          GELU_K = 37;   // 0.2888 * 2^16 / 512

  typedef enum logic [2:0] {P_IDLE, P_SQRT, P_DIV, P_OUT} pstate_t;
  pstate_t state;

  // ---- statistics (combinational, from the held input) -------------------
  logic signed [N-1:0][7:0] xh;           // input held during LayerNorm
  logic signed [31:0]       s1, s1_r;     // sum x
  logic        [31:0]       s2;           // sum x^2
  always_comb begin
    s1 = '0;
    s2 = '0;
    for (int i = 0; i < N; i++) begin
      s1 = s1 + 32'($signed(x[i]));
      s2 = s2 + 32'(32'($signed(x[i])) * 32'($signed(x[i])));
    end
  end

  // ---- sequential sqrt / reciprocal state --------------------------------
  logic [23:0] sq_in;       // 256 * variance
  logic [13:0] sq_rem;
  logic [11:0] root;
  logic [4:0]  it;
  logic [24:0] quo;
  logic [25:0] drem;
  // one step of each iteration, computed combinationally
  logic [15:0] sq_r2, sq_trial;
  logic [25:0] dv_r2;
  logic [11:0] dv_d;
  always_comb begin
    sq_r2    = {sq_rem, sq_in[2*it +: 2]};
    sq_trial = {2'b00, root, 2'b01};
    dv_d     = (root == 0) ? 12'd1 : root;     // 16*std, at least 1
    dv_r2    = {drem[24:0], (it == 5'd24)};     // numerator 2^24
  end

  // ---- per-element functions ---------------------------------------------
  logic signed [N-1:0][7:0] y_gelu, y_ln;
  for (genvar i = 0; i < N; i++) begin : g_el
    logic signed [7:0]  q;
    logic        [7:0]  a, c;
    logic signed [31:0] t, t2, onepl, prod;
    logic signed [63:0] cen, lnv;
    assign q = x[i];
    always_comb begin
      a     = q[7] ? 8'(-q) : 8'(q);
      c     = (a > 8'd40) ? 8'd40 : a;
      t     = 32'(c) - 32'sd40;
      t2    = t * t;
      onepl = q[7] ? GELU_K * t2 : 32'sd131072 - GELU_K * t2;
      prod  = 32'(q) * onepl;
      y_gelu[i] = sat8((64'(prod) + 64'sd65536) >>> 17);
    end
    always_comb begin
      cen  = (64'($signed(xh[i])) <<< LOGN) - 64'(s1_r);                  // N*(x - mean)
      lnv  = (cen * $signed(64'(quo)) + (64'sd1 <<< (15 + LOGN))) >>> (16 + LOGN);
      y_ln[i] = sat8(lnv);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= P_IDLE;
      done   <= 1'b0;
      y      <= '0;
      xh     <= '0;
      s1_r   <= '0;
      sq_in  <= '0;
      sq_rem <= '0;
      root   <= '0;
      it     <= '0;
      quo    <= '0;
      drem   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        P_IDLE: if (start) begin
          unique case (mode)
            PP_GELU:      begin y <= y_gelu; done <= 1'b1; end
            PP_LAYERNORM: begin
              xh    <= x;
              s1_r  <= s1;
              // 256 * var = 256 * (N*s2 - s1^2) / N^2
              sq_in <= 24'(((64'(s2) <<< LOGN) - 64'(s1) * 64'(s1)) <<< 8 >>> (2*LOGN));
              sq_rem <= '0;
              root  <= '0;
              it    <= 5'd11;
              state <= P_SQRT;
            end
            default:      begin y <= x; done <= 1'b1; end
          endcase
        end
        P_SQRT: begin
          if (sq_r2 >= sq_trial) begin
            sq_rem <= 14'(sq_r2 - sq_trial);
            root   <= {root[10:0], 1'b1};
          end else begin
            sq_rem <= 14'(sq_r2);
            root   <= {root[10:0], 1'b0};
          end
          if (it == 0) begin
            state <= P_DIV;
            it    <= 5'd24;
            quo   <= '0;
            drem  <= '0;
          end else begin
            it <= it - 1'b1;
          end
        end
        P_DIV: begin
          if (dv_r2 >= 26'(dv_d)) begin
            drem    <= dv_r2 - 26'(dv_d);
            quo[it] <= 1'b1;
          end else begin
            drem    <= dv_r2;
          end
          if (it == 0) state <= P_OUT;
          else         it    <= it - 1'b1;
        end
        P_OUT: begin
          y     <= y_ln;
          done  <= 1'b1;
          state <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
