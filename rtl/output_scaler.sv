// output_scaler: turns one accumulator row of 32-bit sums back into int8,
// the requantisation step at the end of every layer.
//
// Each element x is multiplied by a float16 (IEEE binary16) scale, rounded to
// the nearest integer with ties to even, saturated to [-128, 127] and passed
// through the selected activation: none, ReLU (max(0, .)) or ReLU6 (clamped to
// [0, relu6_max], where relu6_max is the quantised value of 6). The paper
// reduced this scale from float32 to float16 and replaced the network's
// LeakyReLU by ReLU6; the rounding mode, the programmable ReLU6 bound and the
// handling of special values (infinity and NaN saturate by sign, subnormals
// are exact) are this design's own.
//
// The multiply is exact in integers: a binary16 value is M * 2^(E-25) with an
// 11-bit integer M, so x * scale = (x * M) * 2^(E-25), a 43-bit product
// followed by a rounding right shift (or a saturating left shift).
// Timing: out_valid/out_data one cycle after in_valid/in_data. DIM elements
// per cycle. Synchronous active-high reset.
module output_scaler #(
  parameter int DIM   = 32,
  parameter int ACC_W = 32
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   in_valid,
  input  logic [DIM*ACC_W-1:0]   in_data,
  input  logic [15:0]            scale,
  input  gemmini_pkg::act_e      act,
  input  logic [7:0]             relu6_max,
  output logic                   out_valid,
  output logic [DIM*8-1:0]       out_data
);
  import gemmini_pkg::*;

  localparam int PW = ACC_W + 12;   // product bits

  function automatic logic signed [7:0] sat8(input logic signed [PW+7:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[7:0];
  endfunction

  // scale one element
  function automatic logic [7:0] scale_one(input logic signed [ACC_W-1:0] x,
                                           input logic [15:0] s,
                                           input act_e a, input logic [7:0] r6);
    logic              sgn;
    logic [4:0]        e;
    logic [10:0]       m;
    int                ex;         // value = m * 2^(ex-25)
    int                sh;
    logic signed [PW-1:0]   prod;
    logic signed [PW+7:0]   q;
    logic signed [PW-1:0]   rem;
    logic signed [PW-1:0]   half;
    logic signed [7:0]      r;
    sgn = s[15];
    e   = s[14:10];
    m   = (e == 0) ? {1'b0, s[9:0]} : {1'b1, s[9:0]};
    ex  = (e == 0) ? 1 : int'(e);
    if (e == 5'd31) begin
      // infinity or NaN: saturate by sign of the result
      if (x == 0)                r = 8'sd0;
      else if ((x < 0) != sgn)   r = -8'sd128;
      else                       r = 8'sd127;
    end else begin
      prod = PW'(x) * PW'(signed'({1'b0, m}));
      if (sgn) prod = -prod;
      sh = 25 - ex;
      if (sh <= 0) begin
        // left shift by up to 5: saturate if anything is non-zero
        q = (PW+8)'(prod) <<< (-sh);
      end else begin
        q    = (PW+8)'(prod >>> sh);                      // floor
        rem  = prod - PW'(q <<< sh);                     // 0 <= rem < 2^sh
        half = PW'(1) <<< (sh - 1);
        if (rem > half || (rem == half && q[0])) q = q + 1;
      end
      r = sat8(q);
    end
    case (a)
      ACT_RELU:  if (r < 0) r = 8'sd0;
      ACT_RELU6: begin
        if (r < 0) r = 8'sd0;
        else if (r > signed'(r6)) r = signed'(r6);
      end
      default: ;
    endcase
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (reset) out_valid <= 1'b0;
    else       out_valid <= in_valid;
    for (int e = 0; e < DIM; e++)
      out_data[e*8 +: 8] <= scale_one(in_data[e*ACC_W +: ACC_W], scale, act, relu6_max);
  end
endmodule
