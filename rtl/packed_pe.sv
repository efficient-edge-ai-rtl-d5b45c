// packed_pe: two weight-stationary processing elements mapped onto one
// DSP48E2-style multiply-accumulate slice ("DSP packing").
//
// The two PEs sit side by side in the same array row, so they see the same
// activation a0 but hold different weights: w0 for the even column, w1 for
// the odd one. Following the packing in the paper's DSP figure, the weights
// are placed in one 27-bit word by the pre-adder (w0 at bits 26..19 of the
// 30-bit A port, w1 at bits 7..0 of the 27-bit D port), multiplied once by
// the 18-bit B port holding a0, and the 48-bit post-adder adds the incoming
// partial sums on the C port. The product then holds a0*w1 in bits 17..0 and
// a0*w0 from bit 19 up; bit 18 is a guard bit.
//
// This design packs the two incoming 18-bit partial sums into C in the same
// layout (ps0 << 19 plus sign-extended ps1) and unpacks P as
//   ps1 = P[17:0],  ps0 = (P - sext(P[17:0])) >>> 19,
// which cancels the borrow that a negative lower field leaves in the upper
// field. The result is exact while the lower column's sum fits in 18 signed
// bits, the array output width of the paper's configuration. The 27-bit
// pre-adder word w0 * 2^19 + w1 overflows only for w0 = -128 with a negative
// w1; symmetric int8 weight quantisation keeps weights in [-127, 127].
//
// Timing: activation and both partial sums are registered (one cycle per PE).
// Weights are stationary; w_shift moves each weight register down one PE
// (w*_in from above, w*_out to below). Synchronous active-high reset.
module packed_pe #(
  parameter int IN_W  = 8,
  parameter int OUT_W = 18
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic signed [IN_W-1:0]  a_in,
  output logic signed [IN_W-1:0]  a_out,
  input  logic                    w_shift,
  input  logic signed [IN_W-1:0]  w0_in,
  input  logic signed [IN_W-1:0]  w1_in,
  output logic signed [IN_W-1:0]  w0_out,
  output logic signed [IN_W-1:0]  w1_out,
  input  logic signed [OUT_W-1:0] ps0_in,
  input  logic signed [OUT_W-1:0] ps1_in,
  output logic signed [OUT_W-1:0] ps0_out,
  output logic signed [OUT_W-1:0] ps1_out
);
  localparam int SHIFT = 19;   // position of w0 in A and of a0*w0 in P

  logic signed [26:0] dsp_a;   // A[26:0]: w0 << 19 (the pre-adder uses 27 of A's 30 bits)
  logic signed [26:0] dsp_d;   // D: w1
  logic signed [26:0] dsp_ad;  // pre-adder
  logic signed [17:0] dsp_b;   // B: a0
  logic signed [47:0] dsp_c;   // C: packed partial sums
  logic signed [44:0] dsp_m;   // multiplier
  logic signed [47:0] dsp_p;   // post-adder
  logic signed [47:0] lo_ext;
  logic signed [OUT_W-1:0] hi_part;

  always_comb begin
    dsp_a   = 27'(w0_out) <<< SHIFT;
    dsp_d   = 27'(w1_out);
    dsp_ad  = dsp_a + dsp_d;
    dsp_b   = 18'(a_in);
    dsp_m   = dsp_ad * dsp_b;
    dsp_c   = (48'(ps0_in) <<< SHIFT) + 48'(ps1_in);
    dsp_p   = 48'(dsp_m) + dsp_c;
    lo_ext  = 48'(signed'(dsp_p[OUT_W-1:0]));
    hi_part = OUT_W'((dsp_p - lo_ext) >>> SHIFT);
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      a_out   <= '0;
      w0_out  <= '0;
      w1_out  <= '0;
      ps0_out <= '0;
      ps1_out <= '0;
    end else begin
      a_out   <= a_in;
      ps1_out <= dsp_p[OUT_W-1:0];
      ps0_out <= hi_part;
      if (w_shift) begin
        w0_out <= w0_in;
        w1_out <= w1_in;
      end
    end
  end
endmodule
