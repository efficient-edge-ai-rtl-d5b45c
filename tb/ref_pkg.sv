// ref_pkg: reference arithmetic for the testbenches, written independently of
// the RTL with real numbers: float16 decoding, the output scaling (round to
// nearest, ties to even, saturate to int8, then activation) and random data.
// float16 scaling and ReLU6 are the paper's; the rounding rule is this
// design's choice, which the reference copies.
package ref_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    m = real'(h[9:0]) / 1024.0;
    if (e == 0) return (h[15] ? -1.0 : 1.0) * m * (2.0 ** -14);
    return (h[15] ? -1.0 : 1.0) * (1.0 + m) * (2.0 ** (e - 15));
  endfunction

  // act: 0 none, 1 ReLU, 2 ReLU6 (clamped to r6)
  function automatic int scale_ref(input int x, input logic [15:0] h, input int act, input int r6);
    real v, f;
    int  q;
    if (h[14:10] == 5'd31) begin
      if (x == 0) q = 0;
      else q = ((x < 0) != h[15]) ? -128 : 127;
    end else begin
      v = real'(x) * fp16_to_real(h);
      f = $floor(v);
      if (v - f > 0.5) f = f + 1.0;
      else if (v - f == 0.5 && ($rtoi(f) % 2 != 0)) f = f + 1.0;
      if (f > 127.0) q = 127;
      else if (f < -128.0) q = -128;
      else q = $rtoi(f);
    end
    if (act == 1 && q < 0) q = 0;
    if (act == 2) begin
      if (q < 0) q = 0;
      if (q > r6) q = r6;
    end
    return q;
  endfunction

  // a random float16 with a modest exponent
  function automatic logic [15:0] rnd_scale();
    logic [15:0] h;
    h[15]    = ($urandom_range(7) == 0);
    h[14:10] = 5'($urandom_range(5, 17));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
