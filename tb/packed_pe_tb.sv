// packed_pe_tb: checks the DSP-packed PE against plain integer arithmetic.
// Loads random weight pairs, drives random activations and partial sums
// (within the 18-bit range the packing is exact for) and compares both
// partial-sum outputs, the forwarded activation and the weights one cycle
// later. Covers negative lower fields, where the borrow correction matters.
// Weights are drawn from [-127, 127]: with w0 = -128 and a negative w1 the
// 27-bit pre-adder word overflows (see packed_pe), and symmetric int8
// weight quantisation never produces -128.
// The bit layout under test is the paper's (DSP48E2 packing figure).
module packed_pe_tb;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic signed [7:0]  a_in, a_out, w0_in, w1_in, w0_out, w1_out;
  logic               w_shift;
  logic signed [17:0] ps0_in, ps1_in, ps0_out, ps1_out;
  int checks = 0, failures = 0;

  packed_pe #(.IN_W(8), .OUT_W(18)) dut (.*);

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint rnd(input int lo, input int hi);
    return longint'(lo) + longint'($urandom_range(hi - lo));
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e0, e1;
    a_in = 0; w0_in = 0; w1_in = 0; w_shift = 0; ps0_in = 0; ps1_in = 0;
    repeat (2) @(posedge clk);
    reset = 0;
    for (int t = 0; t < 2000; t++) begin
      // new weights every 8 cycles
      if (t % 8 == 0) begin
        w0_in = 8'(rnd(-127, 127)); w1_in = 8'(rnd(-127, 127));
        if (t % 64 == 0) begin w0_in = -127; w1_in = -127; end
        w_shift = 1;
        @(posedge clk); #1;
        w_shift = 0;
        check("w0_out", w0_out, w0_in);
        check("w1_out", w1_out, w1_in);
      end
      a_in   = 8'(rnd(-128, 127));
      ps0_in = 18'(rnd(-100000, 100000));
      ps1_in = 18'(rnd(-100000, 100000));
      if (t % 16 == 5) begin a_in = -128; ps1_in = -(2**17) + 16384; end
      e0 = longint'(ps0_in) + longint'(a_in) * longint'(w0_out);
      e1 = longint'(ps1_in) + longint'(a_in) * longint'(w1_out);
      @(posedge clk); #1;
      check("ps0", ps0_out, e0);
      check("ps1", ps1_out, e1);
      check("a_out", a_out, a_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
