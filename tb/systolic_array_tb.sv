// systolic_array_tb: loads random weight tiles into the default 32x32 array,
// streams random activation rows through it back to back and compares every
// result row with a plain matrix product computed here. Also checks the
// latency from a_valid to c_valid (DIM + DIM/2 - 1 cycles). Values are kept
// small enough that the 18-bit column sums cannot overflow.
// Size (32x32) and the 18-bit outputs are the paper's; the latency formula
// follows from this design's one register per packed PE.
module systolic_array_tb;
  localparam int DIM = 32;
  localparam int LAT = DIM + DIM / 2 - 1;
  localparam int NROWS = 40;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic               w_shift, a_valid, c_valid;
  logic signed [7:0]  w_row [DIM];
  logic signed [7:0]  a_row [DIM];
  logic signed [17:0] c_row [DIM];
  int checks = 0, failures = 0;

  systolic_array #(.DIM(DIM), .IN_W(8), .OUT_W(18)) dut (.*);

  int W [DIM][DIM];
  int A [NROWS][DIM];
  int cycle = 0, first_in = -1, first_out = -1, nout = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) if (!reset && c_valid) begin
    if (first_out < 0) first_out = cycle;
    for (int n = 0; n < DIM; n++) begin
      int exp;
      exp = 0;
      for (int k = 0; k < DIM; k++) exp += A[nout][k] * W[k][n];
      checks++;
      if (int'(c_row[n]) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d col %0d: got %0d expected %0d", nout, n, c_row[n], exp);
      end
    end
    nout++;
  end

  initial begin
    w_shift = 0; a_valid = 0;
    for (int k = 0; k < DIM; k++) begin w_row[k] = 0; a_row[k] = 0; end
    repeat (3) @(posedge clk);
    reset = 0;
    for (int tile = 0; tile < 3; tile++) begin
      for (int k = 0; k < DIM; k++)
        for (int n = 0; n < DIM; n++) W[k][n] = int'($urandom_range(126)) - 63;
      if (tile == 2) for (int n = 0; n < DIM; n++) W[DIM-1][n] = -63;
      for (int r = 0; r < NROWS; r++)
        for (int k = 0; k < DIM; k++) A[r][k] = int'($urandom_range(127)) - 64;
      // push weights, bottom row first
      for (int k = DIM - 1; k >= 0; k--) begin
        @(negedge clk);
        w_shift = 1;
        for (int n = 0; n < DIM; n++) w_row[n] = 8'(W[k][n]);
      end
      @(negedge clk);
      w_shift = 0;
      nout = 0; first_out = -1;
      for (int r = 0; r < NROWS; r++) begin
        a_valid = 1;
        for (int k = 0; k < DIM; k++) a_row[k] = 8'(A[r][k]);
        if (r == 0) first_in = cycle;
        @(negedge clk);
      end
      a_valid = 0;
      repeat (LAT + 2) @(negedge clk);
      checks++;
      if (nout != NROWS) begin failures++; $display("FAIL: %0d rows out of %0d", nout, NROWS); end
      checks++;
      if (first_out - first_in != LAT) begin
        failures++;
        $display("FAIL latency %0d expected %0d", first_out - first_in, LAT);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
