// accumulator_tb: issues random overwrite and accumulate writes to the
// default 1024-row accumulator, including back-to-back accumulates into one
// row (which need the forwarding path), then reads the rows back and compares
// them with a reference kept here. Checks the 2-cycle read latency.
// The size (128 KiB) is the paper's; the 2-cycle latency is this design's.
module accumulator_tb;
  localparam int ROWS = 1024, DIM = 32, AW = 32;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic                w_valid, w_accumulate, r_valid, rd_valid;
  logic [9:0]          w_row, r_row;
  logic [DIM*AW-1:0]   w_data, rd_data;
  int checks = 0, failures = 0, cycle = 0;

  accumulator #(.ROWS(ROWS), .DIM(DIM), .ACC_W(AW)) dut (.*);

  logic [DIM*AW-1:0] ref_mem [int];
  logic [DIM*AW-1:0] exp_q [$];
  int                due_q [$];
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (!reset && rd_valid) begin
      checks++;
      if (exp_q.size() == 0 || due_q[0] != cycle || rd_data != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL read at cycle %0d", cycle);
      end
      if (exp_q.size() != 0) begin void'(exp_q.pop_front()); void'(due_q.pop_front()); end
    end
  end

  initial begin
    int rows_used [16];
    w_valid = 0; r_valid = 0; w_accumulate = 0; w_row = 0; r_row = 0; w_data = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int round = 0; round < 4; round++) begin
      for (int i = 0; i < 16; i++) rows_used[i] = int'($urandom_range(ROWS - 1));
      // writes: first an overwrite of each row, then random ones
      for (int n = 0; n < 120; n++) begin
        int r;
        logic acc;
        logic [DIM*AW-1:0] old;
        @(negedge clk);
        r   = (n < 16) ? rows_used[n] : rows_used[(n % 7 < 3) ? 0 : $urandom_range(15)];
        acc = (n >= 16) && ($urandom_range(3) != 0);
        w_valid = 1; w_row = 10'(r); w_accumulate = acc;
        for (int e = 0; e < DIM; e++) w_data[e*AW +: AW] = $urandom;
        old = ref_mem.exists(r) ? ref_mem[r] : '0;
        for (int e = 0; e < DIM; e++)
          ref_mem[r][e*AW +: AW] = acc ? old[e*AW +: AW] + w_data[e*AW +: AW] : w_data[e*AW +: AW];
      end
      @(negedge clk);
      w_valid = 0;
      repeat (3) @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        r_valid = 1; r_row = 10'(rows_used[i]);
        exp_q.push_back(ref_mem[rows_used[i]]);
        due_q.push_back(cycle + 2);
        @(negedge clk);
      end
      r_valid = 0;
      repeat (4) @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d reads unanswered", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
