// execute_controller_tb: the execute controller driving a real 32x32
// systolic array, with a modelled scratchpad (8-cycle reads, grant withheld
// at random in the second half) and a modelled accumulator. Runs COMPUTE
// commands with and without weight preload, overwriting and accumulating,
// and after each compares the accumulator rows with a matrix product
// computed here. With the grant always given, checks the command time:
// accept to done = DIM + R + SPAD_READ_DELAY + (DIM + DIM/2 - 1) + 4 cycles
// for a preloading command of R rows (without preload, DIM fewer).
// The array size and read delay are the paper's; the command timing is
// this design's.
module execute_controller_tb;
  import gemmini_pkg::*;
  localparam int DIM = 32, RD = 8;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic              cmd_valid, cmd_ready, spad_r_valid, spad_r_grant, spad_rd_valid, done;
  cmd_t              cmd;
  logic [3:0]        cmd_id, done_id;
  logic [13:0]       spad_r_row, acc_w_row;
  logic [DIM*8-1:0]  spad_rd_data;
  logic              sa_w_shift, sa_a_valid, sa_c_valid, acc_w_valid, acc_w_accumulate;
  logic signed [7:0]  sa_w_row [DIM];
  logic signed [7:0]  sa_a_row [DIM];
  logic signed [17:0] sa_c_row [DIM];
  logic [DIM*32-1:0] acc_w_data;
  int checks = 0, failures = 0;

  execute_controller #(.DIM(DIM), .OUT_W(18), .ACC_W(32), .ID_W(4)) dut (.*);
  systolic_array #(.DIM(DIM), .IN_W(8), .OUT_W(18)) u_sa (
    .clk, .reset, .w_shift(sa_w_shift), .w_row(sa_w_row), .a_valid(sa_a_valid), .a_row(sa_a_row),
    .c_valid(sa_c_valid), .c_row(sa_c_row));

  // scratchpad model
  int              spad [256][DIM];
  logic [DIM*8-1:0] sp_pipe [RD];
  logic             sp_v [RD];
  bit               random_grant = 0;
  int cycle = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    sp_v[0] <= spad_r_valid && spad_r_grant;
    for (int e = 0; e < DIM; e++) sp_pipe[0][e*8 +: 8] <= 8'(spad[int'(spad_r_row) % 256][e]);
    for (int i = 1; i < RD; i++) begin sp_v[i] <= sp_v[i-1]; sp_pipe[i] <= sp_pipe[i-1]; end
    if (reset) for (int i = 0; i < RD; i++) sp_v[i] <= 1'b0;
  end
  // the model's array read and pipeline give RD cycles like the scratchpad
  assign spad_rd_valid = sp_v[RD-1];
  assign spad_rd_data  = sp_pipe[RD-1];
  always @(negedge clk) spad_r_grant = random_grant ? ($urandom_range(2) != 0) : 1'b1;

  // accumulator model
  int acc [64][DIM];
  always @(posedge clk) if (!reset && acc_w_valid)
    for (int e = 0; e < DIM; e++)
      acc[int'(acc_w_row) % 64][e] = acc_w_accumulate ? acc[int'(acc_w_row) % 64][e] + int'(acc_w_data[e*32 +: 32])
                                                      : int'(acc_w_data[e*32 +: 32]);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W [DIM][DIM];
  int ref_acc [64][DIM];

  initial begin
    cmd_valid = 0; cmd = '0; cmd_id = 0;
    for (int r = 0; r < 256; r++)
      for (int e = 0; e < DIM; e++)
        spad[r][e] = (r < 128) ? int'($urandom_range(127)) - 64 : int'($urandom_range(126)) - 63;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int n = 0; n < 24; n++) begin
      cmd_t c;
      int rows, a0, b0, c0, t0, t1, expect_t;
      bit pre, accu;
      random_grant = (n >= 12);
      rows = (n % 6 == 0) ? DIM : int'($urandom_range(1, DIM));
      pre  = (n == 0) || ($urandom_range(1) == 0);
      accu = (n % 3 == 2);
      a0 = int'($urandom_range(96));          // activations in rows 0..127
      b0 = 128 + int'($urandom_range(96));    // weights in rows 128..255
      c0 = int'($urandom_range(32));
      c = '0;
      c.op = OP_COMPUTE; c.rows = 6'(rows); c.a_addr = 14'(a0); c.b_addr = 14'(b0);
      c.local_addr.row = 14'(c0); c.local_addr.is_acc = 1; c.local_addr.accumulate = accu;
      c.preload = pre;
      if (pre) for (int k = 0; k < DIM; k++) for (int m = 0; m < DIM; m++) W[k][m] = spad[b0 + k][m];
      for (int j = 0; j < rows; j++)
        for (int m = 0; m < DIM; m++) begin
          int s;
          s = 0;
          for (int k = 0; k < DIM; k++) s += spad[a0 + j][k] * W[k][m];
          ref_acc[c0 + j][m] = accu ? ref_acc[c0 + j][m] + s : s;
        end
      @(negedge clk);
      cmd_valid = 1; cmd = c; cmd_id = 4'(n);
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      cmd_valid = 0;
      while (!done) @(negedge clk);
      t1 = cycle;
      checks++;
      if (done_id != 4'(n)) begin failures++; $display("FAIL done id"); end
      if (!random_grant) begin
        expect_t = (pre ? DIM : 0) + rows + RD + (DIM + DIM / 2 - 1) + 4;
        checks++;
        if (t1 - t0 != expect_t) begin failures++; $display("FAIL command took %0d cycles, expected %0d", t1 - t0, expect_t); end
      end
      for (int j = 0; j < 64; j++)
        for (int m = 0; m < DIM; m++) begin
          checks++;
          if (acc[j][m] != ref_acc[j][m]) begin
            failures++;
            if (failures < 10) $display("FAIL cmd %0d acc[%0d][%0d] = %0d expected %0d", n, j, m, acc[j][m], ref_acc[j][m]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
