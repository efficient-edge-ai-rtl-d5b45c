// loop_matmul_tb: sends random CISC-type matmul instructions (1..4 tiles per
// dimension, random addresses and strides) to the loop state machine and
// compares every command it issues, field by field, with a list built here
// from the loop order the block documents (A loads, B loads, computes with
// n, k outer and i inner, stores). Downstream readiness is random for half of
// the instructions; for the other half it is always high and the block must
// issue one command per cycle (count checked against the list length).
// The instruction format and loop order are this design's own; the paper
// states only that such hard-coded loops exist.
module loop_matmul_tb;
  import gemmini_pkg::*;
  localparam int DIM = 32;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic      in_valid, in_ready, out_valid, out_ready, busy;
  loop_cmd_t in;
  cmd_t      out;
  int checks = 0, failures = 0, cycle = 0;
  bit random_ready = 0;

  loop_matmul dut (.*);

  cmd_t exp_q[$];
  int   n_got, t_first, t_last;

  always @(posedge clk) cycle <= cycle + 1;
  always @(negedge clk) out_ready = random_ready ? ($urandom_range(2) != 0) : 1'b1;

  always @(posedge clk) if (!reset && out_valid && out_ready) begin
    cmd_t e;
    if (n_got == 0) t_first = cycle;
    t_last = cycle;
    n_got++;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected command %p", out); end
    else begin
      e = exp_q.pop_front();
      if (out != e) begin
        failures++;
        if (failures < 10) $display("FAIL command %0d: got %p expected %p", n_got, out, e);
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cmd_t mk(input opcode_e op);
    cmd_t c;
    c = '0; c.op = op; c.rows = (op == OP_CONFIG_LD || op == OP_CONFIG_ST) ? '0 : ROWS_W'(DIM);
    return c;
  endfunction

  initial begin
    in_valid = 0; in = '0; n_got = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int t = 0; t < 40; t++) begin
      int m, n, k, boff, total;
      loop_cmd_t l;
      cmd_t c;
      random_ready = (t % 2 == 1);
      m = int'($urandom_range(4, 1)); n = int'($urandom_range(4, 1)); k = int'($urandom_range(4, 1));
      l = '0;
      l.a_addr = $urandom & ~32'h1f; l.b_addr = $urandom & ~32'h1f; l.c_addr = $urandom & ~32'h1f;
      l.a_stride = 32'(k * DIM + 32 * int'($urandom_range(3))); l.b_stride = 32'(n * DIM);
      l.c_stride = 32'(n * DIM + 32 * int'($urandom_range(3)));
      l.m_tiles = TILES_W'(m); l.n_tiles = TILES_W'(n); l.k_tiles = TILES_W'(k);
      l.scale = 16'($urandom); l.act = act_e'($urandom_range(2)); l.relu6_max = 8'($urandom);
      boff = m * k * DIM;
      exp_q.delete();
      c = mk(OP_CONFIG_LD); c.stride = l.a_stride; exp_q.push_back(c);
      for (int i = 0; i < m; i++) for (int kk = 0; kk < k; kk++) begin
        c = mk(OP_MVIN); c.dram_addr = l.a_addr + 32'(i * DIM) * l.a_stride + 32'(kk * DIM);
        c.local_addr.row = LROW_W'((i * k + kk) * DIM); exp_q.push_back(c);
      end
      c = mk(OP_CONFIG_LD); c.stride = l.b_stride; exp_q.push_back(c);
      for (int kk = 0; kk < k; kk++) for (int j = 0; j < n; j++) begin
        c = mk(OP_MVIN); c.dram_addr = l.b_addr + 32'(kk * DIM) * l.b_stride + 32'(j * DIM);
        c.local_addr.row = LROW_W'(boff + (kk * n + j) * DIM); exp_q.push_back(c);
      end
      for (int j = 0; j < n; j++) for (int kk = 0; kk < k; kk++) for (int i = 0; i < m; i++) begin
        c = mk(OP_COMPUTE); c.a_addr = LROW_W'((i * k + kk) * DIM); c.b_addr = LROW_W'(boff + (kk * n + j) * DIM);
        c.preload = (i == 0); c.local_addr.is_acc = 1; c.local_addr.accumulate = (kk != 0);
        c.local_addr.row = LROW_W'((i * n + j) * DIM); exp_q.push_back(c);
      end
      c = mk(OP_CONFIG_ST); c.stride = l.c_stride; c.scale = l.scale; c.act = l.act; c.relu6_max = l.relu6_max;
      exp_q.push_back(c);
      for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
        c = mk(OP_MVOUT); c.dram_addr = l.c_addr + 32'(i * DIM) * l.c_stride + 32'(j * DIM);
        c.local_addr.is_acc = 1; c.local_addr.row = LROW_W'((i * n + j) * DIM); exp_q.push_back(c);
      end
      total = exp_q.size();
      n_got = 0;
      @(negedge clk);
      in_valid = 1; in = l;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      while (busy) @(negedge clk);
      checks++;
      if (n_got != total || exp_q.size() != 0) begin
        failures++; $display("FAIL instruction %0d: %0d commands, expected %0d", t, n_got, total);
      end
      if (!random_ready) begin
        checks++;
        if (t_last - t_first + 1 != total) begin
          failures++; $display("FAIL instruction %0d: %0d commands took %0d cycles", t, total, t_last - t_first + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
