// reorder_buffer_tb: sends 400 random commands (loads, stores, computes and
// configs over a small range of rows, so that many depend on each other)
// through the reorder buffer to three modelled controllers that take random
// times. Each command carries a serial number in dram_addr. Checks that
// every command is issued once, to the right controller, in order within
// that controller, and never before every older command of another
// controller that it conflicts with (overlapping rows, one of them a write)
// has completed. Also checks that controllers did run concurrently and that
// dependencies did hold commands back.
// The paper names the reorder buffer only; the dependency rule checked here
// is this design's.
module reorder_buffer_tb;
  import gemmini_pkg::*;
  localparam int N = 400, E = 16, DIM = 32;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy;
  cmd_t cmd;
  logic ld_valid, ld_ready, ld_done, ex_valid, ex_ready, ex_done, st_valid, st_ready, st_done;
  cmd_t ld_cmd, ex_cmd, st_cmd;
  logic [3:0] ld_id, ex_id, st_id, ld_done_id, ex_done_id, st_done_id;
  int checks = 0, failures = 0;

  reorder_buffer #(.ENTRIES(E), .DIM(DIM)) dut (.*);

  cmd_t cmds [N];
  bit   issued [N];
  bit   completed [N];
  int   n_completed = 0, overlap_cycles = 0, waited = 0;

  function automatic int queue_of(input cmd_t c);
    if (c.op == OP_CONFIG_LD || c.op == OP_MVIN) return 0;
    if (c.op == OP_CONFIG_ST || c.op == OP_MVOUT) return 2;
    return 1;
  endfunction

  // row sets as [mem][row] flags; mem 0 scratchpad, 1 accumulator
  function automatic bit touches(input cmd_t c, input bit write, input int mem, input int row);
    case (c.op)
      OP_MVIN:    return write && mem == 0 && row >= c.local_addr.row && row < c.local_addr.row + c.rows;
      OP_MVOUT:   return !write && mem == int'(c.local_addr.is_acc) && row >= c.local_addr.row && row < c.local_addr.row + c.rows;
      OP_COMPUTE: begin
        if (write) return mem == 1 && row >= c.local_addr.row && row < c.local_addr.row + c.rows;
        if (mem != 0) return 0;
        if (row >= c.a_addr && row < c.a_addr + c.rows) return 1;
        return c.preload && row >= c.b_addr && row < c.b_addr + DIM;
      end
      default:    return 0;
    endcase
  endfunction

  function automatic bit depends(input cmd_t y, input cmd_t o);
    for (int m = 0; m < 2; m++)
      for (int r = 0; r < 200; r++)
        if ((touches(y, 1, m, r) && (touches(o, 1, m, r) || touches(o, 0, m, r))) ||
            (touches(y, 0, m, r) && touches(o, 1, m, r))) return 1;
    return 0;
  endfunction

  task automatic on_issue(input int q, input cmd_t c);
    int s;
    s = int'(c.dram_addr);
    checks++;
    if (s < 0 || s >= N || issued[s] || queue_of(cmds[s]) != q || c != cmds[s]) begin
      failures++;
      $display("FAIL bad issue of %0d to queue %0d", s, q);
      return;
    end
    issued[s] = 1;
    for (int t = 0; t < s; t++) begin
      if (queue_of(cmds[t]) == q) begin
        checks++;
        if (!issued[t]) begin failures++; $display("FAIL %0d issued before %0d in queue %0d", s, t, q); end
      end else if (depends(cmds[s], cmds[t])) begin
        checks++;
        waited++;
        if (!completed[t]) begin failures++; $display("FAIL %0d issued before %0d completed", s, t); end
      end
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // three controller models
  for (genvar q = 0; q < 3; q++) begin : g_ctrl
    logic v, rdy, dn;
    cmd_t c;
    logic [3:0] id, did;
    int busy_left = 0;
    int cur = -1;
    always_comb begin
      case (q)
        0: begin v = ld_valid; c = ld_cmd; id = ld_id; end
        1: begin v = ex_valid; c = ex_cmd; id = ex_id; end
        default: begin v = st_valid; c = st_cmd; id = st_id; end
      endcase
    end
    assign rdy = (cur < 0);
    always @(posedge clk) begin
      dn <= 1'b0;
      if (!reset) begin
        if (cur >= 0) begin
          if (busy_left == 0) begin
            dn  <= 1'b1;
            did <= 4'(cur);
            completed[int'(cmds_by_slot[q])] = 1;
            n_completed++;
            cur = -1;
          end else busy_left--;
        end else if (v) begin
          on_issue(q, c);
          cur = int'(id);
          cmds_by_slot[q] = int'(c.dram_addr);
          busy_left = int'($urandom_range(12));
        end
      end
    end
  end
  int cmds_by_slot [3];

  assign ld_ready = g_ctrl[0].rdy; assign ld_done = g_ctrl[0].dn; assign ld_done_id = g_ctrl[0].did;
  assign ex_ready = g_ctrl[1].rdy; assign ex_done = g_ctrl[1].dn; assign ex_done_id = g_ctrl[1].did;
  assign st_ready = g_ctrl[2].rdy; assign st_done = g_ctrl[2].dn; assign st_done_id = g_ctrl[2].did;

  always @(posedge clk)
    if ((g_ctrl[0].cur >= 0) + (g_ctrl[1].cur >= 0) + (g_ctrl[2].cur >= 0) >= 2) overlap_cycles++;

  initial begin
    for (int i = 0; i < N; i++) begin
      cmd_t c;
      c = '0;
      c.dram_addr = 32'(i);
      case ($urandom_range(9))
        0: c.op = OP_CONFIG_LD;
        1: c.op = OP_CONFIG_ST;
        2, 3, 4: c.op = OP_MVIN;
        5, 6: c.op = OP_MVOUT;
        default: c.op = OP_COMPUTE;
      endcase
      c.rows = 6'($urandom_range(1, 16));
      c.local_addr.row = 14'($urandom_range(96));
      c.local_addr.is_acc = (c.op == OP_MVOUT) ? 1'($urandom_range(3) != 0) : 1'b0;
      c.a_addr = 14'($urandom_range(96));
      c.b_addr = 14'($urandom_range(96));
      c.preload = 1'($urandom);
      cmds[i] = c;
    end
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      cmd_valid = 1; cmd = cmds[i];
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
      if ($urandom_range(3) == 0) repeat ($urandom_range(4)) @(negedge clk);
    end
    while (n_completed < N) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after all commands"); end
    checks++;
    if (overlap_cycles == 0) begin failures++; $display("FAIL controllers never overlapped"); end
    checks++;
    if (waited == 0) begin failures++; $display("FAIL no dependency seen"); end
    $display("overlap cycles %0d, dependencies checked %0d", overlap_cycles, waited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
