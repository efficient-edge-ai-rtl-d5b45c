// store_controller_tb: configures scale, activation and stride with CONFIG_ST
// and issues MVOUT commands from the accumulator and from the scratchpad.
// Modelled memories answer reads (accumulator after 2 cycles, scratchpad
// after 8 and only when granted, the grant being withheld at random); a
// modelled DMA accepts writes at random and acknowledges them late. Checks
// each written row's address and data (accumulator rows against the
// real-number scaling reference) and that done comes after the last
// acknowledgement, with the right id.
// The float16 scaling is the paper's; the command fields and handshakes are
// this design's.
module store_controller_tb;
  import gemmini_pkg::*;
  import ref_pkg::*;
  localparam int DIM = 32;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic              cmd_valid, cmd_ready, acc_r_valid, acc_rd_valid, spad_r_valid, spad_r_grant;
  logic              spad_rd_valid, dma_wr_valid, dma_wr_ready, dma_wr_done, done;
  cmd_t              cmd;
  logic [3:0]        cmd_id, done_id;
  logic [13:0]       acc_r_row, spad_r_row;
  logic [DIM*32-1:0] acc_rd_data;
  logic [DIM*8-1:0]  spad_rd_data, dma_wr_data;
  logic [31:0]       dma_wr_addr;
  int checks = 0, failures = 0;

  store_controller #(.DIM(DIM), .ACC_W(32), .ID_W(4)) dut (.*);

  function automatic logic [DIM*32-1:0] acc_row(input int r);
    logic [DIM*32-1:0] v;
    for (int e = 0; e < DIM; e++) v[e*32 +: 32] = 32'((r * 131 + e * 977) % 20001 - 10000);
    return v;
  endfunction
  function automatic logic [DIM*8-1:0] spad_row(input int r);
    logic [DIM*8-1:0] v;
    for (int e = 0; e < DIM; e++) v[e*8 +: 8] = 8'(r * 31 + e * 7);
    return v;
  endfunction

  // memory models
  logic [DIM*32-1:0] acc_pipe [2];
  logic              acc_v [2];
  logic [DIM*8-1:0]  sp_pipe [8];
  logic              sp_v [8];
  int acks [$];
  int cycle = 0, acked = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    acc_v[0] <= acc_r_valid; acc_pipe[0] <= acc_row(int'(acc_r_row));
    acc_v[1] <= acc_v[0];    acc_pipe[1] <= acc_pipe[0];
    sp_v[0] <= spad_r_valid && spad_r_grant; sp_pipe[0] <= spad_row(int'(spad_r_row));
    for (int i = 1; i < 8; i++) begin sp_v[i] <= sp_v[i-1]; sp_pipe[i] <= sp_pipe[i-1]; end
  end
  assign acc_rd_valid  = acc_v[1];
  assign acc_rd_data   = acc_pipe[1];
  assign spad_rd_valid = sp_v[7];
  assign spad_rd_data  = sp_pipe[7];

  logic [DIM*8-1:0] exp_data [$];
  int               exp_addr [$];

  always @(posedge clk) if (!reset && dma_wr_valid && dma_wr_ready) begin
    checks++;
    if (exp_addr.size() == 0 || int'(dma_wr_addr) != exp_addr[0] || dma_wr_data != exp_data[0]) begin
      failures++;
      if (failures < 10) $display("FAIL write addr %0h", dma_wr_addr);
    end
    if (exp_addr.size() != 0) begin void'(exp_addr.pop_front()); void'(exp_data.pop_front()); end
    acks.push_back(cycle + 1 + int'($urandom_range(30)));
  end
  always @(negedge clk) begin
    dma_wr_ready = ($urandom_range(2) != 0);
    spad_r_grant = ($urandom_range(2) != 0);
    dma_wr_done  = 0;
    foreach (acks[i]) if (acks[i] <= cycle) begin
      dma_wr_done = 1;
      acked++;
      acks.delete(i);
      break;
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stride, act, r6;
    logic [15:0] scale;
    stride = 32; act = 0; r6 = 127; scale = 16'h3c00;
    cmd_valid = 0; cmd = '0; cmd_id = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int n = 0; n < 40; n++) begin
      cmd_t c;
      c = '0;
      if (n % 4 == 0) begin
        c.op = OP_CONFIG_ST;
        stride = 32 * int'($urandom_range(1, 8));
        scale  = {1'b0, 5'($urandom_range(3, 12)), 10'($urandom)};
        act    = n / 4 % 3;
        r6     = int'($urandom_range(1, 120));
        c.stride = 32'(stride); c.scale = scale; c.act = act_e'(act); c.relu6_max = 8'(r6);
      end else begin
        int rows, row0, base;
        logic from_acc;
        rows = int'($urandom_range(1, 32));
        row0 = int'($urandom_range(900));
        base = 32 * int'($urandom_range(100000));
        from_acc = (n % 4 != 3);
        c.op = OP_MVOUT; c.rows = 6'(rows); c.dram_addr = 32'(base);
        c.local_addr.row = 14'(row0); c.local_addr.is_acc = from_acc;
        for (int i = 0; i < rows; i++) begin
          logic [DIM*8-1:0] d;
          logic [DIM*32-1:0] a;
          a = acc_row(row0 + i);
          if (from_acc) for (int e = 0; e < DIM; e++) d[e*8 +: 8] = 8'(scale_ref(int'(signed'(a[e*32 +: 32])), scale, act, r6));
          else d = spad_row(row0 + i);
          exp_addr.push_back(base + i * stride);
          exp_data.push_back(d);
        end
      end
      acked = 0;
      @(negedge clk);
      cmd_valid = 1; cmd = c; cmd_id = 4'(n);
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
      while (!done) @(negedge clk);
      checks++;
      if (done_id != 4'(n)) begin failures++; $display("FAIL done id"); end
      if (c.op == OP_MVOUT) begin
        checks++;
        if (acked != int'(c.rows) || exp_addr.size() != 0) begin
          failures++;
          $display("FAIL done after %0d of %0d acks", acked, c.rows);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
