// load_controller_tb: sets strides with CONFIG_LD and issues MVIN commands of
// 1..32 rows. A modelled DMA accepts requests at random and reports each row
// arrived after a random delay. Checks the address and scratchpad row of
// every request, that exactly 'rows' requests are made, and that done (with
// the right id) comes only after the last row has arrived.
// The command encoding and the handshake are this design's own; the paper
// gives only the controller's function.
module load_controller_tb;
  import gemmini_pkg::*;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready, dma_rd_valid, dma_rd_ready, dma_rd_done, done;
  cmd_t        cmd;
  logic [3:0]  cmd_id, done_id;
  logic [31:0] dma_rd_addr;
  logic [13:0] dma_rd_row;
  int checks = 0, failures = 0;

  load_controller #(.ID_W(4)) dut (.*);

  int exp_addr [$];
  int exp_row  [$];
  int arrivals [$];      // cycles at which a row arrival is due
  int cycle = 0, arrived = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DMA model
  always @(posedge clk) begin
    if (!reset && dma_rd_valid && dma_rd_ready) begin
      checks++;
      if (exp_addr.size() == 0 || int'(dma_rd_addr) != exp_addr[0] || int'(dma_rd_row) != exp_row[0]) begin
        failures++;
        if (failures < 10) $display("FAIL request addr %0h row %0d", dma_rd_addr, dma_rd_row);
      end
      if (exp_addr.size() != 0) begin void'(exp_addr.pop_front()); void'(exp_row.pop_front()); end
      arrivals.push_back(cycle + 1 + int'($urandom_range(20)));
    end
  end
  always @(negedge clk) begin
    dma_rd_ready = ($urandom_range(2) != 0);
    dma_rd_done  = 0;
    foreach (arrivals[i]) if (arrivals[i] <= cycle) begin
      dma_rd_done = 1;
      arrived++;
      arrivals.delete(i);
      break;
    end
  end

  initial begin
    int stride;
    stride = 32;
    cmd_valid = 0; cmd = '0; cmd_id = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int n = 0; n < 60; n++) begin
      cmd_t c;
      int rows, base, row0;
      c = '0;
      if (n % 5 == 0) begin
        c.op = OP_CONFIG_LD;
        stride = 32 * int'($urandom_range(1, 40));
        c.stride = 32'(stride);
      end else begin
        rows = int'($urandom_range(1, 32));
        base = 32 * int'($urandom_range(100000));
        row0 = int'($urandom_range(16000));
        c.op = OP_MVIN; c.rows = 6'(rows); c.dram_addr = 32'(base); c.local_addr.row = 14'(row0);
        for (int i = 0; i < rows; i++) begin
          exp_addr.push_back(base + i * stride);
          exp_row.push_back(row0 + i);
        end
      end
      arrived = 0;
      @(negedge clk);
      cmd_valid = 1; cmd = c; cmd_id = 4'(n);
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
      while (!done) @(negedge clk);
      checks++;
      if (done_id != 4'(n)) begin failures++; $display("FAIL done id"); end
      if (c.op == OP_MVIN) begin
        checks++;
        if (arrived != int'(c.rows) || exp_addr.size() != 0) begin
          failures++;
          $display("FAIL done after %0d of %0d rows, %0d requests missing", arrived, c.rows, exp_addr.size());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
