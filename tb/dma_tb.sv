// dma_tb: runs the DMA against the behavioural memory with long, random
// latencies. A reader asks for 200 rows and a writer stores 200 rows at the
// same time. Checks that every read lands once in the right scratchpad row
// with the right data, that every write reaches memory, that the number of
// requests in flight reaches the limit of 32 and never exceeds it, and that
// the stall signal is raised while the limit holds requests back.
// The limit of 32 requests in flight is the paper's; the tag protocol is
// this design's.
module dma_tb;
  localparam int N = 200, RW = 256, MI = 32;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic          rd_req_valid, rd_req_ready, rd_done, wr_req_valid, wr_req_ready, wr_done;
  logic [31:0]   rd_req_addr, wr_req_addr, mem_req_addr;
  logic [13:0]   rd_req_row, spad_wrow;
  logic [RW-1:0] wr_req_data, spad_wdata, mem_req_wdata, mem_resp_rdata;
  logic          spad_wen, mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid, stall;
  logic [4:0]    mem_req_tag, mem_resp_tag;
  logic [5:0]    inflight;
  int checks = 0, failures = 0;

  dma #(.MAX_INFLIGHT(MI), .ADDR_W(32), .ROW_W(RW), .LROW_W(14)) dut (.*);

  mem_model #(.ROW_W(RW), .TAG_W(5), .MIN_LAT(30), .MAX_LAT(90)) u_mem (
    .clk, .reset, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_tag(mem_req_tag),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_rdata(mem_resp_rdata));

  function automatic logic [RW-1:0] pattern(input int i);
    logic [RW-1:0] r;
    for (int w = 0; w < RW / 32; w++) r[w*32 +: 32] = 32'(i * 7919 + w * 104729 + 12345);
    return r;
  endfunction

  int got [int];
  int rd_done_n = 0, wr_done_n = 0, stall_cycles = 0, max_inflight = 0;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!reset) begin
    if (spad_wen) begin
      int i;
      i = int'(spad_wrow) - 100;
      checks++;
      if (i < 0 || i >= N || got.exists(i) || spad_wdata != pattern(i)) begin
        failures++;
        if (failures < 10) $display("FAIL spad write row %0d", spad_wrow);
      end
      got[i] = 1;
    end
    if (rd_done) rd_done_n++;
    if (wr_done) wr_done_n++;
    if (stall) stall_cycles++;
    if (int'(inflight) > max_inflight) max_inflight = int'(inflight);
  end

  initial begin
    rd_req_valid = 0; wr_req_valid = 0; rd_req_addr = 0; wr_req_addr = 0; rd_req_row = 0; wr_req_data = 0;
    for (int i = 0; i < N; i++) u_mem.mem[longint'(1000 + i)] = pattern(i);   // byte address (1000+i)*32
    repeat (3) @(posedge clk);
    reset = 0;
    fork
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        rd_req_valid = 1; rd_req_addr = 32'((1000 + i) * 32); rd_req_row = 14'(100 + i);
        @(posedge clk);
        while (!rd_req_ready) @(posedge clk);
        @(negedge clk);
        rd_req_valid = 0;
      end
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_req_valid = 1; wr_req_addr = 32'((5000 + i) * 32); wr_req_data = pattern(i + 777);
        @(posedge clk);
        while (!wr_req_ready) @(posedge clk);
        @(negedge clk);
        wr_req_valid = 0;
      end
    join
    while (rd_done_n < N || wr_done_n < N) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (got.size() != N) begin failures++; $display("FAIL %0d rows arrived", got.size()); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (!u_mem.mem.exists(longint'(5000 + i)) || u_mem.mem[longint'(5000 + i)] != pattern(i + 777)) begin
        failures++;
        if (failures < 10) $display("FAIL write %0d", i);
      end
    end
    checks++;
    if (max_inflight != MI) begin failures++; $display("FAIL max in flight %0d", max_inflight); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL stall never seen"); end
    checks++;
    if (inflight != 0) begin failures++; $display("FAIL %0d left in flight", inflight); end
    $display("max in flight %0d, stall cycles %0d", max_inflight, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
