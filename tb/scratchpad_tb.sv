// scratchpad_tb: writes random rows through both ports, reads them back
// through both ports, and checks the data, the returned tags and that every
// read answers exactly READ_DELAY (8) cycles after its request. Uses the
// default 512 KiB size. A reference copy of the written rows is kept here.
// Size, two ports and the read delay of 8 are the paper's; the tags are
// this design's.
module scratchpad_tb;
  localparam int ROWS = 16384, RW = 256, RD = 8;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic          p0_en, p0_we, p1_en, p1_we, p0_tag, p1_tag;
  logic [13:0]   p0_addr, p1_addr;
  logic [RW-1:0] p0_wdata, p1_wdata, p0_rdata, p1_rdata;
  logic          p0_rvalid, p1_rvalid, p0_rtag, p1_rtag;
  int checks = 0, failures = 0, cycle = 0;

  scratchpad #(.ROWS(ROWS), .ROW_W(RW), .READ_DELAY(RD), .TAG_W(1)) dut (.*);

  logic [RW-1:0] ref_mem [int];
  // expected responses per port, indexed by the cycle they are due
  logic [RW-1:0] exp0_d [int];
  logic [RW-1:0] exp1_d [int];
  logic          exp0_t [int];
  logic          exp1_t [int];

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [RW-1:0] rnd_row();
    logic [RW-1:0] r;
    for (int i = 0; i < RW / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // response checker, sampled just after each rising edge
  always @(posedge clk) begin
    #1;
    if (!reset) begin
      checks++;
      if (p0_rvalid != exp0_d.exists(cycle)) begin failures++; $display("FAIL p0 rvalid at %0d", cycle); end
      else if (p0_rvalid) begin
        checks++;
        if (p0_rdata != exp0_d[cycle] || p0_rtag != exp0_t[cycle]) begin failures++; $display("FAIL p0 data at %0d", cycle); end
      end
      checks++;
      if (p1_rvalid != exp1_d.exists(cycle)) begin failures++; $display("FAIL p1 rvalid at %0d", cycle); end
      else if (p1_rvalid) begin
        checks++;
        if (p1_rdata != exp1_d[cycle] || p1_rtag != exp1_t[cycle]) begin failures++; $display("FAIL p1 data at %0d", cycle); end
      end
    end
  end

  int addrs [64];

  initial begin
    p0_en = 0; p1_en = 0; p0_we = 0; p1_we = 0; p0_tag = 0; p1_tag = 0;
    p0_addr = 0; p1_addr = 0; p0_wdata = 0; p1_wdata = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int i = 0; i < 64; i++) addrs[i] = (i == 0) ? ROWS - 1 : int'($urandom_range(ROWS - 1));
    // writes: even indices on port 0, odd on port 1
    for (int i = 0; i < 64; i += 2) begin
      @(negedge clk);
      p0_en = 1; p0_we = 1; p0_addr = 14'(addrs[i]);   p0_wdata = rnd_row();
      if (addrs[i+1] == addrs[i]) addrs[i+1] = (addrs[i] + 1) % ROWS;
      p1_en = 1; p1_we = 1; p1_addr = 14'(addrs[i+1]); p1_wdata = rnd_row();
      ref_mem[addrs[i]] = p0_wdata;
      ref_mem[addrs[i+1]] = p1_wdata;
    end
    @(negedge clk);
    p0_en = 0; p1_en = 0; p0_we = 0; p1_we = 0;
    // reads on both ports, with idle gaps, random tags
    for (int n = 0; n < 300; n++) begin
      int a0, a1;
      @(negedge clk);
      a0 = addrs[$urandom_range(63)];
      a1 = addrs[$urandom_range(63)];
      p0_en = ($urandom_range(3) != 0); p0_we = 0; p0_addr = 14'(a0); p0_tag = 1'($urandom);
      p1_en = ($urandom_range(3) != 0); p1_we = 0; p1_addr = 14'(a1); p1_tag = 1'($urandom);
      // sampled at the next rising edge (the counter then reads cycle+1);
      // the response shows READ_DELAY edges after that request edge, minus
      // the one already counted: due when the counter reads cycle+RD
      if (p0_en) begin exp0_d[cycle + RD] = ref_mem[a0]; exp0_t[cycle + RD] = p0_tag; end
      if (p1_en) begin exp1_d[cycle + RD] = ref_mem[a1]; exp1_t[cycle + RD] = p1_tag; end
    end
    @(negedge clk);
    p0_en = 0; p1_en = 0;
    repeat (RD + 3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
