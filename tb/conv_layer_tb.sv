// conv_layer_tb: one convolution layer of the kind a YOLOv7-tiny backbone is
// built from (3x3 kernel, stride 1, padding 1, 32 input and 32 output
// channels, ReLU6 activation), run on the accelerator at its default size.
//
// The host's part is done here: the input feature map (8x8x32, int8, values
// 0..63 as after a ReLU6) is unrolled into an im2col matrix A of 64 rows
// (output pixels) by 288 columns (3*3*32 taps), the weights into B of 288 rows
// by 32 columns (values -63..63). The accelerator then loads 2x9 A tiles and
// 9 B tiles with MVIN, runs 9 accumulating COMPUTE commands per 32-pixel tile
// (one preload per B tile, reused by the second pixel tile) and stores the
// result with float16 scaling and ReLU6. Every output is compared with a
// direct convolution computed here, and the layer's cycle count is printed.
//
// Layer shape and input size are a small slice of the network, chosen so
// that every 32-row partial sum stays within the array's 18-bit outputs
// (32 * 63 * 63 < 2^17). The accelerator's sizes are the published ones; the
// lowering, data ranges and memory latency are this testbench's choices.
module conv_layer_tb;
  import gemmini_pkg::*;
  import ref_pkg::*;
  localparam int H = 8, W = 8, CI = 32, CO = 32, KS = 3, T = 32;
  localparam int M = H * W, K = KS * KS * CI, N = CO;
  localparam int KT = K / T, MT = M / T;
  localparam int A_BASE = 32'h0010_0000, B_BASE = 32'h0020_0000, C_BASE = 32'h0030_0000;
  localparam logic [15:0] SCALE = 16'h1800;  // 2^-9
  localparam int R6 = 80;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready, busy;
  cmd_t        cmd;
  logic        loop_valid = 0, loop_ready;
  loop_cmd_t   loop_cmd = '0;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid, dma_stall;
  logic [31:0] mem_req_addr;
  logic [255:0] mem_req_wdata, mem_resp_rdata;
  logic [4:0]  mem_req_tag, mem_resp_tag;
  int checks = 0, failures = 0, cycle = 0;

  gemmini_top dut (.*);

  mem_model #(.ROW_W(256), .TAG_W(5), .MIN_LAT(10), .MAX_LAT(60)) u_mem (
    .clk, .reset, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_tag(mem_req_tag),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_rdata(mem_resp_rdata));

  int fmap [H][W][CI];
  int wt [KS][KS][CI][CO];

  task automatic put_byte(input int addr, input int v);
    longint r;
    logic [255:0] row;
    r = longint'(addr) / 32;
    row = u_mem.mem.exists(r) ? u_mem.mem[r] : '0;
    row[(addr % 32) * 8 +: 8] = 8'(v);
    u_mem.mem[r] = row;
  endtask
  function automatic int get_byte(input int addr);
    longint r;
    r = longint'(addr) / 32;
    if (!u_mem.mem.exists(r)) return 9999;
    return int'(signed'(u_mem.mem[r][(addr % 32) * 8 +: 8]));
  endfunction

  task automatic send(input cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_t c;
    int t0, t1;
    cmd_valid = 0; cmd = '0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int ci = 0; ci < CI; ci++)
      fmap[y][x][ci] = int'($urandom_range(63));
    for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++)
      for (int ci = 0; ci < CI; ci++) for (int co = 0; co < CO; co++)
        wt[ky][kx][ci][co] = int'($urandom_range(126)) - 63;
    // im2col: A[y*W+x][(ky*KS+kx)*CI+ci], zero outside the map
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++) for (int ci = 0; ci < CI; ci++) begin
        int yy, xx, v;
        yy = y + ky - 1; xx = x + kx - 1;
        v = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? fmap[yy][xx][ci] : 0;
        put_byte(A_BASE + (y * W + x) * K + (ky * KS + kx) * CI + ci, v);
      end
    for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++)
      for (int ci = 0; ci < CI; ci++) for (int co = 0; co < CO; co++)
        put_byte(B_BASE + ((ky * KS + kx) * CI + ci) * N + co, wt[ky][kx][ci][co]);
    repeat (3) @(posedge clk);
    reset = 0;
    t0 = cycle;

    c = '0; c.op = OP_CONFIG_LD; c.stride = 32'(K); send(c);
    for (int i = 0; i < MT; i++) for (int k = 0; k < KT; k++) begin
      c = '0; c.op = OP_MVIN; c.dram_addr = 32'(A_BASE + i * T * K + k * T);
      c.local_addr.row = 14'((i * KT + k) * T); c.rows = 6'(T); send(c);
    end
    c = '0; c.op = OP_CONFIG_LD; c.stride = 32'(N); send(c);
    for (int k = 0; k < KT; k++) begin
      c = '0; c.op = OP_MVIN; c.dram_addr = 32'(B_BASE + k * T * N);
      c.local_addr.row = 14'(4096 + k * T); c.rows = 6'(T); send(c);
    end
    for (int k = 0; k < KT; k++)
      for (int i = 0; i < MT; i++) begin
        c = '0; c.op = OP_COMPUTE; c.rows = 6'(T);
        c.a_addr = 14'((i * KT + k) * T); c.b_addr = 14'(4096 + k * T); c.preload = (i == 0);
        c.local_addr.is_acc = 1; c.local_addr.accumulate = (k > 0); c.local_addr.row = 14'(i * T);
        send(c);
      end
    c = '0; c.op = OP_CONFIG_ST; c.stride = 32'(N); c.scale = SCALE; c.act = ACT_RELU6; c.relu6_max = 8'(R6);
    send(c);
    for (int i = 0; i < MT; i++) begin
      c = '0; c.op = OP_MVOUT; c.dram_addr = 32'(C_BASE + i * T * N);
      c.local_addr.is_acc = 1; c.local_addr.row = 14'(i * T); c.rows = 6'(T); send(c);
    end
    @(negedge clk);
    while (busy) @(negedge clk);
    t1 = cycle;

    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int co = 0; co < CO; co++) begin
      int s, e, g;
      s = 0;
      for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++) begin
        int yy, xx;
        yy = y + ky - 1; xx = x + kx - 1;
        if (yy >= 0 && yy < H && xx >= 0 && xx < W)
          for (int ci = 0; ci < CI; ci++) s += fmap[yy][xx][ci] * wt[ky][kx][ci][co];
      end
      e = scale_ref(s, SCALE, 2, R6);
      g = get_byte(C_BASE + (y * W + x) * N + co);
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 10) $display("FAIL out[%0d][%0d][%0d] = %0d expected %0d", y, x, co, g, e);
      end
    end
    // lower bound: the array streams each A row once per K tile
    checks++;
    if (t1 - t0 < MT * KT * T) begin failures++; $display("FAIL layer took %0d cycles", t1 - t0); end
    $display("conv layer %0dx%0dx%0d -> %0d channels: %0d MACs in %0d cycles (%0.1f MAC/cycle of %0d peak)",
             H, W, CI, CO, M * K * N, t1 - t0, real'(M * K * N) / real'(t1 - t0), T * T);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
