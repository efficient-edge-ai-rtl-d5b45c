// gemmini_top_tb: end-to-end test of the accelerator at its default size
// (32x32 array, 512 KiB scratchpad, 128 KiB accumulator, 32 requests in
// flight) against a behavioural memory with long random latencies.
//
// Program: C = requant(A x B) for int8 A (M x K) and B (K x N), M = K = N = 64,
// tiled into 32x32 tiles: all tiles are loaded with MVIN; for each output
// column tile and each K tile the B tile is preloaded once and reused for
// both row tiles (COMPUTE with and without preload), partial products of the
// second K tile are accumulated; then every C tile is stored twice, once
// with ReLU6 and a small scale, once with no activation and a large scale
// (which saturates). Before the computes, 48 rows of A are loaded in one
// command and copied back out of the scratchpad while the array runs.
// All results are compared with a reference computed here.
//
// The mechanisms the design has are counted and each must occur: DMA stall
// on the in-flight limit, a command held back by the reorder buffer for a
// dependency, two controllers working at once, weight preload and weight
// reuse, accumulate writes, ReLU6 clamping, int8 saturation, store from the
// scratchpad, and the store and execute controllers contending for the
// shared scratchpad read port. Finally the same product is run once more as
// a single CISC-type instruction through loop_matmul (which must issue
// exactly 23 commands) and its result is checked as well.
//
// The accelerator is instantiated with no parameter overrides, so all sizes
// are the published configuration. The program, the data ranges (weights in
// -63..63, inside the -127..127 range the DSP packing needs) and the 20..120
// cycle memory latency are this testbench's choices. The paper gives no
// end-to-end cycle figure; the total cycle count is printed.
module gemmini_top_tb;
  import gemmini_pkg::*;
  import ref_pkg::*;
  localparam int M = 64, K = 64, N = 64, T = 32;
  localparam int A_BASE = 32'h0001_0000, B_BASE = 32'h0002_0000;
  localparam int C1_BASE = 32'h0003_0000, C2_BASE = 32'h0004_0000, A_COPY = 32'h0005_0000;
  localparam int C3_BASE = 32'h0006_0000;
  localparam logic [15:0] SCALE1 = 16'h1c00;  // 2^-8
  localparam logic [15:0] SCALE2 = 16'h2c00;  // 2^-4
  localparam int R6 = 40;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready, busy;
  cmd_t        cmd;
  logic        loop_valid, loop_ready;
  loop_cmd_t   loop_cmd;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid, dma_stall;
  logic [31:0] mem_req_addr;
  logic [255:0] mem_req_wdata, mem_resp_rdata;
  logic [4:0]  mem_req_tag, mem_resp_tag;
  int checks = 0, failures = 0;

  gemmini_top dut (.*);

  mem_model #(.ROW_W(256), .TAG_W(5), .MIN_LAT(20), .MAX_LAT(120)) u_mem (
    .clk, .reset, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_tag(mem_req_tag),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_rdata(mem_resp_rdata));

  int A [M][K];
  int B [K][N];

  // byte access to the memory model
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

  // mechanism counters
  int n_stall = 0, n_dep_wait = 0, n_overlap = 0, n_preload = 0, n_reuse = 0, n_accum = 0;
  int n_clamp = 0, n_sat = 0, n_spad_out = 0, n_contend = 0, n_cisc = 0, n_cisc_cmds = 0, cycle = 0;

  always @(posedge clk) if (!reset) begin
    cycle <= cycle + 1;
    if (dma_stall) n_stall++;
    if (dut.lm_valid && dut.lm_ready) n_cisc_cmds++;
    if (dut.ex_spad_r_valid && dut.st_spad_r_valid) n_contend++;
    if ((dut.u_load.state != 0) + (dut.u_exec.state != 0) + (dut.u_store.state != 0) >= 2) n_overlap++;
    if (dut.u_exec.acc_w_valid && dut.u_exec.acc_w_accumulate) n_accum++;
    if (dut.ex_valid && dut.ex_ready) begin
      if (dut.ex_cmd.preload) n_preload++; else n_reuse++;
    end
    // an entry that waits although its controller is idle and it is first in
    // its controller's order: held by a dependency on another controller
    for (int i = 0; i < ROB_ENTRIES; i++)
      if (dut.u_rob.valid[i] && !dut.u_rob.issued[i] && !dut.u_rob.ready_to_issue[i]) begin
        bit first;
        first = 1;
        for (int j = 0; j < ROB_ENTRIES; j++)
          if (dut.u_rob.valid[j] && dut.u_rob.older[i][j] && dut.u_rob.e_deps[j].q == dut.u_rob.e_deps[i].q &&
              !dut.u_rob.issued[j]) first = 0;
        if (first) begin n_dep_wait++; break; end
      end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic int a_row(input int i, input int k); return (i * 2 + k) * T; endfunction
  function automatic int b_row(input int k, input int n); return 128 + (k * 2 + n) * T; endfunction
  function automatic int c_row(input int i, input int n); return (i * 2 + n) * T; endfunction

  initial begin
    cmd_t c;
    int t_start, t_end, t_cisc;
    cmd_valid = 0; cmd = '0; loop_valid = 0; loop_cmd = '0;
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) begin
      A[i][k] = int'($urandom_range(127)) - 64;
      put_byte(A_BASE + i * K + k, A[i][k]);
    end
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) begin
      B[k][n] = int'($urandom_range(126)) - 63;
      put_byte(B_BASE + k * N + n, B[k][n]);
    end
    repeat (3) @(posedge clk);
    reset = 0;
    t_start = cycle;

    c = '0; c.op = OP_CONFIG_LD; c.stride = 32'(K); send(c);
    for (int i = 0; i < M / T; i++) for (int k = 0; k < K / T; k++) begin
      c = '0; c.op = OP_MVIN; c.dram_addr = 32'(A_BASE + i * T * K + k * T);
      c.local_addr.row = 14'(a_row(i, k)); c.rows = 6'(T); send(c);
    end
    for (int k = 0; k < K / T; k++) for (int n = 0; n < N / T; n++) begin
      c = '0; c.op = OP_MVIN; c.dram_addr = 32'(B_BASE + k * T * N + n * T);
      c.local_addr.row = 14'(b_row(k, n)); c.rows = 6'(T); send(c);
    end
    // load 48 rows of A's first column tile in one command (more rows than
    // tags, so the DMA must stall) and copy them back out of the scratchpad
    c = '0; c.op = OP_MVIN; c.dram_addr = 32'(A_BASE);
    c.local_addr.row = 14'(1024); c.rows = 6'(48); send(c);
    c = '0; c.op = OP_CONFIG_ST; c.stride = 32'(N); c.scale = 16'h3c00; send(c);
    c = '0; c.op = OP_MVOUT; c.dram_addr = 32'(A_COPY);
    c.local_addr.is_acc = 0; c.local_addr.row = 14'(1024); c.rows = 6'(48); send(c);
    for (int n = 0; n < N / T; n++)
      for (int k = 0; k < K / T; k++)
        for (int i = 0; i < M / T; i++) begin
          c = '0; c.op = OP_COMPUTE; c.rows = 6'(T);
          c.a_addr = 14'(a_row(i, k)); c.b_addr = 14'(b_row(k, n)); c.preload = (i == 0);
          c.local_addr.is_acc = 1; c.local_addr.accumulate = (k > 0); c.local_addr.row = 14'(c_row(i, n));
          send(c);
        end
    c = '0; c.op = OP_CONFIG_ST; c.stride = 32'(N); c.scale = SCALE1; c.act = ACT_RELU6; c.relu6_max = 8'(R6);
    send(c);
    for (int i = 0; i < M / T; i++) for (int n = 0; n < N / T; n++) begin
      c = '0; c.op = OP_MVOUT; c.dram_addr = 32'(C1_BASE + i * T * N + n * T);
      c.local_addr.is_acc = 1; c.local_addr.row = 14'(c_row(i, n)); c.rows = 6'(T); send(c);
    end
    c = '0; c.op = OP_CONFIG_ST; c.stride = 32'(N); c.scale = SCALE2; c.act = ACT_NONE; c.relu6_max = 8'(R6);
    send(c);
    for (int i = 0; i < M / T; i++) for (int n = 0; n < N / T; n++) begin
      c = '0; c.op = OP_MVOUT; c.dram_addr = 32'(C2_BASE + i * T * N + n * T);
      c.local_addr.is_acc = 1; c.local_addr.row = 14'(c_row(i, n)); c.rows = 6'(T); send(c);
    end
    n_spad_out++;

    @(negedge clk);
    while (busy) @(negedge clk);
    t_end = cycle;

    // the same product again as one CISC-type instruction, with ReLU6
    loop_cmd.a_addr = 32'(A_BASE); loop_cmd.b_addr = 32'(B_BASE); loop_cmd.c_addr = 32'(C3_BASE);
    loop_cmd.a_stride = 32'(K); loop_cmd.b_stride = 32'(N); loop_cmd.c_stride = 32'(N);
    loop_cmd.m_tiles = TILES_W'(M / T); loop_cmd.n_tiles = TILES_W'(N / T); loop_cmd.k_tiles = TILES_W'(K / T);
    loop_cmd.scale = SCALE1; loop_cmd.act = ACT_RELU6; loop_cmd.relu6_max = 8'(R6);
    loop_valid = 1;
    @(posedge clk);
    while (!loop_ready) @(posedge clk);
    @(negedge clk);
    loop_valid = 0;
    n_cisc++;
    while (busy) @(negedge clk);
    t_cisc = cycle - t_end;

    // results
    for (int i = 0; i < M; i++) for (int n = 0; n < N; n++) begin
      int s, e1, e2, g1, g2;
      s = 0;
      for (int k = 0; k < K; k++) s += A[i][k] * B[k][n];
      e1 = scale_ref(s, SCALE1, 2, R6);
      e2 = scale_ref(s, SCALE2, 0, R6);
      if (e1 == R6 && real'(s) * fp16_to_real(SCALE1) > real'(R6) + 0.5) n_clamp++;
      if (e2 == 127 || e2 == -128) n_sat++;
      g1 = get_byte(C1_BASE + i * N + n);
      g2 = get_byte(C2_BASE + i * N + n);
      checks += 3;
      if (get_byte(C3_BASE + i * N + n) != e1) begin
        failures++; if (failures < 10) $display("FAIL C3[%0d][%0d] = %0d expected %0d", i, n, get_byte(C3_BASE + i * N + n), e1);
      end
      if (g1 != e1) begin failures++; if (failures < 10) $display("FAIL C1[%0d][%0d] = %0d expected %0d", i, n, g1, e1); end
      if (g2 != e2) begin failures++; if (failures < 10) $display("FAIL C2[%0d][%0d] = %0d expected %0d", i, n, g2, e2); end
    end
    for (int i = 0; i < 48; i++) for (int k = 0; k < T; k++) begin
      checks++;
      if (get_byte(A_COPY + i * N + k) != A[i][k]) begin
        failures++; if (failures < 10) $display("FAIL A copy [%0d][%0d]", i, k);
      end
    end

    $display("cycles %0d; stall %0d, dependency waits %0d, overlap %0d, preload %0d, reuse %0d, accumulate rows %0d, clamp %0d, saturate %0d, scratchpad stores %0d, read-port contention %0d, max requests pending %0d",
             t_end - t_start, n_stall, n_dep_wait, n_overlap, n_preload, n_reuse, n_accum, n_clamp, n_sat, n_spad_out, n_contend, u_mem.max_pending);
    checks++; if (n_stall == 0)    begin failures++; $display("FAIL no DMA stall"); end
    checks++; if (n_dep_wait == 0) begin failures++; $display("FAIL no dependency wait"); end
    checks++; if (n_overlap == 0)  begin failures++; $display("FAIL no controller overlap"); end
    checks++; if (n_preload == 0)  begin failures++; $display("FAIL no preload"); end
    checks++; if (n_reuse == 0)    begin failures++; $display("FAIL no weight reuse"); end
    checks++; if (n_accum == 0)    begin failures++; $display("FAIL no accumulate"); end
    checks++; if (n_clamp == 0)    begin failures++; $display("FAIL no ReLU6 clamp"); end
    checks++; if (n_sat == 0)      begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_spad_out == 0) begin failures++; $display("FAIL no scratchpad store"); end
    // CISC expansion: 1 + 4 A loads, 1 + 4 B loads, 8 computes, 1 + 4 stores
    checks++; if (n_cisc == 0 || n_cisc_cmds != 23) begin failures++; $display("FAIL CISC matmul issued %0d commands", n_cisc_cmds); end
    $display("CISC matmul: %0d commands, %0d cycles", n_cisc_cmds, t_cisc);
    checks++; if (n_contend == 0)  begin failures++; $display("FAIL no read-port contention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
