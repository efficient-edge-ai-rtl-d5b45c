// gemmini_top: the systolic-array accelerator as configured for the FPGA.
//
// Commands from the host CPU (the RISC-V core, not part of this RTL) enter the
// reorder buffer, either directly (RISC-type) or expanded from a CISC-type
// tiled matrix multiplication by loop_matmul, whose commands take precedence
// while it runs. The reorder buffer which issues them to three decoupled controllers: the load
// controller (DRAM -> scratchpad through the DMA), the execute controller
// (scratchpad -> DSP-packed systolic array -> accumulator) and the store
// controller (accumulator, through the float16 output scaler, or scratchpad
// -> DRAM through the DMA). The DMA's memory port stands for the connection
// to the L2 cache and DRAM (not part of this RTL).
//
// Scratchpad port 0 takes the DMA's writes; port 1 serves reads of the
// execute controller and, when the execute controller is not reading, of the
// store controller (a tag routes the data back). Sizes default to the paper's
// configuration: 32x32 PEs in 32x16 DSP-packed pairs, 18-bit array outputs,
// 512 KiB scratchpad with 2 ports and read delay 8, 128 KiB accumulator, 32
// memory requests in flight. Virtual address translation and the other units
// the paper disables are absent.
//
// Interface: cmd_valid/cmd_ready/cmd (gemmini_pkg::cmd_t) for RISC-type
// commands, loop_valid/loop_ready/loop_cmd (gemmini_pkg::loop_cmd_t) for the
// CISC-type matmul, busy while any command is outstanding or being expanded; memory requests mem_req_* (valid/ready, we, byte
// address, one 256-bit row, tag) and responses mem_resp_* (tag, data; one per
// request, any order, always accepted); dma_stall while a memory request
// waits for a free tag. Synchronous active-high reset.
module gemmini_top #(
  parameter int DIM             = gemmini_pkg::DIM,
  parameter int SPAD_ROWS       = gemmini_pkg::SPAD_ROWS,
  parameter int ACC_ROWS        = gemmini_pkg::ACC_ROWS,
  parameter int SPAD_READ_DELAY = gemmini_pkg::SPAD_READ_DELAY,
  parameter int MAX_INFLIGHT    = gemmini_pkg::MAX_INFLIGHT,
  parameter int ROB_ENTRIES     = gemmini_pkg::ROB_ENTRIES
) (
  input  logic                          clk,
  input  logic                          reset,
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  gemmini_pkg::cmd_t             cmd,
  input  logic                          loop_valid,
  output logic                          loop_ready,
  input  gemmini_pkg::loop_cmd_t        loop_cmd,
  output logic                          busy,
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output logic                          mem_req_we,
  output logic [gemmini_pkg::ADDR_W-1:0] mem_req_addr,
  output logic [DIM*8-1:0]              mem_req_wdata,
  output logic [$clog2(MAX_INFLIGHT)-1:0] mem_req_tag,
  input  logic                          mem_resp_valid,
  input  logic [$clog2(MAX_INFLIGHT)-1:0] mem_resp_tag,
  input  logic [DIM*8-1:0]              mem_resp_rdata,
  output logic                          dma_stall
);
  import gemmini_pkg::*;

  localparam int IW    = $clog2(ROB_ENTRIES);
  localparam int RW    = DIM * IN_W;
  localparam int SAW   = $clog2(SPAD_ROWS);
  localparam int AAW   = $clog2(ACC_ROWS);

  // reorder buffer <-> controllers
  logic          ld_valid, ld_ready, ld_done;
  logic          ex_valid, ex_ready, ex_done;
  logic          st_valid, st_ready, st_done;
  cmd_t          ld_cmd, ex_cmd, st_cmd;
  logic [IW-1:0] ld_id, ex_id, st_id, ld_done_id, ex_done_id, st_done_id;

  // CISC-type loop expansion; its commands go first
  logic        lm_valid, lm_ready, lm_busy, rob_valid, rob_ready, rob_busy;
  cmd_t        lm_cmd, rob_cmd;
  loop_matmul #(.DIM(DIM), .SPAD_ROWS(SPAD_ROWS), .ACC_ROWS(ACC_ROWS)) u_loop (
    .clk, .reset, .in_valid(loop_valid), .in_ready(loop_ready), .in(loop_cmd),
    .out_valid(lm_valid), .out_ready(lm_ready), .out(lm_cmd), .busy(lm_busy)
  );
  assign rob_valid = lm_valid || cmd_valid;
  assign rob_cmd   = lm_valid ? lm_cmd : cmd;
  assign lm_ready  = rob_ready;
  assign cmd_ready = rob_ready && !lm_valid;
  assign busy      = rob_busy || lm_busy;

  reorder_buffer #(.ENTRIES(ROB_ENTRIES), .DIM(DIM)) u_rob (
    .clk, .reset, .cmd_valid(rob_valid), .cmd_ready(rob_ready), .cmd(rob_cmd),
    .ld_valid, .ld_ready, .ld_cmd, .ld_id, .ld_done, .ld_done_id,
    .ex_valid, .ex_ready, .ex_cmd, .ex_id, .ex_done, .ex_done_id,
    .st_valid, .st_ready, .st_cmd, .st_id, .st_done, .st_done_id,
    .busy(rob_busy)
  );

  // load path
  logic              dma_rd_valid, dma_rd_ready, dma_rd_done;
  logic [ADDR_W-1:0] dma_rd_addr;
  logic [LROW_W-1:0] dma_rd_row;

  load_controller #(.ID_W(IW)) u_load (
    .clk, .reset,
    .cmd_valid(ld_valid), .cmd_ready(ld_ready), .cmd(ld_cmd), .cmd_id(ld_id),
    .dma_rd_valid, .dma_rd_ready, .dma_rd_addr, .dma_rd_row, .dma_rd_done,
    .done(ld_done), .done_id(ld_done_id)
  );

  // store path
  logic              dma_wr_valid, dma_wr_ready, dma_wr_done;
  logic [ADDR_W-1:0] dma_wr_addr;
  logic [RW-1:0]     dma_wr_data;
  logic              acc_r_valid, acc_rd_valid;
  logic [LROW_W-1:0] acc_r_row;
  logic [DIM*ACC_W-1:0] acc_rd_data;
  logic              st_spad_r_valid, st_spad_r_grant, st_spad_rd_valid;
  logic [LROW_W-1:0] st_spad_r_row;

  // execute path
  logic              ex_spad_r_valid, ex_spad_r_grant, ex_spad_rd_valid;
  logic [LROW_W-1:0] ex_spad_r_row;
  logic              sa_w_shift, sa_a_valid, sa_c_valid;
  logic signed [IN_W-1:0]     sa_w_row [DIM];
  logic signed [IN_W-1:0]     sa_a_row [DIM];
  logic signed [SA_OUT_W-1:0] sa_c_row [DIM];
  logic              acc_w_valid, acc_w_accumulate;
  logic [LROW_W-1:0] acc_w_row;
  logic [DIM*ACC_W-1:0] acc_w_data;

  // scratchpad
  logic              spad_wen;
  logic [LROW_W-1:0] spad_wrow;
  logic [RW-1:0]     spad_wdata;
  logic              p0_rvalid, p1_rvalid;
  logic [RW-1:0]     p0_rdata, p1_rdata;
  logic              p0_rtag, p1_rtag;

  store_controller #(.DIM(DIM), .ACC_W(ACC_W), .ID_W(IW)) u_store (
    .clk, .reset,
    .cmd_valid(st_valid), .cmd_ready(st_ready), .cmd(st_cmd), .cmd_id(st_id),
    .acc_r_valid, .acc_r_row, .acc_rd_valid, .acc_rd_data,
    .spad_r_valid(st_spad_r_valid), .spad_r_grant(st_spad_r_grant), .spad_r_row(st_spad_r_row),
    .spad_rd_valid(st_spad_rd_valid), .spad_rd_data(p1_rdata),
    .dma_wr_valid, .dma_wr_ready, .dma_wr_addr, .dma_wr_data, .dma_wr_done,
    .done(st_done), .done_id(st_done_id)
  );

  execute_controller #(.DIM(DIM), .OUT_W(SA_OUT_W), .ACC_W(ACC_W), .ID_W(IW)) u_exec (
    .clk, .reset,
    .cmd_valid(ex_valid), .cmd_ready(ex_ready), .cmd(ex_cmd), .cmd_id(ex_id),
    .spad_r_valid(ex_spad_r_valid), .spad_r_grant(ex_spad_r_grant), .spad_r_row(ex_spad_r_row),
    .spad_rd_valid(ex_spad_rd_valid), .spad_rd_data(p1_rdata),
    .sa_w_shift, .sa_w_row, .sa_a_valid, .sa_a_row, .sa_c_valid, .sa_c_row,
    .acc_w_valid, .acc_w_row, .acc_w_accumulate, .acc_w_data,
    .done(ex_done), .done_id(ex_done_id)
  );

  systolic_array #(.DIM(DIM), .IN_W(IN_W), .OUT_W(SA_OUT_W)) u_array (
    .clk, .reset,
    .w_shift(sa_w_shift), .w_row(sa_w_row),
    .a_valid(sa_a_valid), .a_row(sa_a_row),
    .c_valid(sa_c_valid), .c_row(sa_c_row)
  );

  dma #(.MAX_INFLIGHT(MAX_INFLIGHT), .ADDR_W(ADDR_W), .ROW_W(RW), .LROW_W(LROW_W)) u_dma (
    .clk, .reset,
    .rd_req_valid(dma_rd_valid), .rd_req_ready(dma_rd_ready), .rd_req_addr(dma_rd_addr),
    .rd_req_row(dma_rd_row), .rd_done(dma_rd_done),
    .wr_req_valid(dma_wr_valid), .wr_req_ready(dma_wr_ready), .wr_req_addr(dma_wr_addr),
    .wr_req_data(dma_wr_data), .wr_done(dma_wr_done),
    .spad_wen, .spad_wrow, .spad_wdata,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata, .mem_req_tag,
    .mem_resp_valid, .mem_resp_tag, .mem_resp_rdata,
    .stall(dma_stall), .inflight()
  );

  // scratchpad port 1: execute controller first, then store controller
  assign ex_spad_r_grant  = ex_spad_r_valid;
  assign st_spad_r_grant  = st_spad_r_valid && !ex_spad_r_valid;
  assign ex_spad_rd_valid = p1_rvalid && !p1_rtag;
  assign st_spad_rd_valid = p1_rvalid && p1_rtag;

  scratchpad #(.ROWS(SPAD_ROWS), .ROW_W(RW), .READ_DELAY(SPAD_READ_DELAY), .TAG_W(1)) u_spad (
    .clk, .reset,
    .p0_en(spad_wen), .p0_we(1'b1), .p0_addr(spad_wrow[SAW-1:0]), .p0_wdata(spad_wdata), .p0_tag(1'b0),
    .p0_rvalid, .p0_rdata, .p0_rtag,
    .p1_en(ex_spad_r_valid || st_spad_r_valid), .p1_we(1'b0),
    .p1_addr(ex_spad_r_valid ? ex_spad_r_row[SAW-1:0] : st_spad_r_row[SAW-1:0]),
    .p1_wdata('0), .p1_tag(!ex_spad_r_valid),
    .p1_rvalid, .p1_rdata, .p1_rtag
  );

  accumulator #(.ROWS(ACC_ROWS), .DIM(DIM), .ACC_W(ACC_W)) u_acc (
    .clk, .reset,
    .w_valid(acc_w_valid), .w_row(acc_w_row[AAW-1:0]), .w_accumulate(acc_w_accumulate), .w_data(acc_w_data),
    .r_valid(acc_r_valid), .r_row(acc_r_row[AAW-1:0]),
    .rd_valid(acc_rd_valid), .rd_data(acc_rd_data)
  );
endmodule
