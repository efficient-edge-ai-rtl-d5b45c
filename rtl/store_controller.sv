// store_controller: the decoupled unit that moves results from the
// accelerator to external memory.
//
// It takes one command at a time from the reorder buffer. CONFIG_ST stores
// the DRAM row stride (bytes), the float16 output scale, the activation
// (none, ReLU, ReLU6) and the quantised ReLU6 bound. MVOUT writes 'rows' rows
// to DRAM addresses dram_addr + i * stride. From the accumulator
// (local_addr.is_acc = 1) each row is read, scaled to int8 by the
// output_scaler inside this unit and written out; from the scratchpad the
// int8 row is written out as it is. Rows are handled one at a time: read,
// wait for the data, hand it to the DMA; the controller then waits for every
// write acknowledgement (dma_wr_done) and pulses done with the command id.
// A CONFIG_ST completes one cycle after it is accepted.
//
// Scratchpad reads go through a port shared with the execute controller:
// spad_r_valid is a request that counts only in a cycle where spad_r_grant
// is high; the data returns SPAD_READ_DELAY cycles later on spad_rd_valid.
// Accumulator data returns 2 cycles after acc_r_valid, scaled data one more.
// The unit's role and the float16 scale are the paper's; the rest is this
// design's own. Synchronous active-high reset (scale 1.0, no activation).
module store_controller #(
  parameter int DIM   = 32,
  parameter int ACC_W = 32,
  parameter int ID_W  = 4
) (
  input  logic                           clk,
  input  logic                           reset,
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  gemmini_pkg::cmd_t              cmd,
  input  logic [ID_W-1:0]                cmd_id,
  // accumulator read port
  output logic                           acc_r_valid,
  output logic [gemmini_pkg::LROW_W-1:0] acc_r_row,
  input  logic                           acc_rd_valid,
  input  logic [DIM*ACC_W-1:0]           acc_rd_data,
  // shared scratchpad read port
  output logic                           spad_r_valid,
  input  logic                           spad_r_grant,
  output logic [gemmini_pkg::LROW_W-1:0] spad_r_row,
  input  logic                           spad_rd_valid,
  input  logic [DIM*8-1:0]               spad_rd_data,
  // DMA write side
  output logic                           dma_wr_valid,
  input  logic                           dma_wr_ready,
  output logic [gemmini_pkg::ADDR_W-1:0] dma_wr_addr,
  output logic [DIM*8-1:0]               dma_wr_data,
  input  logic                           dma_wr_done,
  output logic                           done,
  output logic [ID_W-1:0]                done_id
);
  import gemmini_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_READ, S_DATA, S_WRITE, S_ACK} state_e;
  state_e state;

  logic [ADDR_W-1:0] stride, addr;
  logic [15:0]       scale;
  act_e              act;
  logic [7:0]        relu6_max;
  logic              from_acc;
  logic [LROW_W-1:0] row;
  logic [ROWS_W-1:0] left_rows, left_ack;
  logic [ID_W-1:0]   id;
  logic [DIM*8-1:0]  buf_data;

  logic              sc_valid;
  logic [DIM*8-1:0]  sc_data;

  output_scaler #(.DIM(DIM), .ACC_W(ACC_W)) u_scaler (
    .clk, .reset,
    .in_valid (acc_rd_valid), .in_data(acc_rd_data),
    .scale, .act, .relu6_max,
    .out_valid(sc_valid), .out_data(sc_data)
  );

  assign cmd_ready    = (state == S_IDLE);
  assign acc_r_valid  = (state == S_READ) && from_acc;
  assign acc_r_row    = row;
  assign spad_r_valid = (state == S_READ) && !from_acc;
  assign spad_r_row   = row;
  assign dma_wr_valid = (state == S_WRITE);
  assign dma_wr_addr  = addr;
  assign dma_wr_data  = buf_data;

  always_ff @(posedge clk) begin
    if (reset) begin
      state     <= S_IDLE;
      stride    <= ADDR_W'(DIM);
      scale     <= 16'h3c00;   // 1.0
      act       <= ACT_NONE;
      relu6_max <= 8'd127;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (dma_wr_done && state != S_IDLE) left_ack <= left_ack - 1'b1;
      case (state)
        S_IDLE: if (cmd_valid) begin
          id <= cmd_id;
          if (cmd.op == OP_MVOUT && cmd.rows != 0) begin
            addr      <= cmd.dram_addr;
            row       <= cmd.local_addr.row;
            from_acc  <= cmd.local_addr.is_acc;
            left_rows <= cmd.rows;
            left_ack  <= cmd.rows;
            state     <= S_READ;
          end else begin
            if (cmd.op == OP_CONFIG_ST) begin
              stride    <= cmd.stride;
              scale     <= cmd.scale;
              act       <= cmd.act;
              relu6_max <= cmd.relu6_max;
            end
            done    <= 1'b1;
            done_id <= cmd_id;
          end
        end
        S_READ: if (from_acc || spad_r_grant) state <= S_DATA;
        S_DATA: begin
          if (from_acc && sc_valid) begin
            buf_data <= sc_data;
            state    <= S_WRITE;
          end else if (!from_acc && spad_rd_valid) begin
            buf_data <= spad_rd_data;
            state    <= S_WRITE;
          end
        end
        S_WRITE: if (dma_wr_ready) begin
          addr      <= addr + stride;
          row       <= row + 1'b1;
          left_rows <= left_rows - 1'b1;
          state     <= (left_rows == 1) ? S_ACK : S_READ;
        end
        S_ACK: if (left_ack == 0 || (left_ack == 1 && dma_wr_done)) begin
          state   <= S_IDLE;
          done    <= 1'b1;
          done_id <= id;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
