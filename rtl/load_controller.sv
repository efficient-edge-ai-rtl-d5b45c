// load_controller: the decoupled unit that moves data from external memory
// into the scratchpad.
//
// It takes one command at a time from the reorder buffer. CONFIG_LD stores
// the DRAM stride between consecutive rows (in bytes). MVIN reads 'rows'
// rows: row i comes from DRAM address dram_addr + i * stride and lands in
// scratchpad row local_addr.row + i. The controller hands one read request
// per cycle to the DMA (as fast as it accepts them), counts the rows that
// arrive (dma_rd_done, in any order) and, once all have arrived, pulses done
// with the command's reorder-buffer id. A CONFIG_LD completes one cycle after
// it is accepted.
//
// The controller's role is the paper's; the command fields, the stride
// register and the one-command-at-a-time behaviour are this design's own.
// Synchronous active-high reset (stride resets to one row, 32 bytes).
module load_controller #(
  parameter int ID_W = 4
) (
  input  logic                          clk,
  input  logic                          reset,
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  gemmini_pkg::cmd_t             cmd,
  input  logic [ID_W-1:0]               cmd_id,
  output logic                          dma_rd_valid,
  input  logic                          dma_rd_ready,
  output logic [gemmini_pkg::ADDR_W-1:0] dma_rd_addr,
  output logic [gemmini_pkg::LROW_W-1:0] dma_rd_row,
  input  logic                          dma_rd_done,
  output logic                          done,
  output logic [ID_W-1:0]               done_id
);
  import gemmini_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;
  state_e state;

  logic [ADDR_W-1:0] stride;
  logic [ADDR_W-1:0] addr;
  logic [LROW_W-1:0] row;
  logic [ROWS_W-1:0] left_issue, left_recv;
  logic [ID_W-1:0]   id;

  assign cmd_ready    = (state == S_IDLE);
  assign dma_rd_valid = (state == S_ISSUE);
  assign dma_rd_addr  = addr;
  assign dma_rd_row   = row;

  always_ff @(posedge clk) begin
    if (reset) begin
      state  <= S_IDLE;
      stride <= ADDR_W'(ROW_W / 8);
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          id <= cmd_id;
          if (cmd.op == OP_MVIN && cmd.rows != 0) begin
            addr       <= cmd.dram_addr;
            row        <= cmd.local_addr.row;
            left_issue <= cmd.rows;
            left_recv  <= cmd.rows;
            state      <= S_ISSUE;
          end else begin
            if (cmd.op == OP_CONFIG_LD) stride <= cmd.stride;
            done    <= 1'b1;
            done_id <= cmd_id;
          end
        end
        S_ISSUE, S_WAIT: begin
          if (state == S_ISSUE && dma_rd_ready) begin
            addr       <= addr + stride;
            row        <= row + 1'b1;
            left_issue <= left_issue - 1'b1;
            if (left_issue == 1) state <= S_WAIT;
          end
          if (dma_rd_done) begin
            left_recv <= left_recv - 1'b1;
            if (left_recv == 1) begin
              state   <= S_IDLE;
              done    <= 1'b1;
              done_id <= id;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
