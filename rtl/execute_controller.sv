// execute_controller: the decoupled unit that feeds the systolic array from
// the scratchpad and writes its results into the accumulator.
//
// It takes one COMPUTE command at a time from the reorder buffer (any other
// opcode completes at once). With 'preload' set it first reads the DIM x DIM
// weight tile from scratchpad rows b_addr .. b_addr+DIM-1, last row first,
// and shifts each returned row into the array (w_shift), so array row k ends
// up holding weight row k. It then reads 'rows' activation rows from a_addr
// on, streams them into the array one per cycle and writes each result row j
// to accumulator row local_addr.row + j, overwriting or adding
// (local_addr.accumulate). The 18-bit array outputs are sign-extended to the
// accumulator width. Without 'preload' the weights already in the array are
// reused. Reads are issued one per granted cycle on the scratchpad port that
// this unit shares with the store controller (it has priority there); since
// the port returns data in order, the first DIM returns of a preloading
// command are weights and the rest activations. done pulses with the command
// id 3 cycles after the last accumulator write, when that write has landed.
//
// Timing at DIM = 32, read delay 8: a command with preload and R rows takes
// about 32 + R + 8 + 47 cycles. Weight-stationary operation is the paper's;
// the single preload/compute command and the non-overlapped weight load are
// this design's own. Synchronous active-high reset.
module execute_controller #(
  parameter int DIM   = 32,
  parameter int OUT_W = 18,
  parameter int ACC_W = 32,
  parameter int ID_W  = 4
) (
  input  logic                           clk,
  input  logic                           reset,
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  gemmini_pkg::cmd_t              cmd,
  input  logic [ID_W-1:0]                cmd_id,
  // shared scratchpad read port
  output logic                           spad_r_valid,
  input  logic                           spad_r_grant,
  output logic [gemmini_pkg::LROW_W-1:0] spad_r_row,
  input  logic                           spad_rd_valid,
  input  logic [DIM*8-1:0]               spad_rd_data,
  // systolic array
  output logic                           sa_w_shift,
  output logic signed [7:0]              sa_w_row [DIM],
  output logic                           sa_a_valid,
  output logic signed [7:0]              sa_a_row [DIM],
  input  logic                           sa_c_valid,
  input  logic signed [OUT_W-1:0]        sa_c_row [DIM],
  // accumulator write port
  output logic                           acc_w_valid,
  output logic [gemmini_pkg::LROW_W-1:0] acc_w_row,
  output logic                           acc_w_accumulate,
  output logic [DIM*ACC_W-1:0]           acc_w_data,
  output logic                           done,
  output logic [ID_W-1:0]                done_id
);
  import gemmini_pkg::*;

  localparam int CW = $clog2(2 * DIM + 1);   // counts weight + activation rows

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [CW-1:0]     n_w, n_total, n_req, n_recv;
  logic [ROWS_W-1:0] rows, n_out;
  logic [LROW_W-1:0] a_addr, b_addr, c_row;
  logic              accumulate;
  logic [ID_W-1:0]   id;
  logic [1:0]        drain;
  logic              recv_is_w;

  assign cmd_ready    = (state == S_IDLE);
  assign spad_r_valid = (state == S_RUN) && (n_req < n_total);
  always_comb begin
    if (n_req < n_w) spad_r_row = b_addr + LROW_W'(DIM - 1) - LROW_W'(n_req);
    else             spad_r_row = a_addr + LROW_W'(n_req - n_w);
  end

  assign recv_is_w  = n_recv < n_w;
  assign sa_w_shift = spad_rd_valid && recv_is_w;
  assign sa_a_valid = spad_rd_valid && !recv_is_w;
  always_comb
    for (int k = 0; k < DIM; k++) begin
      sa_w_row[k] = spad_rd_data[k*8 +: 8];
      sa_a_row[k] = spad_rd_data[k*8 +: 8];
    end

  assign acc_w_valid      = sa_c_valid && (state == S_RUN);
  assign acc_w_row        = c_row + LROW_W'(n_out);
  assign acc_w_accumulate = accumulate;
  always_comb
    for (int n = 0; n < DIM; n++)
      acc_w_data[n*ACC_W +: ACC_W] = ACC_W'(sa_c_row[n]);

  always_ff @(posedge clk) begin
    if (reset) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          id <= cmd_id;
          if (cmd.op == OP_COMPUTE && cmd.rows != 0) begin
            n_w        <= cmd.preload ? CW'(DIM) : '0;
            n_total    <= (cmd.preload ? CW'(DIM) : '0) + CW'(cmd.rows);
            rows       <= cmd.rows;
            a_addr     <= cmd.a_addr;
            b_addr     <= cmd.b_addr;
            c_row      <= cmd.local_addr.row;
            accumulate <= cmd.local_addr.accumulate;
            n_req      <= '0;
            n_recv     <= '0;
            n_out      <= '0;
            state      <= S_RUN;
          end else begin
            done    <= 1'b1;
            done_id <= cmd_id;
          end
        end
        S_RUN: begin
          if (spad_r_valid && spad_r_grant) n_req <= n_req + 1'b1;
          if (spad_rd_valid) n_recv <= n_recv + 1'b1;
          if (sa_c_valid) begin
            n_out <= n_out + 1'b1;
            if (n_out + 1'b1 == rows) begin
              state <= S_DRAIN;
              drain <= 2'd2;
            end
          end
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 0) begin
            state   <= S_IDLE;
            done    <= 1'b1;
            done_id <= id;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (reset) spad_rd_valid |-> state == S_RUN)
    else $error("execute_controller: scratchpad data outside a command");
endmodule
