// loop_matmul: the CISC-type tiled matrix-multiplication state machine. It
// takes one loop_cmd_t, C = act(scale * (A x B)) with A of m_tiles x k_tiles
// and B of k_tiles x n_tiles DIM x DIM tiles in DRAM, and issues the RISC-type
// commands that compute it, one per cycle while out_ready is high:
//   1. CONFIG_LD (A's stride), one MVIN per A tile into scratchpad rows
//      (i*k_tiles + k)*DIM;
//   2. CONFIG_LD (B's stride), one MVIN per B tile into the rows after A,
//      B_OFF + (k*n_tiles + n)*DIM;
//   3. for each output column tile n, each k, each output row tile i: one
//      COMPUTE of DIM rows into accumulator rows (i*n_tiles + n)*DIM,
//      overwriting for k = 0 and accumulating after; the weight tile is
//      preloaded for i = 0 and reused for the other row tiles;
//   4. CONFIG_ST (C's stride, scale, activation), one MVOUT per C tile.
// The reorder buffer behind it resolves the dependencies between these
// commands, so loads, computes and stores overlap where the data allows.
//
// Interface: in_valid/in_ready/in accept an instruction while idle; out_valid/
// out_ready/out carry the generated commands; busy is high until the last
// command has been handed on. The whole problem must be resident at once:
// (m*k + k*n) tiles of scratchpad and m*n tiles of accumulator (asserted).
//
// The paper says only that such CISC-type instructions exist and run on
// hard-coded state machines for tiled matrix multiplications; the
// instruction format, the loop order (weight-stationary: n, k outer, i inner)
// and the resident-problem restriction are this design's own. Synchronous
// active-high reset.
module loop_matmul #(
  parameter int DIM       = 32,
  parameter int SPAD_ROWS = 16384,
  parameter int ACC_ROWS  = 1024
) (
  input  logic      clk,
  input  logic      reset,
  input  logic      in_valid,
  output logic      in_ready,
  input  gemmini_pkg::loop_cmd_t in,
  output logic      out_valid,
  input  logic      out_ready,
  output gemmini_pkg::cmd_t      out,
  output logic      busy
);
  import gemmini_pkg::*;
  typedef enum logic [3:0] {P_IDLE, P_CFG_A, P_LD_A, P_CFG_B, P_LD_B, P_COMP, P_CFG_C, P_ST} phase_e;
  phase_e    phase;
  loop_cmd_t l;
  logic [TILES_W-1:0] ti, tk, tn;   // loop counters
  logic      last_i, last_k, last_n;
  logic [LROW_W-1:0] b_off;

  // row of tile (r, c) in a grid of 'cols' tiles per row
  function automatic logic [LROW_W-1:0] tile_row(input logic [TILES_W-1:0] r, input logic [TILES_W-1:0] c,
                                                 input logic [TILES_W-1:0] cols);
    return LROW_W'((int'(r) * int'(cols) + int'(c)) * DIM);
  endfunction

  assign last_i   = (ti == l.m_tiles - 1'b1);
  assign last_k   = (tk == l.k_tiles - 1'b1);
  assign last_n   = (tn == l.n_tiles - 1'b1);
  assign b_off    = LROW_W'(int'(l.m_tiles) * int'(l.k_tiles) * DIM);
  assign in_ready = (phase == P_IDLE);
  assign busy     = (phase != P_IDLE);
  assign out_valid = (phase != P_IDLE);

  always_comb begin
    out = '0;
    out.rows = ROWS_W'(DIM);
    unique case (phase)
      P_CFG_A: begin out.op = OP_CONFIG_LD; out.stride = l.a_stride; out.rows = '0; end
      P_LD_A: begin
        out.op = OP_MVIN;
        out.dram_addr = l.a_addr + ADDR_W'(ti) * ADDR_W'(DIM) * l.a_stride + ADDR_W'(tk) * ADDR_W'(DIM);
        out.local_addr.row = tile_row(ti, tk, l.k_tiles);
      end
      P_CFG_B: begin out.op = OP_CONFIG_LD; out.stride = l.b_stride; out.rows = '0; end
      P_LD_B: begin
        out.op = OP_MVIN;
        out.dram_addr = l.b_addr + ADDR_W'(tk) * ADDR_W'(DIM) * l.b_stride + ADDR_W'(tn) * ADDR_W'(DIM);
        out.local_addr.row = b_off + tile_row(tk, tn, l.n_tiles);
      end
      P_COMP: begin
        out.op = OP_COMPUTE;
        out.a_addr = tile_row(ti, tk, l.k_tiles);
        out.b_addr = b_off + tile_row(tk, tn, l.n_tiles);
        out.preload = (ti == '0);
        out.local_addr.is_acc = 1'b1;
        out.local_addr.accumulate = (tk != '0);
        out.local_addr.row = tile_row(ti, tn, l.n_tiles);
      end
      P_CFG_C: begin
        out.op = OP_CONFIG_ST; out.stride = l.c_stride; out.rows = '0;
        out.scale = l.scale; out.act = l.act; out.relu6_max = l.relu6_max;
      end
      P_ST: begin
        out.op = OP_MVOUT;
        out.dram_addr = l.c_addr + ADDR_W'(ti) * ADDR_W'(DIM) * l.c_stride + ADDR_W'(tn) * ADDR_W'(DIM);
        out.local_addr.is_acc = 1'b1;
        out.local_addr.row = tile_row(ti, tn, l.n_tiles);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      phase <= P_IDLE;
      l     <= '0;
      ti <= '0; tk <= '0; tn <= '0;
    end else if (phase == P_IDLE) begin
      if (in_valid) begin
        l <= in;
        ti <= '0; tk <= '0; tn <= '0;
        phase <= P_CFG_A;
      end
    end else if (out_ready) begin
      unique case (phase)
        P_CFG_A: phase <= P_LD_A;
        P_LD_A:  // i outer, k inner
          if (!last_k) tk <= tk + 1'b1;
          else begin
            tk <= '0;
            if (!last_i) ti <= ti + 1'b1;
            else begin ti <= '0; phase <= P_CFG_B; end
          end
        P_CFG_B: phase <= P_LD_B;
        P_LD_B:  // k outer, n inner
          if (!last_n) tn <= tn + 1'b1;
          else begin
            tn <= '0;
            if (!last_k) tk <= tk + 1'b1;
            else begin tk <= '0; phase <= P_COMP; end
          end
        P_COMP:  // n outer, k, i inner
          if (!last_i) ti <= ti + 1'b1;
          else begin
            ti <= '0;
            if (!last_k) tk <= tk + 1'b1;
            else begin
              tk <= '0;
              if (!last_n) tn <= tn + 1'b1;
              else begin tn <= '0; phase <= P_CFG_C; end
            end
          end
        P_CFG_C: phase <= P_ST;
        P_ST:    // i outer, n inner
          if (!last_n) tn <= tn + 1'b1;
          else begin
            tn <= '0;
            if (!last_i) ti <= ti + 1'b1;
            else begin ti <= '0; phase <= P_IDLE; end
          end
        default: phase <= P_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (reset)
    in_valid && in_ready |-> in.m_tiles != 0 && in.n_tiles != 0 && in.k_tiles != 0 &&
      (int'(in.m_tiles) * int'(in.k_tiles) + int'(in.k_tiles) * int'(in.n_tiles)) * DIM <= SPAD_ROWS &&
      int'(in.m_tiles) * int'(in.n_tiles) * DIM <= ACC_ROWS)
    else $error("loop_matmul: problem does not fit on chip");
endmodule
