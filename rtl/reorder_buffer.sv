// reorder_buffer: holds the command stream from the host and issues each
// command to the load, execute or store controller once it is safe to.
//
// The three controllers are decoupled and run concurrently, so a command may
// start before an older one of another controller has finished, but only if
// they touch no common scratchpad or accumulator row where at least one of
// them writes. Each entry records the command, its controller and up to three
// row ranges: the rows it writes and up to two it reads (MVIN writes
// scratchpad rows; MVOUT reads accumulator or scratchpad rows; COMPUTE reads
// the activation rows and, with preload, the DIM weight rows, and writes
// accumulator rows). An entry issues when no older entry of the same
// controller is still waiting to issue (each controller's commands stay in
// order) and no older unfinished entry of another controller conflicts with
// it. An entry is freed when its controller reports done with the entry's id.
// Entries free out of order; an age matrix keeps the order.
//
// Interface: cmd_valid/cmd_ready (one command per cycle while a slot is
// free); per controller x_valid/x_ready/x_cmd/x_id to issue and x_done/x_done_id
// on completion; busy while any entry is held. A command is issued at the
// earliest the cycle after it is accepted. The paper only names this block;
// the dependency rule is this design's reading of its role. Synchronous
// active-high reset empties it.
module reorder_buffer #(
  parameter int ENTRIES = 16,
  parameter int DIM     = 32
) (
  input  logic                           clk,
  input  logic                           reset,
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  gemmini_pkg::cmd_t              cmd,
  output logic                           ld_valid,
  input  logic                           ld_ready,
  output gemmini_pkg::cmd_t              ld_cmd,
  output logic [$clog2(ENTRIES)-1:0]     ld_id,
  input  logic                           ld_done,
  input  logic [$clog2(ENTRIES)-1:0]     ld_done_id,
  output logic                           ex_valid,
  input  logic                           ex_ready,
  output gemmini_pkg::cmd_t              ex_cmd,
  output logic [$clog2(ENTRIES)-1:0]     ex_id,
  input  logic                           ex_done,
  input  logic [$clog2(ENTRIES)-1:0]     ex_done_id,
  output logic                           st_valid,
  input  logic                           st_ready,
  output gemmini_pkg::cmd_t              st_cmd,
  output logic [$clog2(ENTRIES)-1:0]     st_id,
  input  logic                           st_done,
  input  logic [$clog2(ENTRIES)-1:0]     st_done_id,
  output logic                           busy
);
  import gemmini_pkg::*;

  localparam int IW = $clog2(ENTRIES);

  typedef enum logic [1:0] {Q_LD = 2'd0, Q_EX = 2'd1, Q_ST = 2'd2} queue_e;

  typedef struct packed {
    logic              en;
    logic              acc;      // accumulator (1) or scratchpad (0)
    logic [LROW_W-1:0] start;
    logic [ROWS_W:0]   len;
  } range_t;

  typedef struct packed {
    queue_e q;
    range_t wr;
    range_t rd0;
    range_t rd1;
  } deps_t;

  function automatic deps_t decode(input cmd_t c);
    deps_t d;
    d = '0;
    case (c.op)
      OP_CONFIG_LD: d.q = Q_LD;
      OP_CONFIG_ST: d.q = Q_ST;
      OP_MVIN: begin
        d.q  = Q_LD;
        d.wr = '{en: 1'b1, acc: 1'b0, start: c.local_addr.row, len: (ROWS_W+1)'(c.rows)};
      end
      OP_MVOUT: begin
        d.q   = Q_ST;
        d.rd0 = '{en: 1'b1, acc: c.local_addr.is_acc, start: c.local_addr.row, len: (ROWS_W+1)'(c.rows)};
      end
      default: begin  // OP_COMPUTE and anything else go to the execute controller
        d.q = Q_EX;
        if (c.op == OP_COMPUTE) begin
          d.rd0 = '{en: 1'b1, acc: 1'b0, start: c.a_addr, len: (ROWS_W+1)'(c.rows)};
          d.rd1 = '{en: c.preload, acc: 1'b0, start: c.b_addr, len: (ROWS_W+1)'(DIM)};
          d.wr  = '{en: 1'b1, acc: 1'b1, start: c.local_addr.row, len: (ROWS_W+1)'(c.rows)};
        end
      end
    endcase
    return d;
  endfunction

  function automatic logic overlap(input range_t a, input range_t b);
    logic [LROW_W:0] a_end, b_end;
    a_end = (LROW_W+1)'(a.start) + (LROW_W+1)'(a.len);
    b_end = (LROW_W+1)'(b.start) + (LROW_W+1)'(b.len);
    return a.en && b.en && (a.acc == b.acc) &&
           ((LROW_W+1)'(a.start) < b_end) && ((LROW_W+1)'(b.start) < a_end);
  endfunction

  function automatic logic conflict(input deps_t y, input deps_t o);
    return overlap(y.wr, o.wr) || overlap(y.wr, o.rd0) || overlap(y.wr, o.rd1) ||
           overlap(y.rd0, o.wr) || overlap(y.rd1, o.wr);
  endfunction

  logic [ENTRIES-1:0] valid, issued;
  cmd_t               e_cmd  [ENTRIES];
  deps_t              e_deps [ENTRIES];
  logic [ENTRIES-1:0] older  [ENTRIES];   // older[i][j]: entry j is older than i

  logic               have_free;
  logic [IW-1:0]      free_idx;
  logic [ENTRIES-1:0] ready_to_issue;
  logic               ld_found, ex_found, st_found;
  logic [IW-1:0]      ld_sel, ex_sel, st_sel;

  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!valid[i]) begin
        have_free = 1'b1;
        free_idx  = IW'(i);
      end
  end
  assign cmd_ready = have_free;
  assign busy      = |valid;

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      ready_to_issue[i] = valid[i] && !issued[i];
      for (int j = 0; j < ENTRIES; j++)
        if (valid[j] && older[i][j]) begin
          if (e_deps[j].q == e_deps[i].q) begin
            if (!issued[j]) ready_to_issue[i] = 1'b0;
          end else if (conflict(e_deps[i], e_deps[j])) begin
            ready_to_issue[i] = 1'b0;
          end
        end
    end
  end

  always_comb begin
    ld_found = 1'b0; ex_found = 1'b0; st_found = 1'b0;
    ld_sel = '0; ex_sel = '0; st_sel = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (ready_to_issue[i]) begin
        case (e_deps[i].q)
          Q_LD:    begin ld_found = 1'b1; ld_sel = IW'(i); end
          Q_EX:    begin ex_found = 1'b1; ex_sel = IW'(i); end
          default: begin st_found = 1'b1; st_sel = IW'(i); end
        endcase
      end
  end

  assign ld_valid = ld_found;
  assign ld_cmd   = e_cmd[ld_sel];
  assign ld_id    = ld_sel;
  assign ex_valid = ex_found;
  assign ex_cmd   = e_cmd[ex_sel];
  assign ex_id    = ex_sel;
  assign st_valid = st_found;
  assign st_cmd   = e_cmd[st_sel];
  assign st_id    = st_sel;

  always_ff @(posedge clk) begin
    if (reset) begin
      valid  <= '0;
      issued <= '0;
    end else begin
      if (ld_valid && ld_ready) issued[ld_sel] <= 1'b1;
      if (ex_valid && ex_ready) issued[ex_sel] <= 1'b1;
      if (st_valid && st_ready) issued[st_sel] <= 1'b1;
      if (ld_done) valid[ld_done_id] <= 1'b0;
      if (ex_done) valid[ex_done_id] <= 1'b0;
      if (st_done) valid[st_done_id] <= 1'b0;
      if (cmd_valid && have_free) begin
        valid[free_idx]  <= 1'b1;
        issued[free_idx] <= 1'b0;
      end
    end
    if (cmd_valid && have_free) begin
      e_cmd[free_idx]  <= cmd;
      e_deps[free_idx] <= decode(cmd);
      older[free_idx]  <= valid;
      for (int i = 0; i < ENTRIES; i++) older[i][free_idx] <= 1'b0;
    end
  end

  // each controller works on one command at a time, so at most one issued
  // entry per controller can be waiting for its done
  assert property (@(posedge clk) disable iff (reset) ld_done |-> valid[ld_done_id] && issued[ld_done_id]);
  assert property (@(posedge clk) disable iff (reset) ex_done |-> valid[ex_done_id] && issued[ex_done_id]);
  assert property (@(posedge clk) disable iff (reset) st_done |-> valid[st_done_id] && issued[st_done_id]);
endmodule
