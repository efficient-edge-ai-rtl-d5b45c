// scratchpad: the accelerator's on-chip int8 buffer for weights and
// activations, ROWS rows of ROW_W bits (one row = DIM int8 elements).
//
// Two independent ports reach the same array (the configuration uses two
// scratchpad ports). Each port takes one request per cycle: a write (we = 1)
// or a read. Read data comes back READ_DELAY cycles after the request
// (rvalid/rdata), together with the tag given with the request, so a port
// shared by several requesters can route the data back. The array read takes
// one cycle and READ_DELAY-1 pipeline registers follow; the capacity, the
// number of ports and the read delay are the paper's, the single bank, the
// tags and the read-during-write behaviour (a read returns the old row) are
// this design's own. Synchronous active-high reset clears only the valid
// pipeline, not the contents.
module scratchpad #(
  parameter int ROWS       = 16384,
  parameter int ROW_W      = 256,
  parameter int READ_DELAY = 8,
  parameter int TAG_W      = 1
) (
  input  logic                    clk,
  input  logic                    reset,
  // port 0
  input  logic                    p0_en,
  input  logic                    p0_we,
  input  logic [$clog2(ROWS)-1:0] p0_addr,
  input  logic [ROW_W-1:0]        p0_wdata,
  input  logic [TAG_W-1:0]        p0_tag,
  output logic                    p0_rvalid,
  output logic [ROW_W-1:0]        p0_rdata,
  output logic [TAG_W-1:0]        p0_rtag,
  // port 1
  input  logic                    p1_en,
  input  logic                    p1_we,
  input  logic [$clog2(ROWS)-1:0] p1_addr,
  input  logic [ROW_W-1:0]        p1_wdata,
  input  logic [TAG_W-1:0]        p1_tag,
  output logic                    p1_rvalid,
  output logic [ROW_W-1:0]        p1_rdata,
  output logic [TAG_W-1:0]        p1_rtag
);
  logic [ROW_W-1:0] mem [ROWS];

  // array access: write or one-cycle read on each port
  logic [ROW_W-1:0] rd0, rd1;
  always_ff @(posedge clk) begin
    if (p0_en && p0_we)  mem[p0_addr] <= p0_wdata;
    if (p0_en && !p0_we) rd0 <= mem[p0_addr];
  end
  always_ff @(posedge clk) begin
    if (p1_en && p1_we)  mem[p1_addr] <= p1_wdata;
    if (p1_en && !p1_we) rd1 <= mem[p1_addr];
  end

  // delay pipeline: stage 0 is the array output, READ_DELAY-1 registers follow
  logic             v0 [READ_DELAY];
  logic             v1 [READ_DELAY];
  logic [TAG_W-1:0] t0 [READ_DELAY];
  logic [TAG_W-1:0] t1 [READ_DELAY];
  logic [ROW_W-1:0] d0 [READ_DELAY];
  logic [ROW_W-1:0] d1 [READ_DELAY];

  always_comb begin
    d0[0] = rd0;
    d1[0] = rd1;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      v0[0] <= 1'b0;
      v1[0] <= 1'b0;
    end else begin
      v0[0] <= p0_en && !p0_we;
      v1[0] <= p1_en && !p1_we;
    end
    t0[0] <= p0_tag;
    t1[0] <= p1_tag;
  end

  for (genvar i = 1; i < READ_DELAY; i++) begin : g_pipe
    always_ff @(posedge clk) begin
      if (reset) begin
        v0[i] <= 1'b0;
        v1[i] <= 1'b0;
      end else begin
        v0[i] <= v0[i-1];
        v1[i] <= v1[i-1];
      end
      t0[i] <= t0[i-1];
      t1[i] <= t1[i-1];
      d0[i] <= d0[i-1];
      d1[i] <= d1[i-1];
    end
  end

  assign p0_rvalid = v0[READ_DELAY-1];
  assign p0_rdata  = d0[READ_DELAY-1];
  assign p0_rtag   = t0[READ_DELAY-1];
  assign p1_rvalid = v1[READ_DELAY-1];
  assign p1_rdata  = d1[READ_DELAY-1];
  assign p1_rtag   = t1[READ_DELAY-1];

  // two writes to one row in one cycle would leave it undefined
  assert property (@(posedge clk) disable iff (reset)
                   !(p0_en && p0_we && p1_en && p1_we && p0_addr == p1_addr))
    else $error("scratchpad: both ports write row %0d", p0_addr);
endmodule
