// accumulator: on-chip buffer of 32-bit partial sums, ROWS rows of DIM
// elements, written by the execute controller and read by the store path.
//
// Write port: w_valid with w_row, w_data and w_accumulate. An overwrite
// stores w_data; an accumulate adds w_data element by element to the stored
// row (sums wrap at ACC_W bits). Both go through the same two stages: stage 1
// reads the old row, stage 2 writes the new one. When stage 1 has read a row
// that stage 2 writes in this cycle, or wrote at the edge of the read, the
// newer value is forwarded, so accumulates to one row in consecutive or
// alternate cycles are exact.
// Read port: r_valid/r_row; rd_valid/rd_data follow 2 cycles later.
// Capacity follows the paper (128 KiB); element width, the two-stage
// structure and the latencies are this design's own. Synchronous active-high
// reset clears the pipeline valids, not the contents.
module accumulator #(
  parameter int ROWS  = 1024,
  parameter int DIM   = 32,
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic                    w_valid,
  input  logic [$clog2(ROWS)-1:0] w_row,
  input  logic                    w_accumulate,
  input  logic [DIM*ACC_W-1:0]    w_data,
  input  logic                    r_valid,
  input  logic [$clog2(ROWS)-1:0] r_row,
  output logic                    rd_valid,
  output logic [DIM*ACC_W-1:0]    rd_data
);
  localparam int AW = $clog2(ROWS);

  logic [DIM*ACC_W-1:0] mem [ROWS];

  // stage 1 registers
  logic                 s1_valid, s1_acc;
  logic [AW-1:0]        s1_row;
  logic [DIM*ACC_W-1:0] s1_data, s1_old;
  // stage 2 (the write) and read pipeline
  logic                 s2_valid;
  logic [AW-1:0]        s2_row;
  logic [DIM*ACC_W-1:0] s2_data;
  // the row written at the last edge, which stage 1's read just missed
  logic                 s3_valid;
  logic [AW-1:0]        s3_row;
  logic [DIM*ACC_W-1:0] s3_data;
  logic                 r1_valid;
  logic [DIM*ACC_W-1:0] r1_data;

  logic [DIM*ACC_W-1:0] old_row, new_row;

  always_ff @(posedge clk) begin
    s1_old  <= mem[w_row];
    r1_data <= mem[r_row];
    if (s2_valid) mem[s2_row] <= s2_data;
  end

  always_comb begin
    // forwarding: stage 2 writes this cycle the row stage 1 just read, or
    // wrote it at the same edge as stage 1's read
    if (s2_valid && s2_row == s1_row)      old_row = s2_data;
    else if (s3_valid && s3_row == s1_row) old_row = s3_data;
    else                                   old_row = s1_old;
    for (int e = 0; e < DIM; e++)
      new_row[e*ACC_W +: ACC_W] = s1_acc ? old_row[e*ACC_W +: ACC_W] + s1_data[e*ACC_W +: ACC_W]
                                         : s1_data[e*ACC_W +: ACC_W];
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
      s3_valid <= 1'b0;
      r1_valid <= 1'b0;
      rd_valid <= 1'b0;
    end else begin
      s1_valid <= w_valid;
      s2_valid <= s1_valid;
      s3_valid <= s2_valid;
      r1_valid <= r_valid;
      rd_valid <= r1_valid;
    end
    s1_row  <= w_row;
    s1_acc  <= w_accumulate;
    s1_data <= w_data;
    s2_row  <= s1_row;
    s2_data <= new_row;
    s3_row  <= s2_row;
    s3_data <= s2_data;
    rd_data <= r1_data;
  end
endmodule
