// systolic_array: weight-stationary DIM x DIM array built from DIM x DIM/2
// DSP-packed PEs (packed_pe), each PE covering two neighbouring columns.
//
// Each activation row A[j][0..DIM-1] given on a_row enters the array from the
// left, element k into array row k; partial sums run down the columns and one
// result row C[j][n] = sum_k A[j][k] * W[k][n] leaves at the bottom. Input
// elements are skewed (row k delayed k cycles) and the bottom outputs de-skewed
// (packed column p delayed DIM/2-1-p cycles) so that rows go in and come out
// whole, one per cycle.
//
// Weights: each w_shift cycle pushes w_row in at the top and moves every
// weight one PE down, so a tile is loaded with DIM pushes, bottom row (k =
// DIM-1) first. Weights must not be shifted while rows are in flight.
//
// Timing: c_valid follows a_valid by DIM + DIM/2 - 1 cycles (47 at DIM = 32);
// a new row can enter every cycle. The array shape, the packing and the
// weight-stationary dataflow follow the paper; the shift-in weight load and
// the skew buffers are this design's own. Synchronous active-high reset.
module systolic_array #(
  parameter int DIM   = 32,
  parameter int IN_W  = 8,
  parameter int OUT_W = 18
) (
  input  logic                     clk,
  input  logic                     reset,
  input  logic                     w_shift,
  input  logic signed [IN_W-1:0]   w_row [DIM],
  input  logic                     a_valid,
  input  logic signed [IN_W-1:0]   a_row [DIM],
  output logic                     c_valid,
  output logic signed [OUT_W-1:0]  c_row [DIM]
);
  localparam int PC  = DIM / 2;         // packed columns
  localparam int LAT = DIM + PC - 1;

  // activations between PEs: act[k][p] enters PE (k,p)
  logic signed [IN_W-1:0]  act [DIM][PC+1];
  // weights and partial sums between rows: enters PE (k,p) from row k-1
  logic signed [IN_W-1:0]  wt0 [DIM+1][PC];
  logic signed [IN_W-1:0]  wt1 [DIM+1][PC];
  logic signed [OUT_W-1:0] ps0 [DIM+1][PC];
  logic signed [OUT_W-1:0] ps1 [DIM+1][PC];

  // input skew: row k delayed by k cycles
  for (genvar k = 0; k < DIM; k++) begin : g_skew
    if (k == 0) begin : g_direct
      assign act[0][0] = a_row[0];
    end else begin : g_delay
      logic signed [IN_W-1:0] sr [k];
      always_ff @(posedge clk) begin
        if (reset) sr <= '{default: '0};
        else begin
          sr[0] <= a_row[k];
          for (int i = 1; i < k; i++) sr[i] <= sr[i-1];
        end
      end
      assign act[k][0] = sr[k-1];
    end
  end

  for (genvar p = 0; p < PC; p++) begin : g_top
    assign wt0[0][p] = w_row[2*p];
    assign wt1[0][p] = w_row[2*p+1];
    assign ps0[0][p] = '0;
    assign ps1[0][p] = '0;
  end

  for (genvar k = 0; k < DIM; k++) begin : g_row
    for (genvar p = 0; p < PC; p++) begin : g_col
      packed_pe #(.IN_W(IN_W), .OUT_W(OUT_W)) u_pe (
        .clk, .reset,
        .a_in   (act[k][p]),   .a_out  (act[k][p+1]),
        .w_shift,
        .w0_in  (wt0[k][p]),   .w1_in  (wt1[k][p]),
        .w0_out (wt0[k+1][p]), .w1_out (wt1[k+1][p]),
        .ps0_in (ps0[k][p]),   .ps1_in (ps1[k][p]),
        .ps0_out(ps0[k+1][p]), .ps1_out(ps1[k+1][p])
      );
    end
  end

  // output de-skew: packed column p delayed by PC-1-p cycles
  for (genvar p = 0; p < PC; p++) begin : g_deskew
    localparam int D = PC - 1 - p;
    if (D == 0) begin : g_direct
      assign c_row[2*p]   = ps0[DIM][p];
      assign c_row[2*p+1] = ps1[DIM][p];
    end else begin : g_delay
      logic signed [OUT_W-1:0] sr0 [D];
      logic signed [OUT_W-1:0] sr1 [D];
      always_ff @(posedge clk) begin
        if (reset) begin
          sr0 <= '{default: '0};
          sr1 <= '{default: '0};
        end else begin
          sr0[0] <= ps0[DIM][p];
          sr1[0] <= ps1[DIM][p];
          for (int i = 1; i < D; i++) begin
            sr0[i] <= sr0[i-1];
            sr1[i] <= sr1[i-1];
          end
        end
      end
      assign c_row[2*p]   = sr0[D-1];
      assign c_row[2*p+1] = sr1[D-1];
    end
  end

  // valid travels alongside the data
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (reset) vpipe <= '0;
    else       vpipe <= {vpipe[LAT-2:0], a_valid};
  end
  assign c_valid = vpipe[LAT-1];

  // the last row's activations and weights leave the array unused
  logic unused;
  assign unused = ^{act[0][PC], wt0[DIM][0], wt1[DIM][0]};

  // weights may not move while rows are in flight
  assert property (@(posedge clk) disable iff (reset) w_shift |-> (vpipe == '0 && !a_valid))
    else $error("systolic_array: weight shift while rows are in flight");
endmodule
