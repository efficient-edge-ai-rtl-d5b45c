// output_scaler_tb: feeds random accumulator rows with random float16 scales
// (normal, subnormal, large, negative, infinity) and all three activations
// through the scaler and compares every int8 result with a real-number
// reference (ref_pkg). Also checks the 1-cycle latency. Exact ties are forced
// by scales that are powers of two.
// The float16 scale and ReLU6 are the paper's; rounding, saturation and the
// latency are this design's.
module output_scaler_tb;
  import ref_pkg::*;
  import gemmini_pkg::*;
  localparam int DIM = 32;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic              in_valid, out_valid;
  logic [DIM*32-1:0] in_data;
  logic [DIM*8-1:0]  out_data;
  logic [15:0]       scale;
  act_e              act;
  logic [7:0]        relu6_max;
  int checks = 0, failures = 0;

  output_scaler #(.DIM(DIM), .ACC_W(32)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; scale = 16'h3c00; act = ACT_NONE; relu6_max = 8'd6;
    repeat (3) @(posedge clk);
    reset = 0;
    for (int n = 0; n < 600; n++) begin
      int sel;
      @(negedge clk);
      sel = n % 6;
      case (sel)
        0: scale = rnd_scale();
        1: scale = {1'b0, 5'($urandom_range(8, 14)), 10'd0};   // 2^-k: exact ties
        2: scale = {1'($urandom), 5'd0, 10'($urandom)};          // subnormal
        3: scale = {1'($urandom), 5'($urandom_range(15, 30)), 10'($urandom)};  // >= 1
        4: scale = (n % 12 == 4) ? 16'h7c00 : 16'hfc00;          // +-infinity
        default: scale = rnd_scale();
      endcase
      act = act_e'(n % 3);
      relu6_max = 8'($urandom_range(1, 100));
      for (int e = 0; e < DIM; e++) begin
        int x;
        case ($urandom_range(3))
          0: x = int'($urandom_range(4000)) - 2000;
          1: x = int'($urandom);
          2: x = (e % 2 == 0) ? 0 : int'($urandom_range(200)) - 100;
          default: x = int'($urandom_range(1 << 20)) - (1 << 19);
        endcase
        in_data[e*32 +: 32] = x;
      end
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: out_valid missing"); end
      for (int e = 0; e < DIM; e++) begin
        int exp;
        exp = scale_ref(int'(in_data[e*32 +: 32]), scale, int'(act), int'(relu6_max));
        checks++;
        if (int'(signed'(out_data[e*8 +: 8])) != exp) begin
          failures++;
          if (failures < 10)
            $display("FAIL x=%0d scale=%h act=%0d: got %0d expected %0d", int'(in_data[e*32 +: 32]), scale,
                     act, signed'(out_data[e*8 +: 8]), exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
