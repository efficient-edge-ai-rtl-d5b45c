// mem_model: behavioural model of the external memory (L2 cache and DRAM)
// for the testbenches; not synthesizable logic.
//
// Takes requests (valid/ready; ready is dropped at random), keeps up to
// DEPTH of them and answers each after a random latency of MIN_LAT..MAX_LAT
// cycles, so answers come back out of order. A read returns the stored row
// (rows never written read as zero); a write stores its row and returns an
// acknowledgement. Rows are ROW_W bits at ROW_W/8-byte aligned addresses.
// The testbench may fill or inspect 'mem' directly. max_pending records the
// most requests outstanding at once.
// Only the paper's limit of 32 outstanding requests matters here; the
// latencies are the testbenches' choice.
module mem_model #(
  parameter int ROW_W   = 256,
  parameter int TAG_W   = 5,
  parameter int MIN_LAT = 4,
  parameter int MAX_LAT = 40,
  parameter int DEPTH   = 64
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [31:0]      req_addr,
  input  logic [ROW_W-1:0] req_wdata,
  input  logic [TAG_W-1:0] req_tag,
  output logic             resp_valid,
  output logic [TAG_W-1:0] resp_tag,
  output logic [ROW_W-1:0] resp_rdata
);
  localparam int RB = $clog2(ROW_W / 8);

  logic [ROW_W-1:0] mem [longint];

  typedef struct {
    int               due;
    logic [TAG_W-1:0] tag;
    logic [ROW_W-1:0] data;
  } pend_t;
  pend_t pend [$];

  int cycle = 0;
  int max_pending = 0;
  int n_reads = 0, n_writes = 0;
  logic rdy;

  assign req_ready = rdy;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (reset) begin
      rdy        <= 1'b0;
      resp_valid <= 1'b0;
    end else begin
      // accept
      if (req_valid && rdy) begin
        pend_t p;
        p.due = cycle + MIN_LAT + int'($urandom_range(MAX_LAT - MIN_LAT));
        p.tag = req_tag;
        if (req_we) begin
          mem[longint'(req_addr) >> RB] = req_wdata;
          p.data = '0;
          n_writes++;
        end else begin
          p.data = mem.exists(longint'(req_addr) >> RB) ? mem[longint'(req_addr) >> RB] : '0;
          n_reads++;
        end
        pend.push_back(p);
        if (pend.size() > max_pending) max_pending = pend.size();
      end
      rdy <= (pend.size() < DEPTH) && ($urandom_range(7) != 0);
      // answer the first pending request that is due
      resp_valid <= 1'b0;
      for (int i = 0; i < pend.size(); i++)
        if (pend[i].due <= cycle) begin
          resp_valid <= 1'b1;
          resp_tag   <= pend[i].tag;
          resp_rdata <= pend[i].data;
          pend.delete(i);
          break;
        end
    end
  end
endmodule
