// dma: moves rows between the external memory port and the accelerator.
//
// The load controller asks for rows to be read (rd_req: DRAM byte address and
// the scratchpad row to fill); the store controller asks for rows to be
// written (wr_req: DRAM address and data). The DMA gives each memory request
// a tag from a pool of MAX_INFLIGHT, remembers for each tag whether it is a
// read and which scratchpad row it fills, and sends it out on mem_req. The
// memory answers every request, reads with data and writes with an
// acknowledgement, on mem_resp in any order; the tag says which request it
// answers. A read response is written straight into the scratchpad
// (spad_w*) and pulses rd_done; a write acknowledgement pulses wr_done. When
// all tags are in flight new requests wait (stall is high while one does).
//
// The limit of 32 requests in flight is the paper's; the request/response
// protocol, the tags and the round-robin choice between reads and writes are
// this design's own. Requests pass through combinationally (valid/ready);
// a response is handled in the cycle it arrives and is always accepted.
// Synchronous active-high reset frees all tags.
module dma #(
  parameter int MAX_INFLIGHT = 32,
  parameter int ADDR_W       = 32,
  parameter int ROW_W        = 256,
  parameter int LROW_W       = 14
) (
  input  logic                    clk,
  input  logic                    reset,
  // from the load controller
  input  logic                    rd_req_valid,
  output logic                    rd_req_ready,
  input  logic [ADDR_W-1:0]       rd_req_addr,
  input  logic [LROW_W-1:0]       rd_req_row,
  output logic                    rd_done,
  // from the store controller
  input  logic                    wr_req_valid,
  output logic                    wr_req_ready,
  input  logic [ADDR_W-1:0]       wr_req_addr,
  input  logic [ROW_W-1:0]        wr_req_data,
  output logic                    wr_done,
  // scratchpad write port
  output logic                    spad_wen,
  output logic [LROW_W-1:0]       spad_wrow,
  output logic [ROW_W-1:0]        spad_wdata,
  // memory side
  output logic                    mem_req_valid,
  input  logic                    mem_req_ready,
  output logic                    mem_req_we,
  output logic [ADDR_W-1:0]       mem_req_addr,
  output logic [ROW_W-1:0]        mem_req_wdata,
  output logic [$clog2(MAX_INFLIGHT)-1:0] mem_req_tag,
  input  logic                    mem_resp_valid,
  input  logic [$clog2(MAX_INFLIGHT)-1:0] mem_resp_tag,
  input  logic [ROW_W-1:0]        mem_resp_rdata,
  // status
  output logic                    stall,
  output logic [$clog2(MAX_INFLIGHT):0] inflight
);
  localparam int TW = $clog2(MAX_INFLIGHT);

  logic [MAX_INFLIGHT-1:0] busy;
  logic                    t_read [MAX_INFLIGHT];
  logic [LROW_W-1:0]       t_row  [MAX_INFLIGHT];

  logic          have_free;
  logic [TW-1:0] free_tag;
  logic          pick_wr;    // this cycle's request is the write
  logic          prefer_wr;  // round-robin state
  logic          fire;

  always_comb begin
    have_free = 1'b0;
    free_tag  = '0;
    for (int i = MAX_INFLIGHT - 1; i >= 0; i--)
      if (!busy[i]) begin
        have_free = 1'b1;
        free_tag  = TW'(i);
      end
  end

  always_comb begin
    pick_wr       = wr_req_valid && (!rd_req_valid || prefer_wr);
    mem_req_valid = (rd_req_valid || wr_req_valid) && have_free;
    mem_req_we    = pick_wr;
    mem_req_addr  = pick_wr ? wr_req_addr : rd_req_addr;
    mem_req_wdata = wr_req_data;
    mem_req_tag   = free_tag;
    fire          = mem_req_valid && mem_req_ready;
    rd_req_ready  = fire && !pick_wr;
    wr_req_ready  = fire && pick_wr;
    stall         = (rd_req_valid || wr_req_valid) && !have_free;
  end

  always_comb begin
    spad_wen   = mem_resp_valid && t_read[mem_resp_tag];
    spad_wrow  = t_row[mem_resp_tag];
    spad_wdata = mem_resp_rdata;
    rd_done    = spad_wen;
    wr_done    = mem_resp_valid && !t_read[mem_resp_tag];
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      busy      <= '0;
      prefer_wr <= 1'b0;
      inflight  <= '0;
    end else begin
      if (mem_resp_valid) busy[mem_resp_tag] <= 1'b0;
      if (fire) begin
        busy[free_tag] <= 1'b1;
        prefer_wr      <= !pick_wr;
      end
      inflight <= inflight + (TW+1)'(fire) - (TW+1)'(mem_resp_valid);
    end
    if (fire) begin
      t_read[free_tag] <= !pick_wr;
      t_row[free_tag]  <= rd_req_row;
    end
  end

  assert property (@(posedge clk) disable iff (reset) mem_resp_valid |-> busy[mem_resp_tag])
    else $error("dma: response for tag %0d that is not in flight", mem_resp_tag);
  assert property (@(posedge clk) disable iff (reset) inflight <= (TW+1)'(MAX_INFLIGHT));
endmodule
