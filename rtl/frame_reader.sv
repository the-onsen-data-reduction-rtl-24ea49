// frame_reader: reads one stored frame back from the RAM ring buffer.
//
// A start command with a pointer and a length (in words) makes the reader
// issue that many read requests at consecutive addresses (wrapping at
// 2^PTR_W) and stream the returned words out, with 'last' on the final one.
// 'busy' is high from the start command until the last word has left.
//
// The memory port returns read data in order, a fixed or variable number of
// cycles after the request, and cannot be stalled. The reader therefore
// issues a request only while its output FIFO has room for every response
// still outstanding, so no response is ever lost. Up to FIFO_DEPTH reads are
// in flight; with a memory latency below FIFO_DEPTH cycles the reader
// delivers one word per cycle. The read-back itself follows the publication;
// the RAM port and the credit scheme are this design's own.
module frame_reader
  import onsen_pkg::*;
#(
  parameter int PTR_W      = MEM_AW,
  parameter int LEN_W      = 20,
  parameter int FIFO_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             start,
  input  logic [PTR_W-1:0] start_ptr,
  input  logic [LEN_W-1:0] start_len,
  output logic             busy,
  // memory read requests and responses
  output logic             mem_valid,
  input  logic             mem_ready,
  output mem_req_t         mem_req,
  input  logic             rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data,
  // frame stream out
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            out_word
);

  localparam int CW = $clog2(FIFO_DEPTH + 1);

  logic [PTR_W-1:0] rptr;
  logic [LEN_W-1:0] to_issue, to_deliver;
  logic [CW-1:0]    outstanding, fifo_cnt;

  logic [MEM_DW-1:0] fifo [FIFO_DEPTH];
  logic [$clog2(FIFO_DEPTH)-1:0] wr_i, rd_i;

  logic issue, pop;
  assign mem_valid    = (to_issue != '0) && ((outstanding + fifo_cnt) < CW'(FIFO_DEPTH));
  assign issue        = mem_valid && mem_ready;
  assign mem_req.we   = 1'b0;
  assign mem_req.addr = MEM_AW'(rptr);
  assign mem_req.wdata = '0;

  assign out_valid     = fifo_cnt != '0;
  assign out_word.data = fifo[rd_i];
  assign out_word.last = (to_deliver == LEN_W'(1));
  assign pop           = out_valid && out_ready;
  assign busy          = to_deliver != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr        <= '0;
      to_issue    <= '0;
      to_deliver  <= '0;
      outstanding <= '0;
      fifo_cnt    <= '0;
      wr_i        <= '0;
      rd_i        <= '0;
    end else begin
      if (start && !busy) begin
        rptr       <= start_ptr;
        to_issue   <= start_len;
        to_deliver <= start_len;
      end else begin
        if (issue) begin
          rptr     <= rptr + 1'b1;
          to_issue <= to_issue - 1'b1;
        end
        if (pop) to_deliver <= to_deliver - 1'b1;
      end
      outstanding <= outstanding + CW'(issue) - CW'(rsp_valid);
      fifo_cnt    <= fifo_cnt + CW'(rsp_valid) - CW'(pop);
      if (rsp_valid) wr_i <= (wr_i == $bits(wr_i)'(FIFO_DEPTH-1)) ? '0 : wr_i + 1'b1;
      if (pop)       rd_i <= (rd_i == $bits(rd_i)'(FIFO_DEPTH-1)) ? '0 : rd_i + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rsp_valid) fifo[wr_i] <= rsp_data;
  end

  a_no_lost_rsp: assert property (@(posedge clk) disable iff (!rst_n)
                                  rsp_valid |-> outstanding != '0);
  a_start_idle:  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
