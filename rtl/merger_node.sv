// merger_node: the merger card of the ONSEN system.
//
// Receives the DATCON ROI frames (ordered, a few microseconds after the
// trigger), writes them to its RAM ring buffer and registers each in the
// event look-up table. The HLT answers each event, in arbitrary order and up
// to seconds later, with the software trigger decision and its own ROIs; the
// ROI merger then reads the DATCON ROIs of that event back and emits one
// combined ROI packet for the switch. Writer and reader share the single RAM
// port through a round-robin arbiter.
//
// Interfaces: frame streams with valid/ready (see onsen_pkg for formats);
// the RAM port takes valid/ready requests and returns read data in order,
// at least one cycle after the request, without back-pressure.
module merger_node
  import onsen_pkg::*;
#(
  parameter int LUT_AW     = 18,
  parameter int PTR_W      = MEM_AW,
  parameter int LEN_W      = 20,
  parameter int FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              busy,
  // DATCON ROI frames
  input  logic              dc_valid,
  output logic              dc_ready,
  input  word_t             dc_word,
  // HLT decisions and ROIs
  input  logic              hlt_valid,
  output logic              hlt_ready,
  input  word_t             hlt_word,
  // merged ROI packets
  output logic              out_valid,
  input  logic              out_ready,
  output word_t             out_word,
  // RAM port
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  input  logic              m_rsp_valid,
  input  logic [MEM_DW-1:0] m_rsp_data,
  // statistics
  output logic [31:0]       n_datcon_stored,
  output logic [31:0]       n_accept,
  output logic [31:0]       n_reject,
  output logic [31:0]       n_datcon_merged
);

  logic             w_valid, w_ready, r_valid, r_ready;
  mem_req_t         w_req, r_req;
  logic             lut_busy, lut_wr, lut_rd_en, lut_rd_done, lut_rd_hit;
  logic [EVT_W-1:0] lut_wr_evt, lut_rd_evt;
  logic [PTR_W-1:0] lut_wr_ptr, lut_rd_ptr;
  logic [LEN_W-1:0] lut_wr_len, lut_rd_len;
  logic             rdr_start, rdr_busy, rdr_valid, rdr_ready;
  logic [PTR_W-1:0] rdr_ptr;
  logic [LEN_W-1:0] rdr_len;
  word_t            rdr_word;

  assign busy = lut_busy;

  frame_writer #(.PTR_W(PTR_W), .LEN_W(LEN_W)) u_writer (
    .clk, .rst_n,
    .in_valid(dc_valid), .in_ready(dc_ready), .in_word(dc_word),
    .mem_valid(w_valid), .mem_ready(w_ready), .mem_req(w_req),
    .lut_busy, .lut_wr, .lut_evt(lut_wr_evt), .lut_ptr(lut_wr_ptr), .lut_len(lut_wr_len),
    .frames(n_datcon_stored)
  );

  event_lut #(.LUT_AW(LUT_AW), .PTR_W(PTR_W), .LEN_W(LEN_W)) u_lut (
    .clk, .rst_n, .busy(lut_busy),
    .wr_en(lut_wr), .wr_evt(lut_wr_evt), .wr_ptr(lut_wr_ptr), .wr_len(lut_wr_len),
    .rd_en(lut_rd_en), .rd_evt(lut_rd_evt),
    .rd_done(lut_rd_done), .rd_hit(lut_rd_hit), .rd_ptr(lut_rd_ptr), .rd_len(lut_rd_len)
  );

  frame_reader #(.PTR_W(PTR_W), .LEN_W(LEN_W), .FIFO_DEPTH(FIFO_DEPTH)) u_reader (
    .clk, .rst_n,
    .start(rdr_start), .start_ptr(rdr_ptr), .start_len(rdr_len), .busy(rdr_busy),
    .mem_valid(r_valid), .mem_ready(r_ready), .mem_req(r_req),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .out_valid(rdr_valid), .out_ready(rdr_ready), .out_word(rdr_word)
  );

  mem_arbiter u_arb (
    .clk, .rst_n,
    .c0_valid(w_valid), .c0_ready(w_ready), .c0_req(w_req),
    .c1_valid(r_valid), .c1_ready(r_ready), .c1_req(r_req),
    .m_valid, .m_ready, .m_req
  );

  roi_merger #(.PTR_W(PTR_W), .LEN_W(LEN_W)) u_merge (
    .clk, .rst_n,
    .hlt_valid, .hlt_ready, .hlt_word,
    .lut_busy, .lut_rd_en, .lut_rd_evt, .lut_rd_done, .lut_rd_hit, .lut_rd_ptr, .lut_rd_len,
    .rdr_start, .rdr_ptr, .rdr_len, .rdr_valid, .rdr_ready, .rdr_word,
    .out_valid, .out_ready, .out_word,
    .n_accept, .n_reject, .n_datcon_merged
  );

endmodule
