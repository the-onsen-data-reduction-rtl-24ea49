// selector_node: one selector card of the ONSEN system.
//
// Receives the PXD subevents of one DHHC output link (one of the eight
// detector sections, every fourth event), writes them to its RAM ring buffer
// and registers each in the event look-up table. When the merged ROI packet
// of an event arrives from the carrier switch, the selector core reads the
// subevent back, filters it with the ROIs and sends the reduced subevent to
// Event Builder 2. Writer and reader share the single RAM port through a
// round-robin arbiter.
//
// Interfaces: frame streams with valid/ready (see onsen_pkg for formats);
// the RAM port takes valid/ready requests and returns read data in order,
// at least one cycle after the request, without back-pressure.
module selector_node
  import onsen_pkg::*;
#(
  parameter int LUT_AW     = 18,
  parameter int PTR_W      = MEM_AW,
  parameter int LEN_W      = 20,
  parameter int MAX_ROIS   = 64,
  parameter int FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              busy,
  // PXD subevents from the DHHC link
  input  logic              pix_valid,
  output logic              pix_ready,
  input  word_t             pix_word,
  // merged ROI packets
  input  logic              roi_valid,
  output logic              roi_ready,
  input  word_t             roi_word,
  // reduced data to Event Builder 2
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
  output logic [31:0]       n_stored,
  output logic [31:0]       n_events,
  output logic [31:0]       n_rejected,
  output logic [31:0]       n_missing,
  output logic [31:0]       n_roi_overflow
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
    .in_valid(pix_valid), .in_ready(pix_ready), .in_word(pix_word),
    .mem_valid(w_valid), .mem_ready(w_ready), .mem_req(w_req),
    .lut_busy, .lut_wr, .lut_evt(lut_wr_evt), .lut_ptr(lut_wr_ptr), .lut_len(lut_wr_len),
    .frames(n_stored)
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

  selector_core #(.PTR_W(PTR_W), .LEN_W(LEN_W), .MAX_ROIS(MAX_ROIS)) u_core (
    .clk, .rst_n,
    .roi_valid, .roi_ready, .roi_word,
    .lut_busy, .lut_rd_en, .lut_rd_evt, .lut_rd_done, .lut_rd_hit, .lut_rd_ptr, .lut_rd_len,
    .rdr_start, .rdr_ptr, .rdr_len, .rdr_valid, .rdr_ready, .rdr_word,
    .out_valid, .out_ready, .out_word,
    .n_events, .n_rejected, .n_missing, .n_roi_overflow
  );

endmodule
