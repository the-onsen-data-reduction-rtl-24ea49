// onsen_top: the ONSEN online data reduction system for the Belle II pixel
// detector, as one synchronous design.
//
// One merger node and N_SEL selector nodes, connected by switch FPGAs:
//
//   DATCON ROIs --\                         /-- carrier 0 switch -- selectors 0..3
//                  merger node -- back-plane -- carrier 1 switch -- selectors 4..7
//   HLT packets --/               preselection  ...
//                                 (event mod 4) \-- carrier 7 switch -- selectors 28..31
//
// Selector s receives PXD subevents on pix_*[s] (one DHHC output link) and
// sends reduced data on out_*[s] to Event Builder 2. Carrier c holds
// selectors 4c..4c+3; carriers 2g and 2g+1 (the backward and forward detector
// halves) serve event group g, i.e. events with event mod 4 == (g+1) mod 4,
// so that two carriers together process complete events. Every card has its
// own RAM, reached through the m_* / s_m_* ports (4 GiB DDR2 on the real
// cards, outside this design). The serial links, Ethernet and back plane
// are modelled as plain valid/ready streams in one clock domain.
//
// Following the publication: 1 merger and 32 selector cards on 8 carriers
// of 4, the event-number preselection on the back plane, and the
// section-by-event mapping of the DHHC links. This design's own choices:
// the stream and RAM interfaces, the group formula above, folding the
// merger's carrier switch into the back-plane switch, and the statistic
// outputs that stand in for the slow-control registers. Timing: a selector
// can emit an event's output only after both its subevent and that event's
// ROI packet have arrived. The switches deliver each packet to their outputs in
// lock-step, so one stalled selector also holds up ROI delivery to the others.
module onsen_top
  import onsen_pkg::*;
#(
  parameter int N_CARRIER   = 8,
  parameter int SEL_PER_CAR = 4,
  parameter int N_SEL       = N_CARRIER * SEL_PER_CAR,
  parameter int GROUPS      = 4,
  parameter int LUT_AW      = 18,
  parameter int MAX_ROIS    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              busy,
  // merger node inputs
  input  logic              dc_valid,
  output logic              dc_ready,
  input  word_t             dc_word,
  input  logic              hlt_valid,
  output logic              hlt_ready,
  input  word_t             hlt_word,
  // merger node RAM
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  input  logic              m_rsp_valid,
  input  logic [MEM_DW-1:0] m_rsp_data,
  // selector nodes: DHHC links in
  input  logic [N_SEL-1:0]  pix_valid,
  output logic [N_SEL-1:0]  pix_ready,
  input  word_t             pix_word [N_SEL],
  // selector nodes: to Event Builder 2
  output logic [N_SEL-1:0]  out_valid,
  input  logic [N_SEL-1:0]  out_ready,
  output word_t             out_word [N_SEL],
  // selector nodes RAM
  output logic [N_SEL-1:0]  s_m_valid,
  input  logic [N_SEL-1:0]  s_m_ready,
  output mem_req_t          s_m_req [N_SEL],
  input  logic [N_SEL-1:0]  s_m_rsp_valid,
  input  logic [MEM_DW-1:0] s_m_rsp_data [N_SEL],
  // statistics
  output logic [31:0]       n_accept,
  output logic [31:0]       n_reject,
  output logic [31:0]       n_datcon_merged,
  output logic [31:0]       sel_events [N_SEL],
  output logic [31:0]       sel_rejected [N_SEL],
  output logic [31:0]       sel_missing [N_SEL],
  output logic [31:0]       sel_roi_overflow [N_SEL]
);

  logic        mg_busy;
  logic        roi_valid, roi_ready;
  word_t       roi_word;
  logic [31:0] n_datcon_stored, n_bp_packets;
  logic [N_SEL-1:0] sel_busy;

  assign busy = mg_busy || (|sel_busy);

  merger_node #(.LUT_AW(LUT_AW)) u_merger (
    .clk, .rst_n, .busy(mg_busy),
    .dc_valid, .dc_ready, .dc_word,
    .hlt_valid, .hlt_ready, .hlt_word,
    .out_valid(roi_valid), .out_ready(roi_ready), .out_word(roi_word),
    .m_valid, .m_ready, .m_req, .m_rsp_valid, .m_rsp_data,
    .n_datcon_stored, .n_accept, .n_reject, .n_datcon_merged
  );

  // back-plane preselection by event group
  logic [N_CARRIER-1:0] car_valid, car_ready;
  word_t                car_word [N_CARRIER];

  roi_switch #(.N_OUT(N_CARRIER), .GROUPS(GROUPS)) u_backplane (
    .clk, .rst_n,
    .in_valid(roi_valid), .in_ready(roi_ready), .in_word(roi_word),
    .out_valid(car_valid), .out_ready(car_ready), .out_word(car_word),
    .n_packets(n_bp_packets)
  );

  for (genvar c = 0; c < N_CARRIER; c++) begin : g_carrier
    logic [SEL_PER_CAR-1:0] s_valid, s_ready;
    word_t                  s_word [SEL_PER_CAR];
    logic [31:0]            n_car_packets;

    roi_switch #(.N_OUT(SEL_PER_CAR), .GROUPS(1)) u_switch (
      .clk, .rst_n,
      .in_valid(car_valid[c]), .in_ready(car_ready[c]), .in_word(car_word[c]),
      .out_valid(s_valid), .out_ready(s_ready), .out_word(s_word),
      .n_packets(n_car_packets)
    );

    for (genvar k = 0; k < SEL_PER_CAR; k++) begin : g_sel
      localparam int S = c * SEL_PER_CAR + k;
      logic [31:0] n_stored;

      selector_node #(.LUT_AW(LUT_AW), .MAX_ROIS(MAX_ROIS)) u_sel (
        .clk, .rst_n, .busy(sel_busy[S]),
        .pix_valid(pix_valid[S]), .pix_ready(pix_ready[S]), .pix_word(pix_word[S]),
        .roi_valid(s_valid[k]), .roi_ready(s_ready[k]), .roi_word(s_word[k]),
        .out_valid(out_valid[S]), .out_ready(out_ready[S]), .out_word(out_word[S]),
        .m_valid(s_m_valid[S]), .m_ready(s_m_ready[S]), .m_req(s_m_req[S]),
        .m_rsp_valid(s_m_rsp_valid[S]), .m_rsp_data(s_m_rsp_data[S]),
        .n_stored, .n_events(sel_events[S]), .n_rejected(sel_rejected[S]),
        .n_missing(sel_missing[S]), .n_roi_overflow(sel_roi_overflow[S])
      );
    end
  end

endmodule
