// roi_filter: region-of-interest pixel selection.
//
// Holds the ROI list of the event being processed and forwards only those
// pixel hits that lie inside at least one ROI: same sensor, row_lo <= row <=
// row_hi and col_lo <= col <= col_hi (bounds inclusive). The ROIs of both
// sources (HLT and DATCON) are simply appended to the same list, so the
// selection is their union, as the publication describes.
//
// All MAX_ROIS comparators work in parallel, so one hit is judged per clock.
// A hit that is selected appears on the output register one cycle after it
// was accepted; a hit outside every ROI is consumed and dropped.
//
// Loading: 'clr' empties the list, each 'roi_we' appends one ROI. If more
// than MAX_ROIS ROIs arrive, 'overflow' is set and the filter forwards every
// hit of the event rather than lose any (this design's choice; the
// publication gives no ROI limit). 'pass_all' forces the same from outside.
// The list must not be changed while hits of the event are in flight.
module roi_filter
  import onsen_pkg::*;
#(
  parameter int MAX_ROIS = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  // ROI list
  input  logic   clr,
  input  logic   roi_we,
  input  roi_t   roi,
  input  logic   pass_all,
  output logic   overflow,
  output logic [$clog2(MAX_ROIS+1)-1:0] n_rois,
  // hit stream in
  input  logic   in_valid,
  output logic   in_ready,
  input  pixel_t in_pix,
  // selected hits out
  output logic   out_valid,
  input  logic   out_ready,
  output pixel_t out_pix
);

  localparam int IW = (MAX_ROIS > 1) ? $clog2(MAX_ROIS) : 1;

  roi_t rois [MAX_ROIS];
  logic [IW-1:0] wr_i;
  assign wr_i = IW'(n_rois);
  logic [MAX_ROIS-1:0] roi_used;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      roi_used <= '0;
      n_rois   <= '0;
      overflow <= 1'b0;
    end else if (clr) begin
      roi_used <= '0;
      n_rois   <= '0;
      overflow <= 1'b0;
    end else if (roi_we) begin
      if (n_rois == MAX_ROIS[$bits(n_rois)-1:0]) begin
        overflow <= 1'b1;
      end else begin
        roi_used[wr_i] <= 1'b1;
        n_rois           <= n_rois + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (roi_we && !clr && n_rois != MAX_ROIS[$bits(n_rois)-1:0])
      rois[wr_i] <= roi;
  end

  // Parallel match against every stored ROI.
  logic [MAX_ROIS-1:0] hit_vec;
  always_comb begin
    for (int i = 0; i < MAX_ROIS; i++)
      hit_vec[i] = roi_used[i] && inside_roi(in_pix, rois[i]);
  end

  logic selected;
  assign selected = (|hit_vec) || overflow || pass_all;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid && selected;
      if (in_valid && selected) out_pix <= in_pix;
    end
  end

  // The output word must hold while it waits.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_pix));

endmodule
