// selector_core: pixel data reduction of one selector node.
//
// For every ROI packet that arrives (header {accept[32], event[31:0]},
// then ROIs) the core
//   1. looks the event up in the table of buffered PXD subevents and loads
//      the ROIs into its roi_filter;
//   2. for a rejected event outputs nothing; the buffered pixel data are
//      simply never read, which discards them;
//   3. for an accepted event sends a header {1 at bit 32, event} to Event
//      Builder 2, reads the subevent back from RAM, unpacks the two hits of
//      each word, passes them through the ROI filter and sends each selected
//      hit in a word of its own;
//   4. closes the event with a trailer {hits out[63:32], hits in[31:0]}.
// An accepted event without buffered pixel data gives header and trailer
// with zero hits, so the trigger information still reaches the event
// builder. The stored subevent header {hit count, event} tells how many hit
// slots of the read-back words are used.
//
// The publication gives the sequence (read back on ROI arrival, filter,
// send); formats, the rule for rejected events without output and the
// pass-all fallback when the ROI list overflows are this design's choices.
//
// Timing: filtering runs at one hit per clock when RAM and output keep up.
module selector_core
  import onsen_pkg::*;
#(
  parameter int PTR_W    = MEM_AW,
  parameter int LEN_W    = 20,
  parameter int MAX_ROIS = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // ROI packets from the switch
  input  logic             roi_valid,
  output logic             roi_ready,
  input  word_t            roi_word,
  // look-up table of buffered subevents
  input  logic             lut_busy,
  output logic             lut_rd_en,
  output logic [EVT_W-1:0] lut_rd_evt,
  input  logic             lut_rd_done,
  input  logic             lut_rd_hit,
  input  logic [PTR_W-1:0] lut_rd_ptr,
  input  logic [LEN_W-1:0] lut_rd_len,
  // frame reader
  output logic             rdr_start,
  output logic [PTR_W-1:0] rdr_ptr,
  output logic [LEN_W-1:0] rdr_len,
  input  logic             rdr_valid,
  output logic             rdr_ready,
  input  word_t            rdr_word,
  // reduced data to Event Builder 2
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            out_word,
  // statistics
  output logic [31:0]      n_events,
  output logic [31:0]      n_rejected,
  output logic [31:0]      n_missing,
  output logic [31:0]      n_roi_overflow
);

  typedef enum logic [2:0] {S_IDLE, S_ROI, S_DEC, S_HDR, S_RHDR, S_PIX, S_DRAIN, S_TRL} state_e;
  state_e state;

  logic [EVT_W-1:0] evt_q;
  logic             accept_q;
  logic             lut_got, lut_hit_q;
  logic [PTR_W-1:0] lut_ptr_q;
  logic [LEN_W-1:0] lut_len_q;
  logic [31:0]      hits_in, hits_left, hits_out;
  logic             half;       // next hit is the upper half of the word
  logic             rdr_done;   // last read-back word consumed

  // ---------------------------------------------------------------- filter
  logic   f_clr, f_we, f_in_valid, f_in_ready, f_out_valid, f_out_ready, f_overflow;
  pixel_t f_in_pix, f_out_pix;
  logic [$clog2(MAX_ROIS+1)-1:0] f_n_rois;

  roi_filter #(.MAX_ROIS(MAX_ROIS)) u_filter (
    .clk, .rst_n,
    .clr(f_clr), .roi_we(f_we), .roi(roi_t'(roi_word.data[$bits(roi_t)-1:0])),
    .pass_all(1'b0), .overflow(f_overflow), .n_rois(f_n_rois),
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_pix(f_in_pix),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_pix(f_out_pix)
  );

  logic hdr_take;
  assign hdr_take   = (state == S_IDLE) && roi_valid && !lut_busy;
  assign lut_rd_en  = hdr_take;
  assign lut_rd_evt = roi_word.data[EVT_W-1:0];
  assign f_clr      = hdr_take;
  assign f_we       = (state == S_ROI) && roi_valid && accept_q;

  assign f_in_pix   = pixel_t'(half ? rdr_word.data[63:32] : rdr_word.data[31:0]);
  assign f_in_valid = (state == S_PIX) && rdr_valid && (hits_left != '0);
  assign f_out_ready = (state == S_PIX || state == S_DRAIN) && out_ready;

  logic f_take;
  assign f_take = f_in_valid && f_in_ready;

  always_comb begin
    roi_ready = 1'b0;
    rdr_ready = 1'b0;
    out_valid = 1'b0;
    out_word  = '0;
    unique case (state)
      S_IDLE: roi_ready = hdr_take;
      S_ROI:  roi_ready = 1'b1;
      S_HDR: begin
        out_valid = 1'b1;
        out_word.data[EVT_W-1:0]  = evt_q;
        out_word.data[ACCEPT_BIT] = 1'b1;
      end
      S_RHDR: rdr_ready = 1'b1;
      S_PIX: begin
        // consume a word after its last used slot; surplus words are dropped
        rdr_ready = (hits_left == '0) ? 1'b1
                  : f_in_ready && (half || hits_left == 32'd1);
        out_valid = f_out_valid;
        out_word.data[31:0] = f_out_pix;
      end
      S_DRAIN: begin
        out_valid = f_out_valid;
        out_word.data[31:0] = f_out_pix;
      end
      S_TRL: begin
        out_valid = 1'b1;
        out_word.data = {hits_out, hits_in};
        out_word.last = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      evt_q          <= '0;
      accept_q       <= 1'b0;
      lut_got        <= 1'b0;
      lut_hit_q      <= 1'b0;
      lut_ptr_q      <= '0;
      lut_len_q      <= '0;
      hits_in        <= '0;
      hits_left      <= '0;
      hits_out       <= '0;
      half           <= 1'b0;
      rdr_done       <= 1'b0;
      rdr_start      <= 1'b0;
      rdr_ptr        <= '0;
      rdr_len        <= '0;
      n_events       <= '0;
      n_rejected     <= '0;
      n_missing      <= '0;
      n_roi_overflow <= '0;
    end else begin
      rdr_start <= 1'b0;
      if (lut_rd_done) begin
        lut_got   <= 1'b1;
        lut_hit_q <= lut_rd_hit;
        lut_ptr_q <= lut_rd_ptr;
        lut_len_q <= lut_rd_len;
      end
      if (f_out_valid && f_out_ready) hits_out <= hits_out + 1'b1;

      unique case (state)
        S_IDLE: if (hdr_take) begin
          evt_q    <= roi_word.data[EVT_W-1:0];
          accept_q <= roi_word.data[ACCEPT_BIT];
          lut_got  <= 1'b0;
          hits_in  <= '0;
          hits_out <= '0;
          half     <= 1'b0;
          rdr_done <= 1'b0;
          state    <= roi_word.last ? S_DEC : S_ROI;
        end
        S_ROI: if (roi_valid && roi_word.last) state <= S_DEC;
        S_DEC: if (lut_got) begin
          if (!accept_q) begin
            n_rejected <= n_rejected + 1'b1;
            state      <= S_IDLE;
          end else begin
            if (f_overflow) n_roi_overflow <= n_roi_overflow + 1'b1;
            state <= S_HDR;
          end
        end
        S_HDR: if (out_ready) begin
          if (lut_hit_q) begin
            rdr_start <= 1'b1;
            rdr_ptr   <= lut_ptr_q;
            rdr_len   <= lut_len_q;
            state     <= S_RHDR;
          end else begin
            n_missing <= n_missing + 1'b1;
            state     <= S_TRL;
          end
        end
        S_RHDR: if (rdr_valid) begin
          hits_in   <= rdr_word.data[63:32];
          hits_left <= rdr_word.data[63:32];
          rdr_done  <= rdr_word.last;
          state     <= S_PIX;
        end
        S_PIX: begin
          if (f_take) begin
            hits_left <= hits_left - 1'b1;
            half      <= !half && (hits_left != 32'd1);
          end
          if (rdr_valid && rdr_ready && rdr_word.last) rdr_done <= 1'b1;
          if (hits_left == '0 && (rdr_done || (rdr_valid && rdr_word.last))) state <= S_DRAIN;
        end
        S_DRAIN: if (!f_out_valid) state <= S_TRL;
        S_TRL: if (out_ready) begin
          n_events <= n_events + 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An offered output word stays unchanged until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
