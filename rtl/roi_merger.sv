// roi_merger: combines HLT and DATCON regions of interest into one packet.
//
// The HLT sends, for every event, a packet with the software trigger
// decision (accept at bit 32 of the header, event number in bits [31:0])
// followed by its ROIs. DATCON ROI frames arrived earlier and sit in RAM,
// registered in the look-up table. For each HLT packet the merger
//   1. looks up the event in the table,
//   2. sends the merged header {accept, event},
//   3. for an accepted event forwards the HLT ROIs, then reads the DATCON
//      ROIs of the event back from RAM (skipping their stored header) and
//      forwards them, 'last' on the final word of the whole packet;
//   4. for a rejected event sends the header alone and drops the HLT ROIs;
//      the DATCON ROIs are ignored, as the data of a rejected event are
//      discarded regardless of them.
// An HLT packet without DATCON ROIs (table miss) is forwarded with the HLT
// ROIs only. The packet layout is this design's choice.
//
// Timing: the lookup takes two cycles before the header is offered; after
// that one word per cycle, limited by the output and the RAM read-back.
module roi_merger
  import onsen_pkg::*;
#(
  parameter int PTR_W = MEM_AW,
  parameter int LEN_W = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  // HLT packets
  input  logic             hlt_valid,
  output logic             hlt_ready,
  input  word_t            hlt_word,
  // look-up table (DATCON ROI frames)
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
  // merged ROI packets
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            out_word,
  // statistics
  output logic [31:0]      n_accept,
  output logic [31:0]      n_reject,
  output logic [31:0]      n_datcon_merged
);

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_HDR, S_HLT, S_DROP, S_DAT} state_e;
  state_e state;

  logic accept_q, dat_q;   // event accepted / DATCON ROIs to append

  assign lut_rd_en  = (state == S_IDLE) && hlt_valid && !lut_busy;
  assign lut_rd_evt = hlt_word.data[EVT_W-1:0];

  always_comb begin
    out_valid = 1'b0;
    out_word  = '0;
    hlt_ready = 1'b0;
    rdr_ready = 1'b0;
    unique case (state)
      S_HDR: begin
        out_valid          = 1'b1;
        out_word.data[EVT_W-1:0]  = hlt_word.data[EVT_W-1:0];
        out_word.data[ACCEPT_BIT] = accept_q;
        out_word.last      = !accept_q || (hlt_word.last && !dat_q);
        hlt_ready          = out_ready;
      end
      S_HLT: begin
        out_valid     = hlt_valid;
        out_word.data = hlt_word.data;
        out_word.last = hlt_word.last && !dat_q;
        hlt_ready     = out_ready;
      end
      S_DROP: hlt_ready = 1'b1;
      S_DAT: begin
        out_valid = rdr_valid;
        out_word  = rdr_word;
        rdr_ready = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      accept_q        <= 1'b0;
      dat_q           <= 1'b0;
      rdr_start       <= 1'b0;
      rdr_ptr         <= '0;
      rdr_len         <= '0;
      n_accept        <= '0;
      n_reject        <= '0;
      n_datcon_merged <= '0;
    end else begin
      rdr_start <= 1'b0;
      unique case (state)
        S_IDLE: if (lut_rd_en) state <= S_LOOK;
        S_LOOK: if (lut_rd_done) begin
          accept_q <= hlt_word.data[ACCEPT_BIT];
          dat_q    <= hlt_word.data[ACCEPT_BIT] && lut_rd_hit && (lut_rd_len > LEN_W'(1));
          rdr_ptr  <= lut_rd_ptr + 1'b1;
          rdr_len  <= lut_rd_len - 1'b1;
          state    <= S_HDR;
        end
        S_HDR: if (out_ready) begin
          if (accept_q) n_accept <= n_accept + 1'b1;
          else          n_reject <= n_reject + 1'b1;
          if (dat_q) begin
            rdr_start       <= 1'b1;
            n_datcon_merged <= n_datcon_merged + 1'b1;
          end
          if (!hlt_word.last)  state <= accept_q ? S_HLT : S_DROP;
          else if (dat_q)      state <= S_DAT;
          else                 state <= S_IDLE;
        end
        S_HLT: if (hlt_valid && out_ready && hlt_word.last)
          state <= dat_q ? S_DAT : S_IDLE;
        S_DROP: if (hlt_valid && hlt_word.last) state <= S_IDLE;
        S_DAT: if (rdr_valid && out_ready && rdr_word.last) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // An offered output word stays unchanged until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
