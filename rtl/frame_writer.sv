// frame_writer: stores incoming frames in the RAM ring buffer and registers
// them in the event look-up table.
//
// Used by the selector node for PXD subevents and by the merger node for
// DATCON ROI frames. Every word of a frame, header included, is written to
// the next address of a ring buffer that wraps at 2^PTR_W words (the 4 GiB
// DDR2 of a card); the oldest data are overwritten when it wraps. When the
// last word has been written, {event number, start address, length} goes to
// the look-up table in a one-cycle lut_wr pulse. The event number is taken
// from bits [31:0] of the header word.
//
// Timing: one word per cycle. The input is passed combinationally to the
// memory request port, so in_ready follows mem_ready. Nothing is accepted
// while the look-up table is still clearing (lut_busy).
//
// Storing data in RAM with pointer and event number in a table follows the
// publication; the ring-buffer policy and the frame layout are this design's.
module frame_writer
  import onsen_pkg::*;
#(
  parameter int PTR_W = MEM_AW,
  parameter int LEN_W = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  // frame stream in
  input  logic             in_valid,
  output logic             in_ready,
  input  word_t            in_word,
  // memory write requests
  output logic             mem_valid,
  input  logic             mem_ready,
  output mem_req_t         mem_req,
  // look-up table
  input  logic             lut_busy,
  output logic             lut_wr,
  output logic [EVT_W-1:0] lut_evt,
  output logic [PTR_W-1:0] lut_ptr,
  output logic [LEN_W-1:0] lut_len,
  // statistics
  output logic [31:0]      frames
);

  logic [PTR_W-1:0] wptr, start_q;
  logic [LEN_W-1:0] len_q;
  logic [EVT_W-1:0] evt_q;
  logic             first_q;   // next word is a header

  assign mem_valid     = in_valid && !lut_busy;
  assign in_ready      = mem_ready && !lut_busy;
  assign mem_req.we    = 1'b1;
  assign mem_req.addr  = MEM_AW'(wptr);
  assign mem_req.wdata = in_word.data;

  logic take;
  assign take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr    <= '0;
      start_q <= '0;
      len_q   <= '0;
      evt_q   <= '0;
      first_q <= 1'b1;
      lut_wr  <= 1'b0;
      lut_evt <= '0;
      lut_ptr <= '0;
      lut_len <= '0;
      frames  <= '0;
    end else begin
      lut_wr <= 1'b0;
      if (take) begin
        wptr <= wptr + 1'b1;
        if (first_q) begin
          start_q <= wptr;
          evt_q   <= in_word.data[EVT_W-1:0];
        end
        len_q   <= first_q ? LEN_W'(1) : len_q + 1'b1;
        first_q <= in_word.last;
        if (in_word.last) begin
          lut_wr  <= 1'b1;
          lut_evt <= first_q ? in_word.data[EVT_W-1:0] : evt_q;
          lut_ptr <= first_q ? wptr : start_q;
          lut_len <= first_q ? LEN_W'(1) : len_q + 1'b1;
          frames  <= frames + 1'b1;
        end
      end
    end
  end

endmodule
