// onsen_pkg: types and constants shared by the ONSEN data reduction RTL.
//
// Pixel hits and regions of interest (ROIs) are packed structs. All frames
// between blocks are streams of 64-bit words with a 'last' flag and a
// valid/ready handshake (a word moves when valid and ready are both high).
//
// Frame formats (this design's own choice; the publication gives none):
//   PXD subevent (DHHC link):  header {hit count[63:32], event[31:0]},
//                              then hits packed two per word (low half first).
//   DATCON ROI frame:          header {ROI count[63:32], event[31:0]}, one ROI per word.
//   HLT / merged ROI packet:   header {accept[32], event[31:0]}, one ROI per word.
//   Output to Event Builder 2: header {1'b1 at [32], event[31:0]},
//                              one hit per word, trailer {hits out[63:32], hits in[31:0]}.
// The 'last' flag marks the final word of every frame.
//
// Field widths cover the Belle II sensor (768 rows x 250 columns, 40 half-ladders).
package onsen_pkg;

  localparam int EVT_W    = 32;
  localparam int SENSOR_W = 6;
  localparam int ROW_W    = 10;
  localparam int COL_W    = 8;
  localparam int ADC_W    = 8;
  localparam int WORD_W   = 64;

  // 4 GiB of DDR2 per card, addressed in 64-bit words.
  localparam int MEM_AW   = 29;
  localparam int MEM_DW   = WORD_W;

  typedef struct packed {
    logic [SENSOR_W-1:0] sensor;
    logic [ROW_W-1:0]    row;
    logic [COL_W-1:0]    col;
    logic [ADC_W-1:0]    adc;
  } pixel_t;                         // 32 bits

  typedef struct packed {
    logic [SENSOR_W-1:0] sensor;
    logic [ROW_W-1:0]    row_lo;
    logic [ROW_W-1:0]    row_hi;
    logic [COL_W-1:0]    col_lo;
    logic [COL_W-1:0]    col_hi;
  } roi_t;                           // 42 bits, stored in the low bits of a word

  typedef struct packed {
    logic              last;
    logic [WORD_W-1:0] data;
  } word_t;

  typedef struct packed {
    logic              we;
    logic [MEM_AW-1:0] addr;
    logic [MEM_DW-1:0] wdata;
  } mem_req_t;

  localparam int ACCEPT_BIT = 32;

  function automatic logic inside_roi(pixel_t p, roi_t r);
    return (p.sensor == r.sensor) &&
           (p.row >= r.row_lo) && (p.row <= r.row_hi) &&
           (p.col >= r.col_lo) && (p.col <= r.col_hi);
  endfunction

endpackage
