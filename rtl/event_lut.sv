// event_lut: look-up table from event number to buffered data.
//
// When a frame has been written to the RAM ring buffer, its event number,
// start pointer and length (in 64-bit words) are stored here; when the HLT
// answer for that event arrives, the entry is looked up. The
// publication names this table; its organisation is this design's choice:
// direct-mapped, indexed by the low LUT_AW bits of the event number, with the
// remaining high bits kept as a tag so that a stale or foreign entry is not
// mistaken for a hit. 2^18 entries cover 30 kHz x 5 s = 150,000 events in
// flight.
//
// After reset the table clears itself, one entry per cycle (2^LUT_AW
// cycles); 'busy' is high meanwhile and requests must wait. Entries are not
// freed after a lookup: each event is requested once, the full event number
// is compared, and a later event with the same index simply overwrites the
// slot. The table has one write port and one read port.
//
// Timing: a write takes effect at the clock edge. A lookup presented with
// rd_en returns rd_done with rd_hit/rd_ptr/rd_len on the next cycle. A
// lookup in the same cycle as a write to the same entry sees the old entry.
module event_lut
  import onsen_pkg::*;
#(
  parameter int LUT_AW = 18,
  parameter int PTR_W  = MEM_AW,
  parameter int LEN_W  = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             busy,
  input  logic             wr_en,
  input  logic [EVT_W-1:0] wr_evt,
  input  logic [PTR_W-1:0] wr_ptr,
  input  logic [LEN_W-1:0] wr_len,
  input  logic             rd_en,
  input  logic [EVT_W-1:0] rd_evt,
  output logic             rd_done,
  output logic             rd_hit,
  output logic [PTR_W-1:0] rd_ptr,
  output logic [LEN_W-1:0] rd_len
);

  localparam int TAG_W = EVT_W - LUT_AW;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    logic [PTR_W-1:0] ptr;
    logic [LEN_W-1:0] len;
  } entry_t;

  entry_t table_q [2**LUT_AW];

  logic [LUT_AW-1:0] clr_idx;
  logic              clearing;
  assign busy = clearing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
    end else if (clearing) begin
      clr_idx <= clr_idx + 1'b1;
      if (&clr_idx) clearing <= 1'b0;
    end
  end

  logic [LUT_AW-1:0] wr_idx, rd_idx;
  assign wr_idx = wr_evt[LUT_AW-1:0];
  assign rd_idx = rd_evt[LUT_AW-1:0];

  entry_t rd_q;
  logic   rd_pend;
  logic [TAG_W-1:0] rd_tag_q;

  // Single table write port: clear after reset, then new entries.
  always_ff @(posedge clk) begin
    if (clearing) begin
      table_q[clr_idx] <= '0;
    end else if (wr_en) begin
      table_q[wr_idx] <= '{valid: 1'b1, tag: wr_evt[EVT_W-1:LUT_AW], ptr: wr_ptr, len: wr_len};
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_q     <= table_q[rd_idx];
      rd_tag_q <= rd_evt[EVT_W-1:LUT_AW];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_pend <= 1'b0;
    else        rd_pend <= rd_en && !clearing;
  end

  assign rd_done = rd_pend;
  assign rd_hit  = rd_pend && rd_q.valid && (rd_q.tag == rd_tag_q);
  assign rd_ptr  = rd_q.ptr;
  assign rd_len  = rd_q.len;

  a_no_req_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wr_en && !rd_en);

endmodule
