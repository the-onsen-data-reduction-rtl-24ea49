// tb_selector_core: self-checking test of the selector core.
//
// The core works here with a real ROI filter (inside it), look-up table,
// frame reader and RAM model; the PXD subevents are placed in RAM and
// registered in the table directly by the testbench (no frame writer).
// PXD subevents (0 to 40 hits, packed two per word, the unused half of an
// odd last word filled with junk) are stored for events 1, 5, 9, ...; about
// one event in seven has none. ROI packets then arrive in shuffled order
// with random decisions and 0 to 6 ROIs, a few with more than MAX_ROIS = 8.
// The output is compared with an independent model: nothing for a rejected
// event; otherwise header, every stored hit inside an ROI (every hit on ROI
// overflow) in stored order, and trailer {hits out, hits in}; header and a
// zero trailer for an accepted event without data. RAM latency 5 with
// random stalls, random back-pressure at the output.
module tb_selector_core;
  import onsen_pkg::*;

  localparam int N_EVT = 60, MAXR = 8;

  logic clk = 0, rst_n = 0, busy;
  logic roi_valid = 0, roi_ready, out_valid, out_ready = 1;
  word_t roi_word = '0, out_word;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic [31:0] n_stored, n_events, n_rejected, n_missing, n_roi_overflow;

  int checks = 0, failures = 0;

  logic             lut_busy, lut_wr = 0, lut_rd_en, lut_rd_done, lut_rd_hit;
  logic [EVT_W-1:0] lut_wr_evt = '0, lut_rd_evt;
  logic [MEM_AW-1:0] lut_wr_ptr = '0, lut_rd_ptr, rdr_ptr;
  logic [19:0]      lut_wr_len = '0, lut_rd_len, rdr_len;
  logic             rdr_start, rdr_busy, rdr_valid, rdr_ready;
  word_t            rdr_word;
  int               wp = 0;

  assign busy = lut_busy;
  assign n_stored = 32'(n_pxd);

  selector_core #(.MAX_ROIS(MAXR)) dut (
    .clk, .rst_n, .roi_valid, .roi_ready, .roi_word,
    .lut_busy, .lut_rd_en, .lut_rd_evt, .lut_rd_done, .lut_rd_hit, .lut_rd_ptr, .lut_rd_len,
    .rdr_start, .rdr_ptr, .rdr_len, .rdr_valid, .rdr_ready, .rdr_word,
    .out_valid, .out_ready, .out_word, .n_events, .n_rejected, .n_missing, .n_roi_overflow
  );
  event_lut #(.LUT_AW(8)) u_lut (
    .clk, .rst_n, .busy(lut_busy), .wr_en(lut_wr), .wr_evt(lut_wr_evt), .wr_ptr(lut_wr_ptr), .wr_len(lut_wr_len),
    .rd_en(lut_rd_en), .rd_evt(lut_rd_evt), .rd_done(lut_rd_done), .rd_hit(lut_rd_hit),
    .rd_ptr(lut_rd_ptr), .rd_len(lut_rd_len)
  );
  frame_reader u_rdr (
    .clk, .rst_n, .start(rdr_start), .start_ptr(rdr_ptr), .start_len(rdr_len), .busy(rdr_busy),
    .mem_valid(m_valid), .mem_ready(m_ready), .mem_req(m_req), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .out_valid(rdr_valid), .out_ready(rdr_ready), .out_word(rdr_word)
  );
  ddr2_model #(.LAT(5), .READY_PCT(80)) u_mem (.clk, .rst_n, .m_valid, .m_ready, .m_req,
                                              .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pixel_t rand_pix();
    pixel_t p;
    p.sensor = 6'($urandom_range(4));
    p.row    = 10'($urandom_range(63));
    p.col    = 8'($urandom_range(31));
    p.adc    = 8'($urandom);
    return p;
  endfunction

  function automatic roi_t rand_roi();
    roi_t r;
    int a, b;
    r.sensor = 6'($urandom_range(4));
    a = $urandom_range(63); b = $urandom_range(63);
    r.row_lo = 10'(a < b ? a : b); r.row_hi = 10'(a < b ? b : a);
    a = $urandom_range(31); b = $urandom_range(31);
    r.col_lo = 8'(a < b ? a : b); r.col_hi = 8'(a < b ? b : a);
    return r;
  endfunction

  function automatic bit in_any(pixel_t p, roi_t r [$]);
    foreach (r[i])
      if (p.sensor == r[i].sensor && p.row >= r[i].row_lo && p.row <= r[i].row_hi &&
          p.col >= r[i].col_lo && p.col <= r[i].col_hi) return 1;
    return 0;
  endfunction

  pixel_t hits [int][$];
  word_t  expq [$];
  int     exp_ev = 0, exp_rej = 0, exp_miss = 0, exp_ovf = 0, n_pxd = 0, tot_out = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      word_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected output %h", out_word.data);
      end else begin
        e = expq.pop_front();
        if (e != out_word) begin
          failures++; $display("output %h/%b expected %h/%b", out_word.data, out_word.last, e.data, e.last);
        end
      end
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(99) < 75);

  // place one word in RAM at the write pointer
  task automatic send_pix(word_t w);
    u_mem.mem[MEM_AW'(wp)] = w.data;
    wp++;
  endtask

  task automatic send_roi(word_t w);
    roi_word = w; roi_valid = 1;
    @(posedge clk);
    while (!roi_ready) @(posedge clk);
    @(negedge clk);
    roi_valid = 0;
  endtask

  // one PXD subevent: header, then hits two per word
  task automatic store_pxd(int e, pixel_t h [$]);
    int nw, start;
    nw = (h.size() + 1) / 2;
    start = wp;
    send_pix('{last: nw == 0, data: {32'(h.size()), 32'(e)}});
    for (int i = 0; i < nw; i++) begin
      logic [31:0] hi;
      hi = (2 * i + 1 < h.size()) ? h[2*i+1] : $urandom;
      send_pix('{last: i == nw - 1, data: {hi, h[2*i]}});
    end
    @(negedge clk);
    lut_wr = 1; lut_wr_evt = 32'(e); lut_wr_ptr = MEM_AW'(start); lut_wr_len = 20'(nw + 1);
    @(negedge clk);
    lut_wr = 0;
  endtask

  initial begin
    int order [N_EVT];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);

    for (int k = 0; k < N_EVT; k++) begin
      int e, n;
      e = 4 * k + 1;
      if ($urandom_range(6) == 0) continue;
      n = $urandom_range(0, 40);
      hits[e] = {};
      for (int i = 0; i < n; i++) hits[e].push_back(rand_pix());
      store_pxd(e, hits[e]);
      n_pxd++;
    end

    for (int k = 0; k < N_EVT; k++) order[k] = 4 * k + 1;
    order.shuffle();
    foreach (order[k]) begin
      int e, n, nin, nout;
      bit acc;
      roi_t r [$];
      r.delete();
      e = order[k];
      acc = ($urandom_range(4) < 3) || (k < 10);
      n = (k % 11 == 5) ? $urandom_range(MAXR + 1, MAXR + 4) : $urandom_range(0, 6);
      for (int i = 0; i < n; i++) r.push_back(rand_roi());
      if (acc) begin
        exp_ev++;
        expq.push_back('{last: 1'b0, data: {31'b0, 1'b1, 32'(e)}});
        nin = 0; nout = 0;
        if (n > MAXR) exp_ovf++;
        if (hits.exists(e)) begin
          nin = hits[e].size();
          for (int i = 0; i < hits[e].size(); i++)
            if (n > MAXR || in_any(hits[e][i], r)) begin
              expq.push_back('{last: 1'b0, data: {32'b0, hits[e][i]}});
              nout++;
            end
        end else exp_miss++;
        expq.push_back('{last: 1'b1, data: {32'(nout), 32'(nin)}});
        tot_out += nout;
      end else exp_rej++;
      send_roi('{last: n == 0, data: {31'b0, acc, 32'(e)}});
      for (int i = 0; i < n; i++) send_roi('{last: i == n - 1, data: {22'b0, r[i]}});
    end
    repeat (300) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    checks++;
    if (n_events != 32'(exp_ev) || n_rejected != 32'(exp_rej) || n_missing != 32'(exp_miss) ||
        n_roi_overflow != 32'(exp_ovf) || n_stored != 32'(n_pxd)) begin
      failures++;
      $display("counters ev %0d/%0d rej %0d/%0d miss %0d/%0d ovf %0d/%0d stored %0d/%0d",
               n_events, exp_ev, n_rejected, exp_rej, n_missing, exp_miss, n_roi_overflow, exp_ovf, n_stored, n_pxd);
    end
    $display("events %0d rejected %0d without data %0d overflow %0d hits out %0d",
             exp_ev, exp_rej, exp_miss, exp_ovf, tot_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
