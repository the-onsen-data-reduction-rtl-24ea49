// tb_selector_node: self-checking test of a selector node.
//
// PXD subevents (0 to 40 hits, packed two per word, the unused half of an
// odd last word filled with junk) are stored for events 1, 5, 9, ...; about
// one event in seven has none. ROI packets then arrive in shuffled order
// with random decisions and 0 to 6 ROIs, a few with more than MAX_ROIS = 8.
// The output is compared with an independent model: nothing for a rejected
// event; otherwise header, every stored hit inside an ROI (every hit on ROI
// overflow) in stored order, and trailer {hits out, hits in}; header and a
// zero trailer for an accepted event without data. RAM latency 5 with
// random stalls, random back-pressure at the output.
module tb_selector_node;
  import onsen_pkg::*;

  localparam int N_EVT = 60, MAXR = 8;

  logic clk = 0, rst_n = 0, busy;
  logic pix_valid = 0, pix_ready, roi_valid = 0, roi_ready, out_valid, out_ready = 1;
  word_t pix_word = '0, roi_word = '0, out_word;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic [31:0] n_stored, n_events, n_rejected, n_missing, n_roi_overflow;

  int checks = 0, failures = 0;

  selector_node #(.LUT_AW(8), .MAX_ROIS(MAXR)) dut (.*);
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

  task automatic send_pix(word_t w);
    pix_word = w; pix_valid = 1;
    @(posedge clk);
    while (!pix_ready) @(posedge clk);
    @(negedge clk);
    pix_valid = 0;
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
    int nw;
    nw = (h.size() + 1) / 2;
    send_pix('{last: nw == 0, data: {32'(h.size()), 32'(e)}});
    for (int i = 0; i < nw; i++) begin
      logic [31:0] hi;
      hi = (2 * i + 1 < h.size()) ? h[2*i+1] : $urandom;
      send_pix('{last: i == nw - 1, data: {hi, h[2*i]}});
    end
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
