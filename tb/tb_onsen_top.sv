// tb_onsen_top: end-to-end test of the whole ONSEN system.
//
// One merger and 32 selectors, each with its own RAM model. For events
// 1..N_EVT the eight detector sections deliver PXD subevents (random hits on
// their five half-ladders) on the link of the selector that serves the
// section and the event's group, and DATCON sends ROIs for most events.
// Then the HLT answers every event in shuffled order with a decision and
// ROIs. Every selector's output is compared with an independent model of
// the whole chain: for accepted events the hits inside the union of HLT and
// DATCON ROIs, between header and trailer, nothing for rejected events.
//
// The run must show each mechanism at least once: rejected and accepted
// events, DATCON ROIs merged, an accepted event without pixel data, ROI
// list overflow, back-pressure from Event Builder 2 and stalled RAM.
//
// Top parameters are left at their defaults unless TB_LUT_AW is overridden,
// so this is also the full-size run (the look-up tables clear 2^18 entries
// after reset).
module tb_onsen_top;
  import onsen_pkg::*;

  localparam int N_SEL = 32, N_EVT = 24, MAXR = 64;

  logic clk = 0, rst_n = 0, busy;
  logic dc_valid = 0, dc_ready, hlt_valid = 0, hlt_ready;
  word_t dc_word = '0, hlt_word = '0;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic [N_SEL-1:0] pix_valid = '0, pix_ready, out_valid, out_ready;
  word_t pix_word [N_SEL], out_word [N_SEL];
  logic [N_SEL-1:0] s_m_valid, s_m_ready, s_m_rsp_valid;
  mem_req_t s_m_req [N_SEL];
  logic [MEM_DW-1:0] s_m_rsp_data [N_SEL];
  logic [31:0] n_accept, n_reject, n_datcon_merged;
  logic [31:0] sel_events [N_SEL], sel_rejected [N_SEL], sel_missing [N_SEL], sel_roi_overflow [N_SEL];

  int checks = 0, failures = 0;

  onsen_top dut (.*);

  ddr2_model #(.LAT(5), .READY_PCT(85)) u_mmem (.clk, .rst_n, .m_valid, .m_ready, .m_req,
                                               .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));
  for (genvar s = 0; s < N_SEL; s++) begin : g_mem
    ddr2_model #(.LAT(5), .READY_PCT(85)) u_smem (.clk, .rst_n, .m_valid(s_m_valid[s]), .m_ready(s_m_ready[s]),
                                                 .m_req(s_m_req[s]), .rsp_valid(s_m_rsp_valid[s]),
                                                 .rsp_data(s_m_rsp_data[s]));
  end

  always #5 clk = ~clk;

  initial begin
    #60_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  // section 0..7 = B1..B4, F1..F4; half-ladders 5*sec .. 5*sec+4
  function automatic int group_of(int e);
    return ((e % 4) + 3) % 4;           // event 1 -> group 0 ... event 4 -> group 3
  endfunction
  function automatic int sel_of(int e, int sec);
    return (2 * group_of(e) + sec / 4) * 4 + sec % 4;
  endfunction

  function automatic pixel_t rand_pix(int sec);
    pixel_t p;
    p.sensor = 6'(5 * sec + $urandom_range(4));
    p.row    = 10'($urandom_range(767));
    p.col    = 8'($urandom_range(249));
    p.adc    = 8'($urandom_range(1, 255));
    return p;
  endfunction

  function automatic roi_t rand_roi();
    roi_t r;
    int a, b;
    r.sensor = 6'($urandom_range(39));
    a = $urandom_range(767); b = a + $urandom_range(300);
    r.row_lo = 10'(a); r.row_hi = 10'(b > 767 ? 767 : b);
    a = $urandom_range(249); b = a + $urandom_range(120);
    r.col_lo = 8'(a); r.col_hi = 8'(b > 249 ? 249 : b);
    return r;
  endfunction

  function automatic bit in_any(pixel_t p, roi_t r [$]);
    foreach (r[i])
      if (p.sensor == r[i].sensor && p.row >= r[i].row_lo && p.row <= r[i].row_hi &&
          p.col >= r[i].col_lo && p.col <= r[i].col_hi) return 1;
    return 0;
  endfunction

  pixel_t hits [int][8][$];
  bit     has_pxd [int][8];
  roi_t   dc_rois [int][$];
  word_t  linkq [N_SEL][$];
  word_t  expq [N_SEL][$];

  // mechanism counters
  int m_reject = 0, m_accept = 0, m_merged = 0, m_missing = 0, m_overflow = 0;
  int m_out_stall = 0, m_mem_stall = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < N_SEL; s++) begin
        if (out_valid[s] && !out_ready[s]) m_out_stall++;
        if (s_m_valid[s] && !s_m_ready[s]) m_mem_stall++;
        if (out_valid[s] && out_ready[s]) begin
          word_t e;
          checks++;
          if (expq[s].size() == 0) begin
            failures++; $display("selector %0d: unexpected %h", s, out_word[s].data);
          end else begin
            e = expq[s].pop_front();
            if (e != out_word[s]) begin
              failures++;
              $display("selector %0d: %h/%b expected %h/%b", s, out_word[s].data, out_word[s].last, e.data, e.last);
            end
          end
        end
      end
    end
  end

  always @(negedge clk) out_ready = $urandom | $urandom;

  task automatic drive_link(int s);
    while (linkq[s].size() > 0) begin
      pix_word[s] = linkq[s].pop_front();
      pix_valid[s] = 1;
      @(posedge clk);
      while (!pix_ready[s]) @(posedge clk);
      @(negedge clk);
      pix_valid[s] = 0;
    end
  endtask

  task automatic send_dc(word_t w);
    dc_word = w; dc_valid = 1;
    @(posedge clk);
    while (!dc_ready) @(posedge clk);
    @(negedge clk);
    dc_valid = 0;
  endtask

  task automatic send_hlt(word_t w);
    hlt_word = w; hlt_valid = 1;
    @(posedge clk);
    while (!hlt_ready) @(posedge clk);
    @(negedge clk);
    hlt_valid = 0;
  endtask

  initial begin
    int order [N_EVT];
    int t0;
    for (int s = 0; s < N_SEL; s++) pix_word[s] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = 0;
    while (busy) begin @(negedge clk); t0++; end
    $display("look-up tables cleared after %0d cycles", t0);

    // build the PXD subevents per link
    for (int e = 1; e <= N_EVT; e++) begin
      for (int sec = 0; sec < 8; sec++) begin
        int n, s, nw;
        has_pxd[e][sec] = !(e == 3 && sec == 2);   // one subevent lost
        hits[e][sec] = {};
        if (!has_pxd[e][sec]) continue;
        s = sel_of(e, sec);
        n = $urandom_range(0, 30);
        for (int i = 0; i < n; i++) hits[e][sec].push_back(rand_pix(sec));
        nw = (n + 1) / 2;
        linkq[s].push_back('{last: nw == 0, data: {32'(n), 32'(e)}});
        for (int i = 0; i < nw; i++) begin
          logic [31:0] hi;
          hi = (2 * i + 1 < n) ? hits[e][sec][2*i+1] : 32'hdead_beef;
          linkq[s].push_back('{last: i == nw - 1, data: {hi, hits[e][sec][2*i]}});
        end
      end
    end
    for (int s = 0; s < N_SEL; s++) begin
      automatic int ss = s;
      fork drive_link(ss); join_none
    end

    // DATCON ROIs, in order, for most events
    for (int e = 1; e <= N_EVT; e++) begin
      int n;
      dc_rois[e] = {};
      if (e % 5 == 0) continue;
      n = $urandom_range(0, 6);
      for (int i = 0; i < n; i++) dc_rois[e].push_back(rand_roi());
      send_dc('{last: n == 0, data: {32'(n), 32'(e)}});
      for (int i = 0; i < dc_rois[e].size(); i++) send_dc('{last: i == n - 1, data: {22'b0, dc_rois[e][i]}});
    end
    begin
      int left;
      do begin
        @(negedge clk);
        left = 0;
        for (int s = 0; s < N_SEL; s++) left += linkq[s].size() + int'(pix_valid[s]);
      end while (left != 0);
    end
    repeat (20) @(negedge clk);

    // HLT answers in shuffled order
    for (int i = 0; i < N_EVT; i++) order[i] = i + 1;
    order.shuffle();
    foreach (order[k]) begin
      int e, n;
      bit acc;
      roi_t r [$], all [$];
      r.delete(); all.delete();
      e = order[k];
      acc = (e == 3) || (e == 7) || ($urandom_range(2) != 0);
      if (e == 2) acc = 0;
      n = (e == 7) ? MAXR + 6 : $urandom_range(0, 8);
      for (int i = 0; i < n; i++) r.push_back(rand_roi());
      all = r;
      for (int i = 0; i < dc_rois[e].size(); i++) all.push_back(dc_rois[e][i]);
      if (acc) begin
        m_accept++;
        if (dc_rois[e].size() > 0) m_merged++;
        for (int sec = 0; sec < 8; sec++) begin
          int s, nout;
          s = sel_of(e, sec);
          nout = 0;
          expq[s].push_back('{last: 1'b0, data: {31'b0, 1'b1, 32'(e)}});
          if (all.size() > MAXR) m_overflow++;
          if (has_pxd[e][sec]) begin
            for (int i = 0; i < hits[e][sec].size(); i++)
              if (all.size() > MAXR || in_any(hits[e][sec][i], all)) begin
                expq[s].push_back('{last: 1'b0, data: {32'b0, hits[e][sec][i]}});
                nout++;
              end
          end else m_missing++;
          expq[s].push_back('{last: 1'b1, data: {32'(nout), 32'(has_pxd[e][sec] ? hits[e][sec].size() : 0)}});
        end
      end else m_reject++;
      send_hlt('{last: n == 0, data: {31'b0, acc, 32'(e)}});
      foreach (r[i]) send_hlt('{last: i == n - 1, data: {22'b0, r[i]}});
    end
    repeat (2000) @(negedge clk);

    for (int s = 0; s < N_SEL; s++) begin
      checks++;
      if (expq[s].size() != 0) begin failures++; $display("selector %0d: %0d words missing", s, expq[s].size()); end
    end
    checks++;
    if (n_accept != 32'(m_accept) || n_reject != 32'(m_reject) || n_datcon_merged != 32'(m_merged)) begin
      failures++;
      $display("merger counters %0d %0d %0d, expected %0d %0d %0d", n_accept, n_reject, n_datcon_merged,
               m_accept, m_reject, m_merged);
    end
    begin
      int se, sr, sm, so;
      se = 0; sr = 0; sm = 0; so = 0;
      for (int s = 0; s < N_SEL; s++) begin
        se += sel_events[s]; sr += sel_rejected[s]; sm += sel_missing[s]; so += sel_roi_overflow[s];
      end
      checks++;
      if (se != 8 * m_accept || sr != 8 * m_reject || sm != m_missing || so != m_overflow) begin
        failures++;
        $display("selector counters %0d %0d %0d %0d, expected %0d %0d %0d %0d", se, sr, sm, so,
                 8 * m_accept, 8 * m_reject, m_missing, m_overflow);
      end
    end
    $display("mechanisms: accepted %0d rejected %0d DATCON-merged %0d no-pixel-data %0d ROI-overflow %0d output-stall %0d RAM-stall %0d",
             m_accept, m_reject, m_merged, m_missing, m_overflow, m_out_stall, m_mem_stall);
    if (m_accept == 0)    begin failures++; $display("no accepted event"); end
    if (m_reject == 0)    begin failures++; $display("no rejected event"); end
    if (m_merged == 0)    begin failures++; $display("no DATCON merge"); end
    if (m_missing == 0)   begin failures++; $display("no event without pixel data"); end
    if (m_overflow == 0)  begin failures++; $display("no ROI overflow"); end
    if (m_out_stall == 0) begin failures++; $display("no output stall"); end
    if (m_mem_stall == 0) begin failures++; $display("no RAM stall"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
