// tb_pocket_onsen: the beam-test configuration ("Pocket ONSEN") running the
// two beam-test workloads.
//
// One merger and one selector, no event grouping (N_CARRIER = SEL_PER_CAR =
// GROUPS = 1), no DATCON input, one 64 x 480 pixel half-ladder (sensor 0).
//   1. Connection test: the HLT answers triggers for which no pixel data
//      exist; each accepted one must leave as header + empty trailer.
//   2. Noise run: every event carries uniform noise hits (about 3 %
//      occupancy). The HLT accepts every event and sends one rectangular ROI
//      chosen by event number modulo 16: eight tiles of a 2 x 4 grid
//      (columns 0-31 / 32-63, row bands of 120) numbered 0,1 / 4,5 / 8,9 /
//      12,13 from the bottom; other residues get no ROI. The output hit map
//      must contain only hits inside the tile of their event, and all of
//      them.
module tb_pocket_onsen;
  import onsen_pkg::*;

  localparam int N_EVT = 48, ROWS = 480, COLS = 64;

  logic clk = 0, rst_n = 0, busy;
  logic dc_valid = 0, dc_ready, hlt_valid = 0, hlt_ready;
  word_t dc_word = '0, hlt_word = '0;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic [0:0] pix_valid = '0, pix_ready, out_valid, out_ready;
  word_t pix_word [1], out_word [1];
  logic [0:0] s_m_valid, s_m_ready, s_m_rsp_valid;
  mem_req_t s_m_req [1];
  logic [MEM_DW-1:0] s_m_rsp_data [1];
  logic [31:0] n_accept, n_reject, n_datcon_merged;
  logic [31:0] sel_events [1], sel_rejected [1], sel_missing [1], sel_roi_overflow [1];

  int checks = 0, failures = 0;

  onsen_top #(.N_CARRIER(1), .SEL_PER_CAR(1), .GROUPS(1), .LUT_AW(10)) dut (.*);

  ddr2_model #(.LAT(5), .READY_PCT(90)) u_mmem (.clk, .rst_n, .m_valid, .m_ready, .m_req,
                                               .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));
  ddr2_model #(.LAT(5), .READY_PCT(90)) u_smem (.clk, .rst_n, .m_valid(s_m_valid[0]), .m_ready(s_m_ready[0]),
                                               .m_req(s_m_req[0]), .rsp_valid(s_m_rsp_valid[0]),
                                               .rsp_data(s_m_rsp_data[0]));

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit tile(int k, output roi_t r);
    r = '0;
    if (k % 4 > 1) return 0;
    r.sensor = '0;
    r.col_lo = 8'((k % 4) * 32);      r.col_hi = 8'((k % 4) * 32 + 31);
    r.row_lo = 10'((k / 4) * 120);    r.row_hi = 10'((k / 4) * 120 + 119);
    return 1;
  endfunction

  word_t expq [$];
  int    hitmap_in [16], hitmap_out [16], n_in = 0, n_out = 0, outside = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid[0] && out_ready[0]) begin
      word_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected %h", out_word[0].data);
      end else begin
        e = expq.pop_front();
        if (e != out_word[0]) begin
          failures++; $display("%h/%b expected %h/%b", out_word[0].data, out_word[0].last, e.data, e.last);
        end
      end
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(9) != 0);

  task automatic send_pix(word_t w);
    pix_word[0] = w; pix_valid = 1;
    @(posedge clk);
    while (!pix_ready[0]) @(posedge clk);
    @(negedge clk);
    pix_valid = 0;
  endtask

  task automatic send_hlt(word_t w);
    hlt_word = w; hlt_valid = 1;
    @(posedge clk);
    while (!hlt_ready) @(posedge clk);
    @(negedge clk);
    hlt_valid = 0;
  endtask

  initial begin
    pix_word[0] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);

    // 1. HLT packets without pixel data: passed through in output format
    for (int e = 1000; e < 1016; e++) begin
      bit acc;
      acc = (e % 3 != 0);
      if (acc) begin
        expq.push_back('{last: 1'b0, data: {31'b0, 1'b1, 32'(e)}});
        expq.push_back('{last: 1'b1, data: 64'b0});
      end
      send_hlt('{last: 1'b1, data: {31'b0, acc, 32'(e)}});
    end
    repeat (200) @(negedge clk);
    checks++;
    if (expq.size() != 0 || sel_missing[0] != 32'd11) begin
      failures++; $display("pass-through: %0d words missing, %0d without data", expq.size(), sel_missing[0]);
    end

    // 2. noise run with the event-number ROI pattern
    for (int e = 0; e < N_EVT; e++) begin
      pixel_t h [$];
      roi_t   r;
      bit     has_roi;
      int     nw, nout;
      h.delete();
      for (int i = 0; i < ROWS * COLS * 3 / 100; i++) begin
        pixel_t p;
        p.sensor = '0;
        p.row = 10'($urandom_range(ROWS - 1));
        p.col = 8'($urandom_range(COLS - 1));
        p.adc = 8'($urandom_range(1, 255));
        h.push_back(p);
      end
      nw = (h.size() + 1) / 2;
      send_pix('{last: nw == 0, data: {32'(h.size()), 32'(e)}});
      for (int i = 0; i < nw; i++)
        send_pix('{last: i == nw - 1, data: {(2 * i + 1 < h.size()) ? 32'(h[2*i+1]) : 32'h0, 32'(h[2*i])}});

      has_roi = tile(e % 16, r);
      expq.push_back('{last: 1'b0, data: {31'b0, 1'b1, 32'(e)}});
      nout = 0;
      foreach (h[i]) begin
        hitmap_in[e % 16]++;
        if (has_roi && h[i].row >= r.row_lo && h[i].row <= r.row_hi &&
            h[i].col >= r.col_lo && h[i].col <= r.col_hi) begin
          expq.push_back('{last: 1'b0, data: {32'b0, h[i]}});
          nout++;
          hitmap_out[e % 16]++;
        end
      end
      expq.push_back('{last: 1'b1, data: {32'(nout), 32'(h.size())}});
      n_in += h.size(); n_out += nout;
      send_hlt('{last: !has_roi, data: {31'b0, 1'b1, 32'(e)}});
      if (has_roi) send_hlt('{last: 1'b1, data: {22'b0, r}});
    end
    repeat (3000) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    checks++;
    if (n_out == 0 || n_out * 10 > n_in) begin failures++; $display("reduction %0d of %0d", n_out, n_in); end
    $display("noise run: %0d hits in, %0d hits out (reduction factor %0d)", n_in, n_out, (n_out != 0) ? n_in / n_out : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
