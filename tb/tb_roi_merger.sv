// tb_roi_merger: self-checking test of the ROI merger.
//
// The merger works here with a real look-up table, frame reader and RAM
// model; the DATCON frames are placed in RAM and registered in the table
// directly by the testbench (no frame writer).
// DATCON ROI frames for events 1..N are stored first (about one event in
// five has none); then the HLT answers every event in a shuffled order with
// a random decision (about one in three accepted) and 0 to 4 ROIs. Each
// merged packet is compared with an independent model: header {accept,
// event}; for an accepted event the HLT ROIs followed by the event's DATCON
// ROIs; for a rejected event the header alone. RAM has latency 5 and random
// stalls, the output random back-pressure. The statistics counters are
// checked at the end.
module tb_roi_merger;
  import onsen_pkg::*;

  localparam int N_EVT = 80;

  logic clk = 0, rst_n = 0, busy;
  logic hlt_valid = 0, hlt_ready, out_valid, out_ready = 1;
  word_t hlt_word = '0, out_word;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic [31:0] n_datcon_stored, n_accept, n_reject, n_datcon_merged;

  int checks = 0, failures = 0;

  logic             lut_busy, lut_wr = 0, lut_rd_en, lut_rd_done, lut_rd_hit;
  logic [EVT_W-1:0] lut_wr_evt = '0, lut_rd_evt;
  logic [MEM_AW-1:0] lut_wr_ptr = '0, lut_rd_ptr, rdr_ptr;
  logic [19:0]      lut_wr_len = '0, lut_rd_len, rdr_len;
  logic             rdr_start, rdr_busy, rdr_valid, rdr_ready;
  word_t            rdr_word;
  int               wp = 0;

  assign busy = lut_busy;
  assign n_datcon_stored = 32'(n_dc);

  roi_merger dut (
    .clk, .rst_n, .hlt_valid, .hlt_ready, .hlt_word,
    .lut_busy, .lut_rd_en, .lut_rd_evt, .lut_rd_done, .lut_rd_hit, .lut_rd_ptr, .lut_rd_len,
    .rdr_start, .rdr_ptr, .rdr_len, .rdr_valid, .rdr_ready, .rdr_word,
    .out_valid, .out_ready, .out_word, .n_accept, .n_reject, .n_datcon_merged
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
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rand_roi();
    return {22'b0, 42'({$urandom, $urandom})};
  endfunction

  logic [63:0] dc_rois [int][$];
  word_t       expq [$];
  int          exp_acc = 0, exp_rej = 0, exp_merged = 0, n_dc = 0;

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

  // place one DATCON frame in RAM and register it in the table
  task automatic store_dc(int e, logic [63:0] r [$]);
    u_mem.mem[MEM_AW'(wp)] = {32'(r.size()), 32'(e)};
    foreach (r[i]) u_mem.mem[MEM_AW'(wp + 1 + i)] = r[i];
    @(negedge clk);
    lut_wr = 1; lut_wr_evt = 32'(e); lut_wr_ptr = MEM_AW'(wp); lut_wr_len = 20'(r.size() + 1);
    @(negedge clk);
    lut_wr = 0;
    wp += r.size() + 1;
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
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);

    // DATCON ROI frames, in event order
    for (int e = 1; e <= N_EVT; e++) begin
      int n;
      if ($urandom_range(4) == 0) continue;
      n = $urandom_range(0, 5);
      for (int i = 0; i < n; i++) dc_rois[e].push_back(rand_roi());
      if (n == 0) dc_rois[e] = {};
      store_dc(e, dc_rois[e]);
      n_dc++;
    end

    // HLT answers in shuffled order
    for (int i = 0; i < N_EVT; i++) order[i] = i + 1;
    order.shuffle();
    foreach (order[k]) begin
      int e, n;
      bit acc;
      logic [63:0] hr [$];
      hr.delete();
      e = order[k];
      acc = ($urandom_range(2) == 0) || (k < 10);
      n = $urandom_range(0, 4);
      for (int i = 0; i < n; i++) hr.push_back(rand_roi());
      // expected merged packet
      begin
        logic [63:0] all [$];
        all = hr;
        if (acc && dc_rois.exists(e)) begin
          for (int j = 0; j < dc_rois[e].size(); j++) all.push_back(dc_rois[e][j]);
          if (dc_rois[e].size() > 0) exp_merged++;
        end
        if (!acc) all = {};
        expq.push_back('{last: all.size() == 0, data: {31'b0, acc, 32'(e)}});
        foreach (all[j]) expq.push_back('{last: j == all.size() - 1, data: all[j]});
        if (acc) exp_acc++; else exp_rej++;
      end
      send_hlt('{last: n == 0, data: {31'b0, acc, 32'(e)}});
      for (int i = 0; i < n; i++) send_hlt('{last: i == n - 1, data: hr[i]});
    end
    repeat (200) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    checks++;
    if (n_accept != 32'(exp_acc) || n_reject != 32'(exp_rej) || n_datcon_merged != 32'(exp_merged) ||
        n_datcon_stored != 32'(n_dc)) begin
      failures++;
      $display("counters acc %0d/%0d rej %0d/%0d merged %0d/%0d stored %0d/%0d", n_accept, exp_acc,
               n_reject, exp_rej, n_datcon_merged, exp_merged, n_datcon_stored, n_dc);
    end
    $display("accepted %0d rejected %0d with DATCON ROIs %0d", exp_acc, exp_rej, exp_merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
