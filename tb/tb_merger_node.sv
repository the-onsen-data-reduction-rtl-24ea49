// tb_merger_node: self-checking test of the merger node.
//
// DATCON ROI frames for events 1..N are stored first (about one event in
// five has none); then the HLT answers every event in a shuffled order with
// a random decision (about one in three accepted) and 0 to 4 ROIs. Each
// merged packet is compared with an independent model: header {accept,
// event}; for an accepted event the HLT ROIs followed by the event's DATCON
// ROIs; for a rejected event the header alone. RAM has latency 5 and random
// stalls, the output random back-pressure. The statistics counters are
// checked at the end.
module tb_merger_node;
  import onsen_pkg::*;

  localparam int N_EVT = 80;

  logic clk = 0, rst_n = 0, busy;
  logic dc_valid = 0, dc_ready, hlt_valid = 0, hlt_ready, out_valid, out_ready = 1;
  word_t dc_word = '0, hlt_word = '0, out_word;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic [31:0] n_datcon_stored, n_accept, n_reject, n_datcon_merged;

  int checks = 0, failures = 0;

  merger_node #(.LUT_AW(8)) dut (.*);
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
      send_dc('{last: n == 0, data: {32'(n), 32'(e)}});
      for (int i = 0; i < n; i++) send_dc('{last: i == n - 1, data: dc_rois[e][i]});
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
