// tb_roi_switch: self-checking test of the ROI packet switch.
//
// Two instances: the back-plane preselection (8 outputs, 4 event groups)
// and a carrier switch (4 outputs, broadcast). Packets with random event
// numbers and lengths are sent with random output back-pressure; each
// output's words are compared with the packets it should receive:
// events 1,5,... on outputs 0 and 1, 2,6,... on 2 and 3, 3,7,... on 4 and 5,
// 4,8,... on 6 and 7, and everything on every broadcast output.
module tb_roi_switch;
  import onsen_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, b_in_ready;
  word_t in_word = '0;
  logic [7:0] out_valid, out_ready;
  word_t out_word [8];
  logic [3:0] b_valid, b_ready;
  word_t b_word [4];
  logic [31:0] n_packets, b_packets;

  int checks = 0, failures = 0;

  roi_switch #(.N_OUT(8), .GROUPS(4)) dut (.clk, .rst_n, .in_valid(in_valid && b_in_ready), .in_ready,
                                           .in_word, .out_valid, .out_ready, .out_word, .n_packets);
  roi_switch #(.N_OUT(4), .GROUPS(1)) dut_b (.clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(b_in_ready),
                                             .in_word, .out_valid(b_valid), .out_ready(b_ready), .out_word(b_word),
                                             .n_packets(b_packets));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t expq [12][$];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < 12; o++) begin
        logic  v;
        word_t w;
        v = (o < 8) ? out_valid[o] && out_ready[o] : b_valid[o-8] && b_ready[o-8];
        w = (o < 8) ? out_word[o] : b_word[o-8];
        if (v) begin
          checks++;
          if (expq[o].size() == 0) begin
            failures++; $display("output %0d: unexpected word %h", o, w.data);
          end else begin
            word_t e;
            e = expq[o].pop_front();
            if (e != w) begin failures++; $display("output %0d: %h/%b expected %h/%b", o, w.data, w.last, e.data, e.last); end
          end
        end
      end
    end
  end

  always @(negedge clk) begin
    out_ready = 8'($urandom);
    b_ready   = 4'($urandom);
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 300; p++) begin
      logic [31:0] evt;
      int len, g;
      evt = $urandom;
      if (p < 8) evt = 32'(p + 1);
      len = $urandom_range(1, 6);
      g = ((evt % 4) + 3) % 4;    // event 1 -> group 0, ..., event 4 -> group 3
      for (int i = 0; i < len; i++) begin
        word_t w;
        w.data = (i == 0) ? {32'(len), evt} : {evt ^ 32'(i), 32'(p)};
        w.last = (i == len - 1);
        expq[2*g].push_back(w);
        expq[2*g+1].push_back(w);
        for (int o = 8; o < 12; o++) expq[o].push_back(w);
        in_word = w; in_valid = 1;
        @(posedge clk);
        while (!(in_ready && b_in_ready)) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    end
    repeat (50) @(negedge clk);
    for (int o = 0; o < 12; o++) begin
      checks++;
      if (expq[o].size() != 0) begin failures++; $display("output %0d: %0d words missing", o, expq[o].size()); end
    end
    checks++;
    if (n_packets != 300 || b_packets != 300) begin failures++; $display("packet counts %0d %0d", n_packets, b_packets); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
