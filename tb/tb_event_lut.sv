// tb_event_lut: self-checking test of the event look-up table.
//
// Small table (LUT_AW = 6). Checks the clearing time after reset (64
// cycles), that every stored event is found with its pointer and length one
// cycle after the request, that unknown events miss (also those sharing an
// index but differing in the high bits), and that a later event with the
// same index replaces the older entry.
module tb_event_lut;
  import onsen_pkg::*;

  localparam int LUT_AW = 6, PTR_W = MEM_AW, LEN_W = 20;

  logic clk = 0, rst_n = 0, busy;
  logic wr_en = 0, rd_en = 0, rd_done, rd_hit;
  logic [EVT_W-1:0] wr_evt = '0, rd_evt = '0;
  logic [PTR_W-1:0] wr_ptr = '0, rd_ptr;
  logic [LEN_W-1:0] wr_len = '0, rd_len;

  int checks = 0, failures = 0;

  event_lut #(.LUT_AW(LUT_AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(logic [31:0] e, logic [PTR_W-1:0] p, logic [LEN_W-1:0] l);
    @(negedge clk);
    wr_en = 1; wr_evt = e; wr_ptr = p; wr_len = l;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic lookup(logic [31:0] e, bit exp_hit, logic [PTR_W-1:0] p, logic [LEN_W-1:0] l);
    @(negedge clk);
    rd_en = 1; rd_evt = e;
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (!rd_done || rd_hit != exp_hit || (exp_hit && (rd_ptr != p || rd_len != l))) begin
      failures++;
      $display("lookup %0d: done %b hit %b ptr %h len %0d, expected hit %b ptr %h len %0d",
               e, rd_done, rd_hit, rd_ptr, rd_len, exp_hit, p, l);
    end
  endtask

  logic [PTR_W-1:0] ptrs [32];
  logic [LEN_W-1:0] lens [32];

  initial begin
    int t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 0;
    while (busy) begin @(negedge clk); t++; end
    checks++;
    if (t < 63 || t > 65) begin failures++; $display("clear took %0d cycles", t); end

    // empty table misses everywhere
    for (int i = 0; i < 64; i++) lookup(32'(i), 0, '0, '0);

    // 32 events 1000..1031
    for (int i = 0; i < 32; i++) begin
      ptrs[i] = PTR_W'($urandom);
      lens[i] = LEN_W'($urandom_range(1, 5000));
      write(32'(1000 + i), ptrs[i], lens[i]);
    end
    for (int i = 31; i >= 0; i--) lookup(32'(1000 + i), 1, ptrs[i], lens[i]);
    // same index, other high bits: miss
    lookup(32'(1000 + 64), 0, '0, '0);
    lookup(32'(1000 + (1 << 20)), 0, '0, '0);
    // lookup again still finds (entries are not freed)
    lookup(32'(1005), 1, ptrs[5], lens[5]);
    // newer event on the same slot replaces the old one
    write(32'(1000 + 128), 29'h1234, 20'd77);
    lookup(32'(1000 + 128), 1, 29'h1234, 20'd77);
    lookup(32'(1000), 0, '0, '0);
    // lookup of one event while writing another
    @(negedge clk);
    wr_en = 1; wr_evt = 32'd2000; wr_ptr = 29'h55; wr_len = 20'd9;
    rd_en = 1; rd_evt = 32'd1010;
    @(negedge clk);
    wr_en = 0; rd_en = 0;
    checks++;
    if (!rd_hit || rd_ptr != ptrs[10]) begin failures++; $display("concurrent lookup failed"); end
    lookup(32'd2000, 1, 29'h55, 20'd9);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
