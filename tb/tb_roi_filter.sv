// tb_roi_filter: self-checking test of the ROI pixel filter.
//
// Loads random ROI lists, streams random hits with random output stalls and
// compares every forwarded hit with an independent inside-rectangle model.
// Also checks one hit per clock throughput with one cycle latency, the
// empty list (nothing passes), and the overflow fallback (all hits pass once
// more than MAX_ROIS ROIs were loaded).
module tb_roi_filter;
  import onsen_pkg::*;

  localparam int MAX_ROIS = 64;

  logic   clk = 0, rst_n = 0;
  logic   clr = 0, roi_we = 0, pass_all = 0, overflow;
  roi_t   roi;
  logic [$clog2(MAX_ROIS+1)-1:0] n_rois;
  logic   in_valid = 0, in_ready, out_valid, out_ready = 1;
  pixel_t in_pix, out_pix;

  int checks = 0, failures = 0;

  roi_filter #(.MAX_ROIS(MAX_ROIS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  roi_t   ref_rois [$];
  pixel_t expq [$];
  int     n_out = 0;
  int     first_out_cycle = -1, last_out_cycle = -1, cycle = 0;

  always @(posedge clk) cycle++;

  function automatic bit model_in(pixel_t p);
    foreach (ref_rois[i]) begin
      if (p.sensor == ref_rois[i].sensor &&
          p.row >= ref_rois[i].row_lo && p.row <= ref_rois[i].row_hi &&
          p.col >= ref_rois[i].col_lo && p.col <= ref_rois[i].col_hi)
        return 1;
    end
    return 0;
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (first_out_cycle < 0) first_out_cycle = cycle;
      last_out_cycle = cycle;
      n_out++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected hit %h", out_pix);
      end else begin
        pixel_t e;
        e = expq.pop_front();
        if (e != out_pix) begin
          failures++;
          $display("hit mismatch got %h exp %h", out_pix, e);
        end
      end
    end
  end

  task automatic load(int n, bit rnd);
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    ref_rois.delete();
    for (int i = 0; i < n; i++) begin
      roi_t r;
      int a, b;
      r.sensor = rnd ? 6'($urandom_range(3)) : 6'd63;
      a = $urandom_range(63); b = $urandom_range(63);
      r.row_lo = 10'(a < b ? a : b); r.row_hi = 10'(a < b ? b : a);
      a = $urandom_range(31); b = $urandom_range(31);
      r.col_lo = 8'(a < b ? a : b); r.col_hi = 8'(a < b ? b : a);
      roi = r; roi_we = 1;
      if (i < MAX_ROIS) ref_rois.push_back(r);
      @(negedge clk);
    end
    roi_we = 0;
  endtask

  task automatic send(int n, bit all_pass, bit stall);
    for (int i = 0; i < n; i++) begin
      pixel_t p;
      p.sensor = 6'($urandom_range(3));
      p.row    = 10'($urandom_range(63));
      p.col    = 8'($urandom_range(31));
      p.adc    = 8'($urandom);
      in_pix = p; in_valid = 1;
      out_ready = stall ? ($urandom_range(99) < 70) : 1'b1;
      @(posedge clk);
      while (!in_ready) begin
        @(negedge clk);
        out_ready = stall ? ($urandom_range(99) < 70) : 1'b1;
        @(posedge clk);
      end
      if (all_pass || model_in(p)) expq.push_back(p);
      @(negedge clk);
    end
    in_valid  = 0;
    out_ready = 1;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    roi = '0; in_pix = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random ROI lists with stalls
    for (int ev = 0; ev < 20; ev++) begin
      load($urandom_range(1, 8), 1);
      send(200, 0, 1);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d hits missing", expq.size()); end
    expq.delete();

    // empty list: nothing passes
    load(0, 1);
    n_out = 0;
    send(100, 0, 0);
    checks++;
    if (n_out != 0) begin failures++; $display("empty list passed %0d hits", n_out); end

    // throughput: one ROI covering sensors 0 rows/cols fully; 1 hit per clock
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    ref_rois.delete();
    for (int s = 0; s < 4; s++) begin
      roi = '{sensor: 6'(s), row_lo: 10'd0, row_hi: 10'd1023, col_lo: 8'd0, col_hi: 8'd255};
      ref_rois.push_back(roi); roi_we = 1; @(negedge clk);
    end
    roi_we = 0;
    n_out = 0; first_out_cycle = -1;
    begin
      int start_cycle;
      start_cycle = cycle;
      send(100, 0, 0);
      checks++;
      if (n_out != 100 || last_out_cycle - first_out_cycle != 99 || first_out_cycle - start_cycle > 2) begin
        failures++;
        $display("throughput: %0d hits, span %0d cycles, first after %0d", n_out,
                 last_out_cycle - first_out_cycle + 1, first_out_cycle - start_cycle);
      end
    end

    // overflow: 65 ROIs on an unused sensor -> every hit passes
    load(MAX_ROIS + 1, 0);
    checks++;
    if (!overflow || n_rois != 7'(MAX_ROIS)) begin failures++; $display("overflow flag not set"); end
    n_out = 0;
    send(50, 1, 0);
    checks++;
    if (n_out != 50) begin failures++; $display("overflow pass-all gave %0d", n_out); end

    // exactly MAX_ROIS: no overflow, hits on the ROI sensor only
    load(MAX_ROIS, 0);
    checks++;
    if (overflow) begin failures++; $display("overflow at exactly MAX_ROIS"); end

    // pass_all input
    load(0, 1);
    pass_all = 1;
    n_out = 0;
    send(20, 1, 0);
    pass_all = 0;
    checks++;
    if (n_out != 20) begin failures++; $display("pass_all gave %0d", n_out); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
