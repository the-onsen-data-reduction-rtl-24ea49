// tb_frame_reader: self-checking test of the frame reader.
//
// Preloads the DDR2 model (latency 6, random stalls) and reads back frames
// of random length and position, one after the other, with random output
// back-pressure. Checks every word, the 'last' flag and that with a ready
// output and memory one word per clock is delivered.
module tb_frame_reader;
  import onsen_pkg::*;

  localparam int PTR_W = MEM_AW, LEN_W = 20;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, mem_valid, mem_ready, rsp_valid, out_valid, out_ready = 1;
  logic [PTR_W-1:0] start_ptr = '0;
  logic [LEN_W-1:0] start_len = '0;
  mem_req_t mem_req;
  logic [MEM_DW-1:0] rsp_data;
  word_t out_word;
  int ready_pct = 60;

  int checks = 0, failures = 0;

  frame_reader #(.FIFO_DEPTH(8)) dut (.*);

  logic m_ready_fast, m_ready_slow, rsp_valid_f, rsp_valid_s;
  logic [MEM_DW-1:0] rsp_data_f, rsp_data_s;
  // two memory models share the contents: one always ready, one stalling
  ddr2_model #(.LAT(6), .READY_PCT(100)) u_fast (.clk, .rst_n, .m_valid(mem_valid && ready_pct == 100), .m_ready(m_ready_fast),
                                                 .m_req(mem_req), .rsp_valid(rsp_valid_f), .rsp_data(rsp_data_f));
  ddr2_model #(.LAT(6), .READY_PCT(60)) u_slow (.clk, .rst_n, .m_valid(mem_valid && ready_pct != 100), .m_ready(m_ready_slow),
                                                .m_req(mem_req), .rsp_valid(rsp_valid_s), .rsp_data(rsp_data_s));
  assign mem_ready = (ready_pct == 100) ? m_ready_fast : m_ready_slow;
  assign rsp_valid = rsp_valid_f || rsp_valid_s;
  assign rsp_data  = rsp_valid_f ? rsp_data_f : rsp_data_s;

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] pattern(logic [MEM_AW-1:0] a);
    return {~3'b0, ~a, 3'b0, a};
  endfunction

  task automatic read_frame(logic [PTR_W-1:0] p, int len, bit stall, output int cycles);
    int got;
    for (int i = 0; i < len; i++) begin
      u_fast.mem[MEM_AW'(p + PTR_W'(i))] = pattern(MEM_AW'(p + PTR_W'(i)));
      u_slow.mem[MEM_AW'(p + PTR_W'(i))] = pattern(MEM_AW'(p + PTR_W'(i)));
    end
    @(negedge clk);
    start = 1; start_ptr = p; start_len = LEN_W'(len);
    @(negedge clk);
    start = 0;
    got = 0; cycles = 1;
    while (got < len) begin
      out_ready = stall ? ($urandom_range(1) == 1) : 1'b1;
      @(posedge clk);
      cycles++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_word.data != pattern(MEM_AW'(p + PTR_W'(got))) || out_word.last != (got == len - 1)) begin
          failures++;
          $display("word %0d of frame at %h: %h last %b", got, p, out_word.data, out_word.last);
        end
        got++;
      end
      @(negedge clk);
      if (cycles > 100000) break;
    end
    out_ready = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (busy || out_valid) begin failures++; $display("reader not idle after frame"); end
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 40; f++)
      read_frame(PTR_W'($urandom), $urandom_range(1, 50), 1, cyc);
    // wrap around the end of the address space
    read_frame('1 - PTR_W'(3), 10, 1, cyc);
    // full speed: 200 words within latency + 200 + small overhead
    ready_pct = 100;
    read_frame(PTR_W'(1000), 200, 0, cyc);
    checks++;
    if (cyc > 200 + 12) begin failures++; $display("200 words took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
