// tb_frame_writer: self-checking test of the frame writer.
//
// Sends frames of random length (1 to 40 words) with random gaps while the
// memory port stalls at random, then checks that every word sits at the
// expected consecutive ring-buffer address and that one look-up table entry
// {event, start, length} was written per frame. A small PTR_W of 8 makes the
// ring buffer wrap during the test. Also checks that nothing is accepted
// while the table is busy.
module tb_frame_writer;
  import onsen_pkg::*;

  localparam int PTR_W = 8, LEN_W = 20;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, mem_valid, mem_ready = 0, lut_busy = 1, lut_wr;
  word_t in_word = '0;
  mem_req_t mem_req;
  logic [EVT_W-1:0] lut_evt;
  logic [PTR_W-1:0] lut_ptr;
  logic [LEN_W-1:0] lut_len;
  logic [31:0] frames;

  int checks = 0, failures = 0;

  frame_writer #(.PTR_W(PTR_W), .LEN_W(LEN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] mem [256];
  typedef struct { logic [31:0] evt; int ptr; int len; } ent_t;
  ent_t exp_ent [$];
  int   n_lut = 0;

  always @(posedge clk) begin
    mem_ready <= ($urandom_range(99) < 70);
    if (rst_n && mem_valid && mem_ready) begin
      if (!mem_req.we) begin failures++; $display("read request from writer"); end
      mem[mem_req.addr[7:0]] = mem_req.wdata;
    end
    if (rst_n && lut_wr) begin
      ent_t e;
      checks++;
      if (exp_ent.size() == 0) begin
        failures++; $display("unexpected lut write");
      end else begin
        e = exp_ent.pop_front();
        if (lut_evt != e.evt || lut_ptr != PTR_W'(e.ptr) || lut_len != LEN_W'(e.len)) begin
          failures++;
          $display("lut write evt %0d ptr %0d len %0d, expected %0d %0d %0d",
                   lut_evt, lut_ptr, lut_len, e.evt, e.ptr, e.len);
        end
        // frame contents in memory
        for (int i = 0; i < e.len; i++) begin
          logic [63:0] expw;
          expw = (i == 0) ? {32'(e.len - 1), e.evt} : {e.evt, 32'(i)};
          checks++;
          if (mem[8'(e.ptr + i)] != expw) begin
            failures++;
            $display("frame %0d word %0d: %h, expected %h", e.evt, i, mem[8'(e.ptr + i)], expw);
          end
        end
      end
      n_lut++;
    end
  end

  task automatic send_word(logic [63:0] d, logic l);
    in_word.data = d; in_word.last = l; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    if ($urandom_range(3) == 0) @(negedge clk);
  endtask

  initial begin
    int wp;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // table busy: offered word must wait
    in_word.data = 64'd5; in_word.last = 1; in_valid = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (in_ready || frames != 0) begin failures++; $display("accepted while table busy"); end
    in_valid = 0;
    lut_busy = 0;
    wp = 0;
    for (int f = 0; f < 30; f++) begin
      int len;
      logic [31:0] evt;
      len = $urandom_range(1, 40);
      evt = 32'(100 + 3 * f);
      exp_ent.push_back('{evt: evt, ptr: wp % 256, len: len});
      for (int i = 0; i < len; i++)
        send_word((i == 0) ? {32'(len - 1), evt} : {evt, 32'(i)}, i == len - 1);
      wp += len;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (n_lut != 30 || frames != 30) begin failures++; $display("%0d lut writes, %0d frames", n_lut, frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
