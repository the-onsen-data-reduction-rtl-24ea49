// tb_mem_arbiter: self-checking test of the two-client RAM arbiter.
//
// Both clients issue numbered requests at random; the memory stalls at
// random. Checks that the memory sees exactly the request of the client
// that is told ready, that each client's requests arrive complete and in
// order, and that under constant load the clients alternate.
module tb_mem_arbiter;
  import onsen_pkg::*;

  logic clk = 0, rst_n = 0;
  logic c0_valid = 0, c0_ready, c1_valid = 0, c1_ready, m_valid, m_ready = 1;
  mem_req_t c0_req, c1_req, m_req;

  int checks = 0, failures = 0;

  mem_arbiter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit h0, h1;
  int g0 = 0, g1 = 0, last = -1, alternations = 0, both = 0;
  bit full_load = 0;

  assign c0_req = '{we: 1'b1, addr: MEM_AW'(g0), wdata: 64'(g0)};
  assign c1_req = '{we: 1'b0, addr: MEM_AW'(g1 | (1 << 20)), wdata: '0};

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (c0_ready && c1_ready) begin failures++; $display("both granted"); end
      if (m_valid != (c0_valid || c1_valid)) begin failures++; $display("m_valid wrong"); end
      if (m_valid && m_ready) begin
        if (c0_ready) begin
          if (m_req != c0_req || !m_req.we) begin failures++; $display("client 0 request %0d wrong", g0); end
          g0++;
          if (full_load && last == 0) begin failures++; $display("client 0 served twice under load"); end
          last = 0;
        end else if (c1_ready) begin
          if (m_req != c1_req || m_req.we) begin failures++; $display("client 1 request %0d wrong", g1); end
          g1++;
          if (full_load && last == 1) begin failures++; $display("client 1 served twice under load"); end
          last = 1;
        end else begin
          failures++; $display("transfer without grant");
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(posedge clk);
      h0 = c0_valid && c0_ready;
      h1 = c1_valid && c1_ready;
      @(negedge clk);
      // a valid request is held until taken
      if (h0 || !c0_valid) c0_valid = ($urandom_range(99) < 60);
      if (h1 || !c1_valid) c1_valid = ($urandom_range(99) < 60);
      m_ready = ($urandom_range(99) < 70);
    end
    // constant load from both: strict alternation
    @(negedge clk);
    c0_valid = 1; c1_valid = 1; m_ready = 1;
    @(negedge clk);
    full_load = 1;
    repeat (100) @(negedge clk);
    full_load = 0;
    c0_valid = 0; c1_valid = 0;
    @(negedge clk);
    checks++;
    if (g0 < 500 || g1 < 500) begin failures++; $display("served %0d / %0d", g0, g1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
