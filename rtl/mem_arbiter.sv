// mem_arbiter: shares one RAM port between the frame writer and the frame
// reader of a node.
//
// Both clients present valid/ready requests. When both request in the same
// cycle the one that was not served last wins (round robin), so a long write
// burst cannot starve the read-back of an event and vice versa. The grant is
// combinational; a request moves when the memory port is ready. Read
// responses need no routing: only the reader issues reads. The publication
// does not describe memory arbitration; round robin is this design's choice.
module mem_arbiter
  import onsen_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // client 0: writer
  input  logic     c0_valid,
  output logic     c0_ready,
  input  mem_req_t c0_req,
  // client 1: reader
  input  logic     c1_valid,
  output logic     c1_ready,
  input  mem_req_t c1_req,
  // memory port
  output logic     m_valid,
  input  logic     m_ready,
  output mem_req_t m_req
);

  logic last_c1;   // client 1 was served last
  logic pick1;

  always_comb begin
    if (c0_valid && c1_valid) pick1 = !last_c1;
    else                      pick1 = c1_valid;
  end

  assign m_valid  = c0_valid || c1_valid;
  assign m_req    = pick1 ? c1_req : c0_req;
  assign c0_ready = m_ready && !pick1;
  assign c1_ready = m_ready && pick1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  last_c1 <= 1'b0;
    else if (m_valid && m_ready) last_c1 <= pick1;
  end

endmodule
