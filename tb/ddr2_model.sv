// ddr2_model: behavioural model of a card's DDR2 RAM behind its controller,
// for simulation only (not synthesizable: sparse associative array).
//
// Accepts valid/ready requests (ready is random when READY_PCT < 100),
// performs writes at once and returns the data of each read exactly LAT
// cycles after it was accepted, in order. Locations never written read as 0.
// Testbenches may preload or inspect 'mem' hierarchically.
module ddr2_model
  import onsen_pkg::*;
#(
  parameter int LAT       = 4,
  parameter int READY_PCT = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              m_valid,
  output logic              m_ready,
  input  mem_req_t          m_req,
  output logic              rsp_valid,
  output logic [MEM_DW-1:0] rsp_data
);
  logic [MEM_DW-1:0] mem [logic [MEM_AW-1:0]];
  logic              pv [LAT];
  logic [MEM_DW-1:0] pd [LAT];
  int unsigned       n_writes, n_reads;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_ready <= 1'b0;
    else        m_ready <= ($urandom_range(99) < READY_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        pv[i] <= 1'b0;
        pd[i] <= '0;
      end
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      pv[0] <= m_valid && m_ready && !m_req.we;
      pd[0] <= (mem.exists(m_req.addr)) ? mem[m_req.addr] : '0;
    end
  end

  // the sparse array is updated with a blocking write in a plain process
  initial begin
    n_writes = 0;
    n_reads  = 0;
    forever begin
      @(posedge clk);
      if (rst_n && m_valid && m_ready) begin
        if (m_req.we) begin
          mem[m_req.addr] = m_req.wdata;
          n_writes++;
        end else begin
          n_reads++;
        end
      end
    end
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
endmodule
