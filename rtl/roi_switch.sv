// roi_switch: distributes ROI packets by event number (switch FPGA).
//
// Each output serves one event group: output i takes the packets whose event
// number satisfies  event mod GROUPS == ((i / (N_OUT/GROUPS)) + 1) mod GROUPS.
// With N_OUT = 8 and GROUPS = 4 this is the preselection on the back plane:
// outputs 0,1 (carrier boards of the B and F sections) get events 1, 5, ...,
// outputs 2,3 get events 2, 6, ..., outputs 4,5 get 3, 7, ..., and outputs
// 6,7 get 4, 8, .... With GROUPS = 1 every output gets every packet, which is
// what the switch on a selector carrier board does for its four cards.
//
// The event number is read from bits [31:0] of a packet's first word; the
// selection is kept until the word with 'last'. Every output has a one-word
// register; a word is taken when all selected outputs can take it, so the
// copies of one packet advance in lock-step. A packet no output selects is
// consumed and dropped. Throughput is one word per cycle.
//
// The event-group preselection and the per-carrier distribution follow the
// publication; the lock-step copying and the output registers are this
// design's choice.
module roi_switch
  import onsen_pkg::*;
#(
  parameter int N_OUT  = 8,
  parameter int GROUPS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  word_t            in_word,
  output logic [N_OUT-1:0] out_valid,
  input  logic [N_OUT-1:0] out_ready,
  output word_t            out_word [N_OUT],
  output logic [31:0]      n_packets
);

  localparam int PER_GROUP = N_OUT / GROUPS;

  logic             sop;        // next input word starts a packet
  logic [N_OUT-1:0] mask_q, mask;

  function automatic logic [N_OUT-1:0] group_mask(logic [EVT_W-1:0] evt);
    logic [N_OUT-1:0] m;
    for (int i = 0; i < N_OUT; i++)
      m[i] = (evt % EVT_W'(GROUPS)) == EVT_W'(((i / PER_GROUP) + 1) % GROUPS);
    return m;
  endfunction

  assign mask     = sop ? group_mask(in_word.data[EVT_W-1:0]) : mask_q;
  assign in_ready = &(~mask | ~out_valid | out_ready);

  logic take;
  assign take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sop       <= 1'b1;
      mask_q    <= '0;
      out_valid <= '0;
      n_packets <= '0;
    end else begin
      for (int i = 0; i < N_OUT; i++)
        if (out_ready[i]) out_valid[i] <= 1'b0;
      if (take) begin
        sop    <= in_word.last;
        mask_q <= mask;
        for (int i = 0; i < N_OUT; i++)
          if (mask[i]) out_valid[i] <= 1'b1;
        if (in_word.last) n_packets <= n_packets + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take)
      for (int i = 0; i < N_OUT; i++)
        if (mask[i]) out_word[i] <= in_word;
  end

  // Each offered output word stays unchanged until it is taken.
  for (genvar i = 0; i < N_OUT; i++) begin : g_chk
    a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid[i] && !out_ready[i] |=> out_valid[i] && $stable(out_word[i]));
  end

endmodule
