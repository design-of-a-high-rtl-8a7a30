// result_sorter: returns classification results in packet order.
//
// Engines finish packets out of order, because leaves differ in length and
// trees in depth. Every result carries the 4-bit packet ID that the header
// buffer gave its packet. The sorter keeps a chain of SLOTS registers:
// slot[i] holds the result of packet expected+i, where `expected` is the
// next ID due at the output. An arriving result is written into the slot
// its ID selects. If slot 0 is then full (the result just arrived, or it
// was stored), it goes to the output register, `expected` advances, and
// every stored result moves one slot toward the output. So a result that is
// due passes straight through, and the others wait. A result is output
// whether it is a match (with its rule ID) or a no-match.
//
// Timing: at most one result in and one out per clock, with one clock from
// input to output. The output cannot be stalled. At most SLOTS packets may
// be in flight, and an assertion checks that no slot is written twice. The
// paper gives the 16-register chain and the store-or-output, shift-on-output
// behaviour. The single-result input and the exact slot indexing are this
// design's choices.
module result_sorter
  import pc_pkg::*;
#(
  parameter int unsigned SLOTS = 16
)(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     in_match,
  input  rule_id_t in_rule_id,
  input  pkt_id_t  in_pkt_id,
  output logic     out_valid,
  output logic     out_match,
  output rule_id_t out_rule_id,
  output pkt_id_t  out_pkt_id,
  output logic     stored        // an arriving result had to wait
);

  typedef struct packed {
    logic     valid;
    logic     match;
    rule_id_t rule_id;
  } slot_t;

  slot_t   slot [SLOTS];
  slot_t   nxt  [SLOTS];
  pkt_id_t expected;
  pkt_id_t dist_id;

  assign dist_id   = in_pkt_id - expected;
  assign stored = in_valid && (dist_id != '0);

  always_comb begin
    for (int i = 0; i < SLOTS; i++) nxt[i] = slot[i];
    if (in_valid) nxt[dist_id] = '{valid: 1'b1, match: in_match, rule_id: in_rule_id};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLOTS; i++) slot[i] <= '0;
      expected    <= '0;
      out_valid   <= 1'b0;
      out_match   <= 1'b0;
      out_rule_id <= '0;
      out_pkt_id  <= '0;
    end else begin
      out_valid <= nxt[0].valid;
      if (nxt[0].valid) begin
        out_match   <= nxt[0].match;
        out_rule_id <= nxt[0].rule_id;
        out_pkt_id  <= expected;
        expected    <= expected + pkt_id_t'(1);
        for (int i = 0; i < SLOTS - 1; i++) slot[i] <= nxt[i+1];
        slot[SLOTS-1] <= '0;
      end else begin
        for (int i = 0; i < SLOTS; i++) slot[i] <= nxt[i];
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !slot[dist_id].valid);
  initial assert (SLOTS == 2**PKT_ID_W);

endmodule
