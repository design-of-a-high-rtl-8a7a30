// leaf_node_searcher: linear search of one leaf node.
//
// The traverser hands over a packet header, its packet ID and the word
// address of a leaf with `start`. The searcher then reads the leaf's words
// one per engine cycle, starting at that address. Each 320-bit word holds
// two rules. Two rule_comparator blocks check them in the cycle the data
// arrives. The lower slot has the higher priority: rules are stored in
// priority order. The search ends with `done` at the first matching rule
// (match = 1, rule_id). It also ends, with match = 0, at a rule whose
// last-in-leaf flag is set. A slot-1 rule that follows a last-flagged
// slot-0 rule is ignored.
//
// Timing: all state moves only when `ce` (this engine's phase) is high. A
// read issued in engine cycle n returns its data in engine cycle n+1. A
// leaf of r rules therefore takes ceil(r/2) reads, and `done` comes
// ceil(r/2) engine cycles after `start`. The searcher's reads are always
// granted; it has priority over the traverser. `idle` is the "Finish"
// signal that tells the traverser it can hand over the next leaf.
//
// The paper gives the two comparators, the last-rule flag and the
// stop-at-first-match rule. The slot priority and the cycle timing are this
// design's choices.
module leaf_node_searcher
  import pc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ce,
  // from the tree traverser
  input  logic    start,
  input  addr_t   leaf_addr,
  input  hdr_t    hdr,
  input  pkt_id_t pkt_id,
  output logic    idle,
  // memory
  output logic    mem_req,
  output addr_t   mem_addr,
  input  word_t   mem_rdata,
  // result, valid while done is high in a ce cycle
  output logic    done,
  output logic    match,
  output rule_id_t rule_id,
  output pkt_id_t pkt_id_o
);

  typedef enum logic {S_IDLE, S_WAIT} state_e;
  state_e  state;
  addr_t   cur;
  hdr_t    hdr_q;
  pkt_id_t id_q;

  rule_t r0, r1;
  logic  hit0, hit1;

  assign r0 = word_rule(mem_rdata, 0);
  assign r1 = word_rule(mem_rdata, 1);

  rule_comparator u_cmp0 (.hdr(hdr_q), .rule(r0), .hit(hit0));
  rule_comparator u_cmp1 (.hdr(hdr_q), .rule(r1), .hit(hit1));

  logic found0, found1, end_of_leaf;
  assign found0      = hit0;
  assign found1      = hit1 && !r0.last;
  assign end_of_leaf = r0.last || r1.last;

  assign idle     = (state == S_IDLE);
  assign pkt_id_o = id_q;

  always_comb begin
    mem_req  = 1'b0;
    mem_addr = cur;
    done     = 1'b0;
    match    = 1'b0;
    rule_id  = '0;
    if (ce) begin
      if (state == S_IDLE) begin
        if (start) begin
          mem_req  = 1'b1;
          mem_addr = leaf_addr;
        end
      end else begin
        if (found0) begin
          done = 1'b1; match = 1'b1; rule_id = r0.rule_id;
        end else if (found1) begin
          done = 1'b1; match = 1'b1; rule_id = r1.rule_id;
        end else if (end_of_leaf) begin
          done = 1'b1;
        end else begin
          mem_req  = 1'b1;
          mem_addr = cur + addr_t'(1);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      hdr_q <= '0;
      id_q  <= '0;
    end else if (ce) begin
      if (state == S_IDLE) begin
        if (start) begin
          state <= S_WAIT;
          cur   <= leaf_addr;
          hdr_q <= hdr;
          id_q  <= pkt_id;
        end
      end else if (done) begin
        state <= S_IDLE;
      end else begin
        cur <= cur + addr_t'(1);
      end
    end
  end

  // A new leaf is only handed over while the searcher is idle.
  assert property (@(posedge clk) disable iff (!rst_n) (ce && start) |-> idle);

endmodule
