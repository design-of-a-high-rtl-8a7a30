// classification_engine: one packet classification engine.
//
// The engine is a tree traverser and a leaf node searcher that work on two
// packets at once. The searcher scans the leaf of packet n while the
// traverser already walks the tree for packet n+1. They share one memory
// access per engine cycle. The searcher is older in the pipeline and wins
// that slot; the traverser is told through its grant. The engine reports
// "no match" when either the traverser reaches an empty child or the
// searcher reaches the end of a leaf without a hit (an OR of the two).
// "Match" with a rule ID comes from the searcher.
//
// Interface and timing: every register moves only when `ce` is high, once
// every NUM_ENG clocks in the full design. A read issued in one ce cycle
// must be answered on mem_rdata by the next ce cycle. The result outputs are
// registered in the ce cycle that finishes a packet. They stay valid until
// the next ce cycle; res_valid marks them new. `ready` high in a ce cycle
// means `start` is accepted.
//
// The two blocks, the OR and the result signals follow the paper's engine
// diagram. The slot arbitration and the registered outputs are this
// design's choices.
module classification_engine
  import pc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ce,
  input  logic     root_we,
  input  node_t    root_wdata,
  input  logic     start,
  input  hdr_t     hdr,
  input  pkt_id_t  pkt_id,
  output logic     ready,
  output logic     mem_req,
  output addr_t    mem_addr,
  input  word_t    mem_rdata,
  output logic     res_valid,
  output logic     res_match,
  output logic     res_nomatch,
  output rule_id_t res_rule_id,
  output pkt_id_t  res_pkt_id
);

  logic    tt_req, lns_req, lns_start, lns_idle, lns_done, lns_match;
  logic    empty_child;
  addr_t   tt_addr, lns_mem_addr, lns_leaf;
  hdr_t    lns_hdr;
  pkt_id_t lns_id_in, lns_id_out, empty_id;
  rule_id_t lns_rule;

  tree_traverser u_tt (
    .clk, .rst_n, .ce,
    .root_we, .root_wdata,
    .start, .hdr, .pkt_id, .ready,
    .mem_req(tt_req), .mem_addr(tt_addr), .mem_gnt(!lns_req), .mem_rdata,
    .lns_start, .lns_addr(lns_leaf), .lns_hdr, .lns_pkt_id(lns_id_in),
    .lns_idle, .result_busy(lns_done),
    .empty_child, .empty_pkt_id(empty_id)
  );

  leaf_node_searcher u_lns (
    .clk, .rst_n, .ce,
    .start(lns_start), .leaf_addr(lns_leaf), .hdr(lns_hdr), .pkt_id(lns_id_in),
    .idle(lns_idle),
    .mem_req(lns_req), .mem_addr(lns_mem_addr), .mem_rdata,
    .done(lns_done), .match(lns_match), .rule_id(lns_rule), .pkt_id_o(lns_id_out)
  );

  assign mem_req  = lns_req | tt_req;
  assign mem_addr = lns_req ? lns_mem_addr : tt_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid   <= 1'b0;
      res_match   <= 1'b0;
      res_nomatch <= 1'b0;
      res_rule_id <= '0;
      res_pkt_id  <= '0;
    end else if (ce) begin
      res_valid   <= lns_done | empty_child;
      res_match   <= lns_done & lns_match;
      res_nomatch <= (lns_done & !lns_match) | empty_child;
      res_rule_id <= lns_done ? lns_rule : '0;
      res_pkt_id  <= lns_done ? lns_id_out : empty_id;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ce |-> !(lns_done && empty_child));

endmodule
