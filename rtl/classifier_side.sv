// classifier_side: one half of the accelerator, served by one RAM data port.
//
// The side holds a packet header buffer, NUM_ENG classification engines, a
// memory interface, a result multiplexer and a result sorter. The shared
// phase counter gives engine k its clock enable in phase k. In that phase,
// and if engine k's traverser is ready, the header at the head of the
// buffer goes to engine k. The result multiplexer likewise forwards engine
// k's registered result in phase k. It thus takes each result exactly once,
// and the sorter sees at most one result per clock.
//
// A long leaf search in one engine can let the others run far ahead. The
// sorter's 16 slots set a limit on that: a packet is dispatched only while
// fewer than SORT_SLOTS packets of this side are in flight, counted from
// dispatch to sorted output. Without it a late result could find its slot
// taken.
//
// Timing: a header is dispatched at most once per clock (once per engine
// phase). Results come out of the sorter in packet order, one clock after
// the multiplexer delivers them, or later if an earlier packet is still
// being classified. The paper gives the buffer, the four engines, the
// multiplexed results and the sorter. The dispatch rule and the in-flight
// limit are this design's choices.
module classifier_side
  import pc_pkg::*;
#(
  parameter int unsigned NUM_ENG    = 4,
  parameter int unsigned BUF_DEPTH  = 16,
  parameter int unsigned SORT_SLOTS = 16,
  localparam int unsigned PH_W      = (NUM_ENG > 1) ? $clog2(NUM_ENG) : 1
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PH_W-1:0] phase,
  input  logic            root_we,
  input  node_t           root_wdata,
  // headers in
  input  logic            in_valid,
  output logic            in_ready,
  input  hdr_t            in_hdr,
  // RAM data port
  output logic            ram_en,
  output addr_t           ram_addr,
  input  word_t           ram_rdata,
  // results out, in packet order
  output logic            out_valid,
  output logic            out_match,
  output rule_id_t        out_rule_id,
  output pkt_id_t         out_pkt_id,
  output logic            sort_stored
);

  logic    buf_valid, buf_pop;
  hdr_t    buf_hdr;
  pkt_id_t buf_id;

  logic [NUM_ENG-1:0] ce, start, ready, mreq;
  addr_t   maddr [NUM_ENG];
  word_t   mdata [NUM_ENG];
  logic    [NUM_ENG-1:0] rv, rm, rn;
  rule_id_t rr [NUM_ENG];
  pkt_id_t  rp [NUM_ENG];

  localparam int unsigned FW = $clog2(SORT_SLOTS + 1);
  logic [FW-1:0] inflight;
  logic          room;

  packet_header_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_hdr,
    .out_valid(buf_valid), .out_pop(buf_pop), .out_hdr(buf_hdr), .out_pkt_id(buf_id)
  );

  assign room = (inflight < FW'(SORT_SLOTS));

  for (genvar k = 0; k < NUM_ENG; k++) begin : g_eng
    assign ce[k]    = (phase == PH_W'(k));
    assign start[k] = ce[k] && ready[k] && buf_valid && room;

    classification_engine u_eng (
      .clk, .rst_n, .ce(ce[k]),
      .root_we, .root_wdata,
      .start(start[k]), .hdr(buf_hdr), .pkt_id(buf_id), .ready(ready[k]),
      .mem_req(mreq[k]), .mem_addr(maddr[k]), .mem_rdata(mdata[k]),
      .res_valid(rv[k]), .res_match(rm[k]), .res_nomatch(rn[k]),
      .res_rule_id(rr[k]), .res_pkt_id(rp[k])
    );
  end

  assign buf_pop = |start;

  memory_interface #(.NUM_ENG(NUM_ENG)) u_mif (
    .clk, .rst_n, .phase,
    .eng_req(mreq), .eng_addr(maddr), .eng_rdata(mdata),
    .ram_en, .ram_addr, .ram_rdata
  );

  // Result multiplexer: engine k's result is taken in phase k.
  logic     mx_valid, mx_match;
  rule_id_t mx_rule;
  pkt_id_t  mx_id;
  always_comb begin
    mx_valid = rv[phase];
    mx_match = rm[phase];
    mx_rule  = rr[phase];
    mx_id    = rp[phase];
  end

  result_sorter #(.SLOTS(SORT_SLOTS)) u_sort (
    .clk, .rst_n,
    .in_valid(mx_valid), .in_match(mx_match), .in_rule_id(mx_rule), .in_pkt_id(mx_id),
    .out_valid, .out_match, .out_rule_id, .out_pkt_id, .stored(sort_stored)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + FW'(buf_pop) - FW'(out_valid);
  end

  // match and no-match are never reported together
  for (genvar k = 0; k < NUM_ENG; k++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) rv[k] |-> (rm[k] ^ rn[k]));
  end

endmodule
