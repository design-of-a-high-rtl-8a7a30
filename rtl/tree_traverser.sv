// tree_traverser: walks the decision tree for one packet at a time.
//
// The root node lives in registers, loaded with root_we. This saves one
// memory read per packet, and it lets the traverser start a packet from its
// first cycle. A packet is accepted with `start` while `ready` is high, in a
// ce cycle. In that same cycle the root's cut bits give the child index,
// and the read of the child pointer word (child_base + index/16) is issued.
// Each pointer word that comes back gives one of three kinds:
//   * empty - the packet matches nothing. It is reported on `empty_child`
//     (the "Empty child" input of the engine's no-match OR).
//   * internal node - the node word is read next. Its cut bits select the
//     next pointer word, and so on.
//   * leaf - the leaf's address, the header and the packet ID go to the leaf
//     node searcher (lns_start). The traverser waits first if the searcher
//     is still busy with the previous packet.
// A header that misses a node's pre-cut bits lies outside the compacted
// region. Its child is empty and no pointer is read.
//
// Timing: state moves only in ce cycles. A read issued in engine cycle n
// returns in cycle n+1. The searcher has priority for the engine's single
// memory slot, so mem_gnt can be low; the traverser then retries in the
// next ce cycle. An empty-child report waits a cycle if the searcher
// reports a result in the same cycle (`result_busy`), so the engine never
// gives two results at once. With a root plus leaves of at most two rules,
// this gives one packet every two engine cycles, the rate the paper states.
//
// From the paper: the root node in registers, the walk until an empty node
// or a leaf, and overlapped operation with the searcher. This design's own
// choices: the node and pointer formats (pc_pkg), the handshakes, and the
// arbitration.
module tree_traverser
  import pc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ce,
  // root node register load
  input  logic    root_we,
  input  node_t   root_wdata,
  // packet in
  input  logic    start,
  input  hdr_t    hdr,
  input  pkt_id_t pkt_id,
  output logic    ready,
  // memory (one slot per engine cycle, shared with the searcher)
  output logic    mem_req,
  output addr_t   mem_addr,
  input  logic    mem_gnt,
  input  word_t   mem_rdata,
  // to / from the leaf node searcher
  output logic    lns_start,
  output addr_t   lns_addr,
  output hdr_t    lns_hdr,
  output pkt_id_t lns_pkt_id,
  input  logic    lns_idle,
  input  logic    result_busy,
  // empty child: no matching rule
  output logic    empty_child,
  output pkt_id_t empty_pkt_id
);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_LEAF, S_EMPTY} state_e;

  state_e  state, state_n;
  node_t   root;
  hdr_t    hdr_q;
  pkt_id_t id_q;
  addr_t   cur, cur_n;          // word being / to be read
  logic    rd_node, rd_node_n;  // the word read is a node (else pointers)
  logic [SLOT_W-1:0] slot, slot_n;
  logic    capture;

  // Index at the root for the incoming header, and at a node just read.
  idx_t  root_idx, node_idx;
  logic  root_ok, node_ok;
  node_t node_rd;
  ptr_t  ptr_rd;

  always_comb begin
    root_idx = node_index(hdr, root, root_ok);
    node_rd  = node_t'(mem_rdata[NODE_W-1:0]);
    node_idx = node_index(hdr_q, node_rd, node_ok);
    ptr_rd   = word_ptr(mem_rdata, slot);
  end

  assign ready        = (state == S_IDLE);
  assign lns_addr     = cur_n;
  assign lns_hdr      = hdr_q;
  assign lns_pkt_id   = id_q;
  assign empty_pkt_id = id_q;

  always_comb begin
    state_n     = state;
    cur_n       = cur;
    rd_node_n   = rd_node;
    slot_n      = slot;
    mem_req     = 1'b0;
    mem_addr    = cur;
    lns_start   = 1'b0;
    empty_child = 1'b0;
    capture     = 1'b0;
    if (ce) begin
      unique case (state)
        S_IDLE: if (start) begin
          capture = 1'b1;
          if (!root_ok) begin
            state_n = S_EMPTY;
          end else begin
            cur_n     = root.child_base + (addr_t'(root_idx) >> SLOT_W);
            slot_n    = root_idx[SLOT_W-1:0];
            rd_node_n = 1'b0;
            mem_req   = 1'b1;
            mem_addr  = cur_n;
            state_n   = mem_gnt ? S_WAIT : S_REQ;
          end
        end
        S_REQ: begin
          mem_req = 1'b1;
          if (mem_gnt) state_n = S_WAIT;
        end
        S_WAIT: begin
          if (rd_node) begin
            if (!node_ok) begin
              state_n = S_EMPTY;
            end else begin
              cur_n     = node_rd.child_base + (addr_t'(node_idx) >> SLOT_W);
              slot_n    = node_idx[SLOT_W-1:0];
              rd_node_n = 1'b0;
              mem_req   = 1'b1;
              mem_addr  = cur_n;
              state_n   = mem_gnt ? S_WAIT : S_REQ;
            end
          end else begin
            unique case (ptr_rd.kind)
              PTR_NODE: begin
                cur_n     = addr_t'(ptr_rd.addr);
                rd_node_n = 1'b1;
                mem_req   = 1'b1;
                mem_addr  = cur_n;
                state_n   = mem_gnt ? S_WAIT : S_REQ;
              end
              PTR_LEAF: begin
                cur_n = addr_t'(ptr_rd.addr);
                if (lns_idle) begin
                  lns_start = 1'b1;
                  state_n   = S_IDLE;
                end else begin
                  state_n   = S_LEAF;
                end
              end
              default:  state_n = S_EMPTY;
            endcase
          end
        end
        S_LEAF: if (lns_idle) begin
          lns_start = 1'b1;
          state_n   = S_IDLE;
        end
        S_EMPTY: if (!result_busy) begin
          empty_child = 1'b1;
          state_n     = S_IDLE;
        end
        default: state_n = S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      root    <= '0;
      hdr_q   <= '0;
      id_q    <= '0;
      cur     <= '0;
      rd_node <= 1'b0;
      slot    <= '0;
    end else begin
      if (root_we) root <= root_wdata;
      state   <= state_n;
      cur     <= cur_n;
      rd_node <= rd_node_n;
      slot    <= slot_n;
      if (capture) begin
        hdr_q <= hdr;
        id_q  <= pkt_id;
      end
    end
  end

endmodule
