// pc_pkg: types, constants and helper functions shared by the packet
// classifier.
//
// Header: the five classic fields, 104 bits (SIP 32, DIP 32, SP 16, DP 16,
// protocol 8).
//
// Rule (160 bits, two per 320-bit memory word): a last-rule-of-leaf flag, a
// 16-bit rule ID, two 35-bit encoded IP prefixes, inclusive 16-bit lo/hi
// ranges for both ports, and an 8-bit protocol with a 1-bit mask. These
// sizes follow the paper. The order of the fields is this design's choice.
//
// Encoded IP prefix (35 bits). Bit 0 set: the prefix is at most 28 bits
// long, so bits [34:7] hold address bits [31:4] and bits [6:1] the length
// (0..28). Bit 0 clear: bits [34:3] hold the full address and bits [2:1]
// the length minus 29 (29..32). The paper describes both forms, and it
// states the boundary in two slightly different ways. The choice made here
// makes each form cover every length it has to.
//
// Tree node (internal or root). For each field it stores the pre-cut bits
// (a mask and the value those bits must have) and the position and number
// of its cut bits. The child index concatenates the cut bits of SIP, DIP,
// SP, DP and protocol, MSB first, in that order. A header whose pre-cut bits
// differ from the node's lies outside the compacted region, so its child is
// empty. Children are 20-bit pointers (2-bit kind, 18-bit word address),
// sixteen per memory word, stored from child_base: entry i is in word
// child_base + i/16, slot i%16. All of these formats are this design's own
// choice. The paper says only that a node stores the number of cuts per
// field and the bits where they are made.
package pc_pkg;

  localparam int unsigned RULE_ID_W      = 16;
  localparam int unsigned PKT_ID_W       = 4;   // 16 sorter registers
  localparam int unsigned IPENC_W        = 35;
  localparam int unsigned RULE_W         = 160;
  localparam int unsigned RULES_PER_WORD = 2;
  localparam int unsigned WORD_W         = RULE_W * RULES_PER_WORD;
  localparam int unsigned ADDR_W         = 13;  // 8192 words
  localparam int unsigned PTR_ADDR_W     = 18;
  localparam int unsigned PTR_W          = 2 + PTR_ADDR_W;
  localparam int unsigned PTRS_PER_WORD  = WORD_W / PTR_W;  // 16
  localparam int unsigned SLOT_W         = $clog2(PTRS_PER_WORD);
  localparam int unsigned IDX_W          = 12;  // max total cut bits per node

  typedef logic [WORD_W-1:0]    word_t;
  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [RULE_ID_W-1:0] rule_id_t;
  typedef logic [PKT_ID_W-1:0]  pkt_id_t;
  typedef logic [IDX_W-1:0]     idx_t;

  typedef struct packed {
    logic [31:0] sip;
    logic [31:0] dip;
    logic [15:0] sp;
    logic [15:0] dp;
    logic [7:0]  proto;
  } hdr_t;

  typedef struct packed {
    logic                last;
    rule_id_t            rule_id;
    logic [IPENC_W-1:0]  sip;
    logic [IPENC_W-1:0]  dip;
    logic [15:0]         sp_lo;
    logic [15:0]         sp_hi;
    logic [15:0]         dp_lo;
    logic [15:0]         dp_hi;
    logic [7:0]          proto;
    logic                proto_wild;   // 1: any protocol
  } rule_t;

  typedef enum logic [1:0] {
    PTR_EMPTY = 2'd0,
    PTR_LEAF  = 2'd1,
    PTR_NODE  = 2'd2
  } ptr_kind_e;

  typedef struct packed {
    ptr_kind_e             kind;
    logic [PTR_ADDR_W-1:0] addr;
  } ptr_t;

  typedef struct packed {
    logic [31:0] pre_mask;
    logic [31:0] pre_val;
    logic [4:0]  cut_lsb;
    logic [3:0]  ncut;
  } cut32_t;

  typedef struct packed {
    logic [15:0] pre_mask;
    logic [15:0] pre_val;
    logic [3:0]  cut_lsb;
    logic [3:0]  ncut;
  } cut16_t;

  typedef struct packed {
    logic [7:0] pre_mask;
    logic [7:0] pre_val;
    logic [2:0] cut_lsb;
    logic [3:0] ncut;
  } cut8_t;

  typedef struct packed {
    cut32_t sip;
    cut32_t dip;
    cut16_t sp;
    cut16_t dp;
    cut8_t  proto;
    addr_t  child_base;
  } node_t;

  localparam int unsigned NODE_W = $bits(node_t);

  // Encoder used when building search structures (testbenches).
  function automatic logic [IPENC_W-1:0] ip_encode(input logic [31:0] addr,
                                                   input int unsigned len);
    if (len <= 28) return {addr[31:4], 6'(len), 1'b1};
    else           return {addr, 2'(len - 29), 1'b0};
  endfunction

  // Child index of a header at a node; ok = 0 when the header falls outside
  // the node's pre-cut region (empty child).
  function automatic idx_t node_index(input hdr_t h, input node_t n,
                                      output logic ok);
    logic [31:0] idx;
    ok  = ((h.sip   & n.sip.pre_mask)   == n.sip.pre_val)   &&
          ((h.dip   & n.dip.pre_mask)   == n.dip.pre_val)   &&
          ((h.sp    & n.sp.pre_mask)    == n.sp.pre_val)    &&
          ((h.dp    & n.dp.pre_mask)    == n.dp.pre_val)    &&
          ((h.proto & n.proto.pre_mask) == n.proto.pre_val);
    idx = 32'd0;
    idx = (idx << n.sip.ncut)   | ((h.sip >> n.sip.cut_lsb) & ~(32'hFFFF_FFFF << n.sip.ncut));
    idx = (idx << n.dip.ncut)   | ((h.dip >> n.dip.cut_lsb) & ~(32'hFFFF_FFFF << n.dip.ncut));
    idx = (idx << n.sp.ncut)    | ((32'(h.sp) >> n.sp.cut_lsb) & ~(32'hFFFF_FFFF << n.sp.ncut));
    idx = (idx << n.dp.ncut)    | ((32'(h.dp) >> n.dp.cut_lsb) & ~(32'hFFFF_FFFF << n.dp.ncut));
    idx = (idx << n.proto.ncut) | ((32'(h.proto) >> n.proto.cut_lsb) & ~(32'hFFFF_FFFF << n.proto.ncut));
    return idx[IDX_W-1:0];
  endfunction

  function automatic rule_t word_rule(input word_t w, input int unsigned slot);
    return rule_t'(w[slot*RULE_W +: RULE_W]);
  endfunction

  function automatic ptr_t word_ptr(input word_t w, input logic [SLOT_W-1:0] slot);
    return ptr_t'(w[slot*PTR_W +: PTR_W]);
  endfunction

endpackage
