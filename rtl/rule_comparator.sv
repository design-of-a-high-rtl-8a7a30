// rule_comparator: compares one packet header with one stored rule.
//
// It is purely combinational. It checks two prefix matches on the encoded
// source and destination IPs, inclusive range checks on both ports, and an
// exact or wildcard check on the protocol. `hit` is the AND of the five.
// A prefix is decoded from its 35-bit form as pc_pkg describes: bit 0 set
// means a short prefix (length 0..28, 28 stored address bits); bit 0 clear
// means a long one (length 29..32, all 32 address bits). A stored length
// above 28 in the short form counts as 28.
//
// The leaf node searcher uses two of these side by side, so it compares
// both rules of a memory word at once. The paper gives the field sizes and
// the two-comparator arrangement. The decode boundary, the wildcard
// polarity of the protocol mask and the inclusive ranges are this design's
// choices.
module rule_comparator
  import pc_pkg::*;
(
  input  hdr_t  hdr,
  input  rule_t rule,
  output logic  hit
);

  logic sip_ok, dip_ok, sp_ok, dp_ok, proto_ok;

  // Decode one encoded prefix into an address and a mask, then compare.
  function automatic logic prefix_ok(input logic [IPENC_W-1:0] enc,
                                     input logic [31:0] ip);
    logic [31:0] addr, mask;
    logic [5:0]  len;
    if (enc[0]) begin
      addr = {enc[34:7], 4'b0000};
      len  = (enc[6:1] > 6'd28) ? 6'd28 : enc[6:1];
    end else begin
      addr = enc[34:3];
      len  = 6'd29 + {4'b0000, enc[2:1]};
    end
    mask = (len == 6'd0) ? 32'h0 : (32'hFFFF_FFFF << (6'd32 - len));
    return ((ip ^ addr) & mask) == 32'h0;
  endfunction

  always_comb begin
    sip_ok   = prefix_ok(rule.sip, hdr.sip);
    dip_ok   = prefix_ok(rule.dip, hdr.dip);
    sp_ok    = (hdr.sp >= rule.sp_lo) && (hdr.sp <= rule.sp_hi);
    dp_ok    = (hdr.dp >= rule.dp_lo) && (hdr.dp <= rule.dp_hi);
    proto_ok = rule.proto_wild || (hdr.proto == rule.proto);
    hit      = sip_ok && dip_ok && sp_ok && dp_ok && proto_ok;
  end

endmodule
