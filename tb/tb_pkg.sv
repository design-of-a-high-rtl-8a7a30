// tb_pkg: test support shared by the classifier testbenches.
//
// It holds a rule set in plain form (address and prefix length, port
// ranges, protocol). From that set it computes the expected result of any
// header by linear search in priority order. This reference never looks at
// the tree the hardware walks. It can also build a small decision tree for
// the set, as memory words and a root node. Two shapes are offered:
//   shape 0: root cuts SIP[31:30] and DP[15] (8 children). Child 6
//            (SIP=11.., DP<32768) is an internal node that pre-cuts DIP[31]
//            (must be 0) and cuts DIP[30] and SP[15] (4 children). The
//            other children are leaves, or empty when no rule reaches them
//            (no rule has SIP starting 00, so children 0 and 1 are empty).
//   shape 1: root cuts SIP[31:28] (16 children), every leaf holding at most
//            two rules. This is the shape behind the quoted peak rate.
//   shape 3: root cuts SIP[31:26] and DP[15:13] (512 children), for larger
//            sets of mostly specific rules (prefixes of 8 bits or more).
// Leaves hold the rules that overlap their region, in priority order, two
// per word, with the last flag on the final rule. Leaves with the same rule
// list are stored once (node merging).
package tb_pkg;
  import pc_pkg::*;

  typedef struct {
    logic [31:0] sip; int unsigned slen;
    logic [31:0] dip; int unsigned dlen;
    logic [15:0] sp_lo, sp_hi, dp_lo, dp_hi;
    logic [7:0]  proto; bit wild;
    logic [15:0] id;
  } prule_t;

  // region: prefixes per field (value, length)
  typedef struct {
    logic [31:0] sip; int unsigned slen;
    logic [31:0] dip; int unsigned dlen;
    logic [15:0] sp;  int unsigned splen;
    logic [15:0] dp;  int unsigned dplen;
  } region_t;

  function automatic logic [31:0] pmask(int unsigned len);
    return (len == 0) ? 32'h0 : (32'hFFFF_FFFF << (32 - len));
  endfunction

  function automatic bit pfx_overlap(logic [31:0] a, int unsigned la,
                                     logic [31:0] b, int unsigned lb);
    int unsigned l = (la < lb) ? la : lb;
    return ((a ^ b) & pmask(l)) == 0;
  endfunction

  function automatic bit range_overlap16(logic [15:0] lo, logic [15:0] hi,
                                         logic [15:0] v, int unsigned len);
    int unsigned rlo, rhi;
    rlo = int'(v & 16'(pmask(len) >> 16));
    rhi = rlo + ((len >= 16) ? 0 : ((1 << (16 - len)) - 1));
    return !(int'(hi) < rlo || int'(lo) > rhi);
  endfunction

  function automatic bit ref_hit(prule_t r, hdr_t h);
    if (((h.sip ^ r.sip) & pmask(r.slen)) != 0) return 0;
    if (((h.dip ^ r.dip) & pmask(r.dlen)) != 0) return 0;
    if (h.sp < r.sp_lo || h.sp > r.sp_hi) return 0;
    if (h.dp < r.dp_lo || h.dp > r.dp_hi) return 0;
    if (!r.wild && h.proto != r.proto) return 0;
    return 1;
  endfunction

  function automatic rule_t encode(prule_t r, bit last);
    rule_t e;
    e.last = last; e.rule_id = r.id;
    e.sip = ip_encode(r.sip & pmask(r.slen), r.slen);
    e.dip = ip_encode(r.dip & pmask(r.dlen), r.dlen);
    e.sp_lo = r.sp_lo; e.sp_hi = r.sp_hi; e.dp_lo = r.dp_lo; e.dp_hi = r.dp_hi;
    e.proto = r.proto; e.proto_wild = r.wild;
    return e;
  endfunction

  function automatic logic [15:0] rnd16();
    return 16'($urandom);
  endfunction

  class ruleset;
    prule_t rules[$];
    word_t  mem[int];
    node_t  root;
    int     n_leaves, n_empty, n_words, max_leaf;

    // Random rule; shape 1 gives each rule its own SIP nibble.
    function automatic prule_t rand_rule(int i, int shape);
      prule_t r;
      logic [15:0] a, b;
      r.id   = 16'(100 + i * 3);
      r.sip  = $urandom; r.slen = 2 + ($urandom % 31);
      r.dip  = $urandom; r.dlen = $urandom % 33;
      if ($urandom % 3 == 0) r.dlen = 0;
      a = rnd16(); b = rnd16();
      if ($urandom % 3 == 0) begin r.sp_lo = 0; r.sp_hi = 16'hFFFF; end
      else begin r.sp_lo = (a < b) ? a : b; r.sp_hi = (a < b) ? b : a; end
      a = rnd16(); b = rnd16();
      if ($urandom % 4 == 0) begin r.dp_lo = a; r.dp_hi = a; end
      else begin r.dp_lo = (a < b) ? a : b; r.dp_hi = (a < b) ? b : a; end
      r.proto = ($urandom % 2) ? 8'd6 : 8'd17; r.wild = ($urandom % 3 == 0);
      if (shape == 1) begin
        r.sip[31:28] = 4'(i); if (r.slen < 4) r.slen = 4;
      end else if (shape == 3) begin
        // mostly specific prefixes, as in access-control lists
        r.slen = 8 + ($urandom % 25);
        if ($urandom % 4 != 0) r.dlen = 8 + ($urandom % 25);
      end else begin
        // leave the region SIP=00.. without rules, so children 0 and 1 are empty
        if (r.sip[31:30] == 2'b00) r.sip[30] = 1'b1;
        // keep the pre-cut of child 6 valid: DIP[31] = 0 there
        if (r.sip[31:30] == 2'b11 && range_overlap16(r.dp_lo, r.dp_hi, 16'h0, 1)) begin
          r.dip[31] = 1'b0; if (r.dlen == 0) r.dlen = 1;
        end
      end
      return r;
    endfunction

    function void make(int n, int shape);
      rules.delete();
      for (int i = 0; i < n; i++) rules.push_back(rand_rule(i, shape));
    endfunction

    // expected result: first matching rule
    function automatic bit classify(hdr_t h, output logic [15:0] id);
      foreach (rules[i]) if (ref_hit(rules[i], h)) begin id = rules[i].id; return 1; end
      id = 0; return 0;
    endfunction

    // a header inside rule i (or random when i < 0)
    function automatic hdr_t hdr_for(int i);
      hdr_t h; prule_t r;
      h.sip = $urandom; h.dip = $urandom; h.sp = rnd16(); h.dp = rnd16();
      h.proto = ($urandom % 2) ? 8'd6 : 8'd17;
      if (i >= 0) begin
        r = rules[i];
        h.sip = (r.sip & pmask(r.slen)) | (h.sip & ~pmask(r.slen));
        h.dip = (r.dip & pmask(r.dlen)) | (h.dip & ~pmask(r.dlen));
        h.sp  = r.sp_lo + 16'($urandom % (32'(r.sp_hi) - 32'(r.sp_lo) + 1));
        h.dp  = r.dp_lo + 16'($urandom % (32'(r.dp_hi) - 32'(r.dp_lo) + 1));
        if (!r.wild) h.proto = r.proto;
      end
      return h;
    endfunction

    function automatic bit in_region(prule_t r, region_t g);
      return pfx_overlap(r.sip, r.slen, g.sip, g.slen) &&
             pfx_overlap(r.dip, r.dlen, g.dip, g.dlen) &&
             range_overlap16(r.sp_lo, r.sp_hi, g.sp, g.splen) &&
             range_overlap16(r.dp_lo, r.dp_hi, g.dp, g.dplen);
    endfunction

    // store a leaf (or reuse an identical one); returns the pointer
    int     next_free;
    string  leaf_key[string];
    int     leaf_at[string];

    function automatic ptr_t put_leaf(region_t g);
      int idx[$]; string key; ptr_t p; word_t w;
      foreach (rules[i]) if (in_region(rules[i], g)) idx.push_back(i);
      if (idx.size() == 0) begin n_empty++; p.kind = PTR_EMPTY; p.addr = 0; return p; end
      key = "";
      foreach (idx[j]) key = {key, $sformatf("%0d,", idx[j])};
      p.kind = PTR_LEAF;
      if (leaf_at.exists(key)) begin p.addr = 18'(leaf_at[key]); return p; end
      p.addr = 18'(next_free); leaf_at[key] = next_free; n_leaves++;
      if (idx.size() > max_leaf) max_leaf = idx.size();
      for (int j = 0; j < idx.size(); j += 2) begin
        w = '0;
        w[RULE_W-1:0] = encode(rules[idx[j]], j == idx.size() - 1);
        if (j + 1 < idx.size())
          w[2*RULE_W-1:RULE_W] = encode(rules[idx[j+1]], j + 1 == idx.size() - 1);
        mem[next_free++] = w;
      end
      return p;
    endfunction

    function void set_ptr(int base, int i, ptr_t p);
      word_t w;
      w = mem.exists(base + i / PTRS_PER_WORD) ? mem[base + i / PTRS_PER_WORD] : '0;
      w[(i % PTRS_PER_WORD) * PTR_W +: PTR_W] = p;
      mem[base + i / PTRS_PER_WORD] = w;
    endfunction

    function void build(int shape);
      region_t g; node_t n; ptr_t p; word_t w;
      mem.delete(); leaf_at.delete();
      n_leaves = 0; n_empty = 0; max_leaf = 0;
      root = '0;
      if (shape == 3) begin
        // 512 children {SIP[31:26], DP[15:13]} in pointer words 0..31
        root.sip.cut_lsb = 26; root.sip.ncut = 6;
        root.dp.cut_lsb  = 13; root.dp.ncut  = 3;
        root.child_base  = 0;
        for (int c = 0; c < 32; c++) set_ptr(c * PTRS_PER_WORD, 0, '0);
        next_free = 32;
        for (int c = 0; c < 512; c++) begin
          g = '{sip: 32'(c >> 3) << 26, slen: 6, dip: 0, dlen: 0,
                sp: 0, splen: 0, dp: 16'(c & 7) << 13, dplen: 3};
          set_ptr(0, c, put_leaf(g));
        end
      end else if (shape == 1) begin
        root.sip.cut_lsb = 28; root.sip.ncut = 4; root.child_base = 0;
        set_ptr(0, 0, '0);
        next_free = 1;
        for (int c = 0; c < 16; c++) begin
          g = '{sip: 32'(c) << 28, slen: 4, dip: 0, dlen: 0, sp: 0, splen: 0, dp: 0, dplen: 0};
          set_ptr(0, c, put_leaf(g));
        end
      end else begin
        root.sip.cut_lsb = 30; root.sip.ncut = 2;
        root.dp.cut_lsb  = 15; root.dp.ncut  = 1;
        root.child_base  = 0;
        set_ptr(0, 0, '0); set_ptr(2, 0, '0);
        next_free = 3;
        // internal node for child 6 at word 1, its children at word 2
        n = '0;
        n.dip.pre_mask = 32'h8000_0000; n.dip.pre_val = 32'h0;
        n.dip.cut_lsb = 30; n.dip.ncut = 1;
        n.sp.cut_lsb = 15;  n.sp.ncut = 1;
        n.child_base = 2;
        w = '0; w[NODE_W-1:0] = n; mem[1] = w;
        for (int c = 0; c < 8; c++) begin
          if (c == 6) begin
            p.kind = PTR_NODE; p.addr = 1; set_ptr(0, c, p);
            for (int d = 0; d < 4; d++) begin
              g = '{sip: 32'hC000_0000, slen: 2, dip: 32'(d >> 1) << 30, dlen: 2,
                    sp: 16'(d & 1) << 15, splen: 1, dp: 0, dplen: 1};
              set_ptr(2, d, put_leaf(g));
            end
          end else begin
            g = '{sip: 32'(c >> 1) << 30, slen: 2, dip: 0, dlen: 0,
                  sp: 0, splen: 0, dp: 16'(c & 1) << 15, dplen: 1};
            set_ptr(0, c, put_leaf(g));
          end
        end
      end
      n_words = next_free;
    endfunction
  endclass

endpackage
