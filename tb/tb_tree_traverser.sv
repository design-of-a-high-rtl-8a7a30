// tb_tree_traverser: the traverser alone, on a tb_pkg shape-0 tree held in
// a behavioural memory. For each random header the expected outcome is
// worked out by hand from the tree's shape, not by the traverser's index
// logic. Children are {SIP[31:30], DP[15]}. Child 6 is an internal node
// whose pre-cut needs DIP[31] = 0 and whose children are {DIP[30], SP[15]}.
// The outcome is either an empty child or the leaf address stored in that
// pointer slot. The searcher side (lns_idle, result_busy) and the memory
// grant are driven at random, so the traverser also has to wait for the
// searcher, hold an empty-child report and retry a lost memory slot.
module tb_tree_traverser;
  import pc_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0, ce = 1;
  always #5 clk = ~clk;

  logic root_we; node_t root_wdata;
  logic start, ready; hdr_t hdr; pkt_id_t pkt_id;
  logic mem_req, mem_gnt; addr_t mem_addr; word_t mem_rdata;
  logic lns_start, lns_idle, result_busy, empty_child;
  addr_t lns_addr; hdr_t lns_hdr; pkt_id_t lns_pkt_id, empty_pkt_id;

  tree_traverser dut (.*);

  ruleset rs;
  int checks = 0, failures = 0;
  int n_leaf = 0, n_empty = 0, n_hold_leaf = 0, n_hold_empty = 0, n_denied = 0;

  always_ff @(posedge clk)
    if (ce && mem_req && mem_gnt) mem_rdata <= rs.mem.exists(int'(mem_addr)) ? rs.mem[int'(mem_addr)] : '0;

  always @(posedge clk) if (rst_n) begin
    if (mem_req && !mem_gnt) n_denied++;
    if (dut.state == dut.S_LEAF && !lns_idle) n_hold_leaf++;
    if (dut.state == dut.S_EMPTY && result_busy) n_hold_empty++;
  end

  function automatic ptr_t ptr_at(int word, int slot);
    word_t w = rs.mem[word];
    return ptr_t'(w[slot*PTR_W +: PTR_W]);
  endfunction

  initial begin
    hdr_t h; ptr_t p; int c; bit exp_empty; int guard;
    rs = new();
    start = 0; hdr = '0; pkt_id = '0; root_we = 0; root_wdata = '0;
    lns_idle = 1; result_busy = 0; mem_gnt = 1; mem_rdata = '0;
    rs.make(30, 0); rs.build(0);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); root_we = 1; root_wdata = rs.root; @(negedge clk); root_we = 0;
    for (int t = 0; t < 800; t++) begin
      h = rs.hdr_for(-1);
      if (t % 3 == 0) begin h.sip[31:30] = 2'b11; h.dp[15] = 1'b0; end
      c = {h.sip[31:30], h.dp[15]};
      if (c == 6) p = h.dip[31] ? ptr_t'('0) : ptr_at(2, {h.dip[30], h.sp[15]});
      else        p = ptr_at(0, c);
      exp_empty = (p.kind == PTR_EMPTY);
      @(negedge clk);
      while (!ready) @(negedge clk);
      start = 1; hdr = h; pkt_id = 4'(t);
      @(posedge clk); #1 start = 0;
      guard = 0;
      while (1) begin
        @(negedge clk);
        lns_idle    = ($urandom % 3 != 0);
        result_busy = ($urandom % 4 == 0);
        mem_gnt     = ($urandom % 4 != 0);
        #1;
        if (lns_start || empty_child || ++guard > 50) break;
      end
      checks++;
      if (exp_empty) begin
        if (!empty_child || empty_pkt_id != 4'(t)) begin failures++; $display("FAIL %0d: expected empty", t); end
        n_empty++;
      end else begin
        if (!lns_start || lns_addr != addr_t'(p.addr) || lns_hdr != h || lns_pkt_id != 4'(t)) begin
          failures++; $display("FAIL %0d: expected leaf %0d got start=%0d addr=%0d", t, p.addr, lns_start, lns_addr);
        end
        n_leaf++;
      end
      @(posedge clk);
    end
    $display("leaf=%0d empty=%0d hold_leaf=%0d hold_empty=%0d denied=%0d",
             n_leaf, n_empty, n_hold_leaf, n_hold_empty, n_denied);
    checks++;
    if (n_leaf == 0 || n_empty == 0 || n_hold_leaf == 0 || n_hold_empty == 0 || n_denied == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
