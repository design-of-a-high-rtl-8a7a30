// tb_hw_accelerator: end-to-end test of the whole accelerator at its
// default size (two sides, four engines each, 8192-word memory).
//
// The testbench builds a random rule set and a tree for it (tb_pkg shape
// 0). It writes the tree into the memory through the write port and the
// root node into the engines. It then streams random headers into both
// sides, with random gaps, some of them back to back so that the header
// buffers fill up. Every result must come out in packet order per side,
// with the rule ID a linear search of the rule set gives. A second rule set
// of shape 1 (root plus leaves of at most two rules) is then loaded. With
// all eight engines busy, each side must give close to one packet per two
// engine cycles per engine, that is NUM_ENG/2 packets per two clocks. The
// testbench counts how often each mechanism occurs, and counts a failure
// for any that never does.
module tb_hw_accelerator;
  import pc_pkg::*;
  import tb_pkg::*;

  localparam int NE = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic root_we; node_t root_wdata;
  logic mem_we; addr_t mem_waddr; word_t mem_wdata;
  logic [1:0] in_valid, in_ready, out_valid, out_match;
  hdr_t [1:0] in_hdr;
  rule_id_t [1:0] out_rule_id;
  pkt_id_t [1:0] out_pkt_id;

  hw_accelerator dut (.*);

  ruleset rs;
  int checks = 0, failures = 0, cyc = 0;
  bit          qhit [2][$];
  logic [15:0] qid  [2][$];
  int          n_in [2], n_out [2];
  pkt_id_t     next_out [2];
  int          gap_mode;

  // mechanism counters
  int ev_match, ev_leaf_nomatch, ev_empty, ev_ptr_empty, ev_precut, ev_internal, ev_multiword,
      ev_overlap, ev_sorted, ev_passthru, ev_bufull, ev_both_ports, ev_slot_lost;

  always @(posedge clk) cyc <= cyc + 1;

  for (genvar s = 0; s < 2; s++) begin : g_mon
    for (genvar k = 0; k < NE; k++) begin : g_e
      always @(posedge clk) if (rst_n && dut.g_side[s].u_side.g_eng[k].u_eng.ce) begin
        if (dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.empty_child) ev_empty++;
        if (dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.state == dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.S_WAIT &&
            dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.rd_node) begin
          ev_internal++;
          if (!dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.node_ok) ev_precut++;
        end
        if (dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.state == dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.S_WAIT &&
            !dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.rd_node &&
            dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.ptr_rd.kind == PTR_EMPTY)
          ev_ptr_empty++;
        if (dut.g_side[s].u_side.g_eng[k].u_eng.u_lns.mem_req && !dut.g_side[s].u_side.g_eng[k].u_eng.u_lns.idle)
          ev_multiword++;
        if (dut.g_side[s].u_side.g_eng[k].u_eng.u_lns.done && !dut.g_side[s].u_side.g_eng[k].u_eng.u_lns.match)
          ev_leaf_nomatch++;
        if (!dut.g_side[s].u_side.g_eng[k].u_eng.u_lns.idle && dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.state != 0)
          ev_overlap++;
        if (dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.mem_req && !dut.g_side[s].u_side.g_eng[k].u_eng.u_tt.mem_gnt)
          ev_slot_lost++;
      end
    end
    always @(posedge clk) if (rst_n) begin
      if (dut.g_side[s].u_side.u_sort.in_valid) begin
        if (dut.g_side[s].u_side.sort_stored) ev_sorted++; else ev_passthru++;
      end
      if (in_valid[s] && !in_ready[s]) ev_bufull++;
    end
  end
  always @(posedge clk) if (rst_n && dut.ram_en == 2'b11) ev_both_ports++;

  // output checker
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < 2; s++) if (out_valid[s]) begin
      checks++;
      if (qhit[s].size() == 0) begin
        failures++; $display("FAIL side %0d: unexpected result", s);
      end else begin
        bit h; logic [15:0] id;
        h = qhit[s].pop_front(); id = qid[s].pop_front();
        if (out_pkt_id[s] != next_out[s] || out_match[s] != h || (h && out_rule_id[s] != id)) begin
          failures++;
          $display("FAIL side %0d pkt %0d: got id=%0d m=%0d r=%0d want m=%0d r=%0d", s, next_out[s],
                   out_pkt_id[s], out_match[s], out_rule_id[s], h, id);
        end
        if (out_match[s]) ev_match++;
        next_out[s]++;
        n_out[s]++;
      end
    end
  end

  task automatic load();
    @(negedge clk);
    foreach (rs.mem[a]) begin
      mem_we = 1; mem_waddr = addr_t'(a); mem_wdata = rs.mem[a];
      @(negedge clk);
    end
    mem_we = 0; root_we = 1; root_wdata = rs.root;
    @(negedge clk); root_we = 0;
  endtask

  function automatic hdr_t pick();
    case ($urandom % 5)
      0: return rs.hdr_for(-1);
      1: begin hdr_t h = rs.hdr_for(-1); h.sip[31:30] = 2'b11; h.dp[15] = 1'b0; return h; end
      default: return rs.hdr_for($urandom % rs.rules.size());
    endcase
  endfunction

  // drives side s with n headers; a header counts as sent when valid and
  // ready are both high in the clock that follows the falling edge
  task automatic drive(int s, int n);
    int sent = 0; hdr_t h; bit hit; logic [15:0] id;
    h = pick();
    while (sent < n) begin
      @(negedge clk);
      if (in_valid[s] || gap_mode == 0 || ($urandom % 4) == 0) begin
        in_valid[s] = 1; in_hdr[s] = h;
      end else begin
        in_valid[s] = 0;
      end
      if (in_valid[s] && in_ready[s]) begin
        hit = rs.classify(h, id);
        qhit[s].push_back(hit); qid[s].push_back(id);
        sent++;
        h = pick();
      end
    end
    @(negedge clk);
    in_valid[s] = 0;
  endtask

  task automatic wait_drain();
    int g = 0;
    while ((qhit[0].size() != 0 || qhit[1].size() != 0) && g < 20000) begin @(posedge clk); g++; end
    checks++;
    if (g >= 20000) begin failures++; $display("FAIL: results missing"); end
  endtask

  initial begin
    int t0, t1, n, total;
    rs = new();
    root_we = 0; root_wdata = '0; mem_we = 0; mem_waddr = '0; mem_wdata = '0;
    in_valid = 0; in_hdr = '0; next_out = '{0, 0}; gap_mode = 1;
    rs.make(48, 0); rs.build(0);
    $display("tree: %0d words, %0d leaves, %0d empty, largest leaf %0d rules",
             rs.n_words, rs.n_leaves, rs.n_empty, rs.max_leaf);
    repeat (3) @(posedge clk); rst_n = 1;
    load();
    // phase 1: random gaps, then back to back
    fork drive(0, 1500); drive(1, 1500); join
    gap_mode = 0;
    fork drive(0, 1500); drive(1, 1500); join
    wait_drain();
    // phase 2: peak rate with a root and leaves of at most two rules
    rs.make(16, 1); rs.build(1);
    load();
    n = 1000;
    t0 = cyc;
    fork drive(0, n); drive(1, n); join
    wait_drain();
    t1 = cyc;
    total = 2 * n;
    // 2 sides x NE engines x 1 packet per 2 engine cycles (NE clocks each)
    $display("peak: %0d packets in %0d clocks (ideal %0d)", total, t1 - t0, n * 2);
    checks++;
    if (t1 - t0 > n * 2 + n / 10 + 40) begin failures++; $display("FAIL: rate too low"); end
    $display("events: match=%0d leaf_nomatch=%0d empty_child=%0d (pointer %0d, pre-cut miss %0d) internal=%0d",
             ev_match, ev_leaf_nomatch, ev_empty, ev_ptr_empty, ev_precut, ev_internal);
    $display("        leaf_word_reads=%0d tt_lns_overlap=%0d slot_lost=%0d sorted=%0d passthru=%0d",
             ev_multiword, ev_overlap, ev_slot_lost, ev_sorted, ev_passthru);
    $display("        buffer_full=%0d both_ports=%0d", ev_bufull, ev_both_ports);
    for (int s = 0; s < 2; s++) begin checks++; if (n_out[s] != 4000) begin failures++; $display("FAIL side %0d: %0d results", s, n_out[s]); end end
    if (ev_match == 0)        begin failures++; $display("FAIL: no match"); end
    if (ev_leaf_nomatch == 0) begin failures++; $display("FAIL: no leaf no-match"); end
    if (ev_empty == 0)        begin failures++; $display("FAIL: no empty child"); end
    if (ev_ptr_empty == 0)    begin failures++; $display("FAIL: no empty pointer"); end
    if (ev_precut == 0)       begin failures++; $display("FAIL: no pre-cut miss"); end
    if (ev_internal == 0)     begin failures++; $display("FAIL: no internal node"); end
    if (ev_overlap == 0)      begin failures++; $display("FAIL: no traverser/searcher overlap"); end
    if (ev_sorted == 0)       begin failures++; $display("FAIL: no reordering"); end
    if (ev_passthru == 0)     begin failures++; $display("FAIL: no pass-through"); end
    if (ev_bufull == 0)       begin failures++; $display("FAIL: buffer never full"); end
    if (ev_both_ports == 0)   begin failures++; $display("FAIL: ports never both busy"); end
    checks += 11;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
