// tb_classification_engine: one engine against a behavioural block RAM.
//
// The testbench builds a random rule set and its tree (tb_pkg shape 0: a
// root, an internal node with a pre-cut, empty children and leaves of many
// lengths). It streams headers into the engine and checks every result
// (match/no-match, rule ID, packet ID) against a linear search of the rule
// set. The memory model answers a read in the next engine cycle. The run is
// repeated with the clock enable high one clock in three, as the engine
// sees it inside the full design. A third part uses shape 1 (root plus
// leaves of at most two rules) and checks the stated peak rate: N
// back-to-back packets take at most 2N + 4 engine cycles.
module tb_classification_engine;
  import pc_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0, ce;
  always #5 clk = ~clk;

  logic root_we; node_t root_wdata;
  logic start, ready; hdr_t hdr; pkt_id_t pkt_id;
  logic mem_req; addr_t mem_addr; word_t mem_rdata;
  logic res_valid, res_match, res_nomatch; rule_id_t res_rule_id; pkt_id_t res_pkt_id;

  classification_engine dut (.*);

  ruleset rs;
  int checks = 0, failures = 0;
  int n_match = 0, n_nomatch = 0, n_empty_path = 0, n_multiword = 0, n_hold = 0;
  bit exp_hit [16]; logic [15:0] exp_id [16];
  int  n_sent, n_recv;
  int  ce_div;
  int  cyc = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (ce && mem_req) mem_rdata <= rs.mem.exists(int'(mem_addr)) ? rs.mem[int'(mem_addr)] : '0;
  end

  always @(posedge clk) ce <= (ce_div <= 1) ? 1'b1 : ((cyc % ce_div) == ce_div - 1);

  // mechanism counters
  always @(posedge clk) if (rst_n && ce) begin
    if (dut.u_tt.empty_child) n_empty_path++;
    if (dut.u_lns.mem_req && !dut.u_lns.idle) n_multiword++;
    if (dut.u_tt.mem_req && !dut.u_tt.mem_gnt) n_hold++;
  end

  // result checker: results are registered in a ce cycle, seen before the next
  always @(negedge clk) if (rst_n && ce && res_valid) begin
    checks++;
    if (res_match == res_nomatch) begin failures++; $display("FAIL both/none flags"); end
    if (res_match != exp_hit[res_pkt_id] || (res_match && res_rule_id != exp_id[res_pkt_id])) begin
      failures++;
      $display("FAIL id %0d: got m=%0d rule %0d, want m=%0d rule %0d", res_pkt_id,
               res_match, res_rule_id, exp_hit[res_pkt_id], exp_id[res_pkt_id]);
    end
    if (res_match) n_match++; else n_nomatch++;
    n_recv++;
  end

  task automatic run(int n);
    hdr_t h; logic [15:0] id; bit hit; int guard;
    n_sent = 0; n_recv = 0;
    while (n_sent < n) begin
      case ($urandom % 4)
        0: h = rs.hdr_for(-1);
        1: begin h = rs.hdr_for(-1); h.sip[31:30] = 2'b11; h.dp[15] = 1'b0; end
        default: h = rs.hdr_for($urandom % rs.rules.size());
      endcase
      hit = rs.classify(h, id);
      @(negedge clk);
      while (!(ce && ready)) @(negedge clk);
      // at most two packets in this engine: ID wraps at 16 safely
      exp_hit[4'(n_sent)] = hit; exp_id[4'(n_sent)] = id;
      start = 1; hdr = h; pkt_id = 4'(n_sent);
      @(posedge clk); #1 start = 0;
      n_sent++;
    end
    guard = 0;
    while (n_recv < n && guard < 10000) begin @(posedge clk); guard++; end
    checks++;
    if (n_recv != n) begin failures++; $display("FAIL: %0d of %0d results", n_recv, n); end
  endtask

  task automatic load_root();
    @(negedge clk); root_we = 1; root_wdata = rs.root;
    @(negedge clk); root_we = 0;
  endtask

  initial begin
    int t0, t1, n;
    rs = new();
    start = 0; root_we = 0; root_wdata = '0; hdr = '0; pkt_id = 0; ce_div = 1; ce = 1;
    mem_rdata = '0;
    rs.make(40, 0); rs.build(0);
    repeat (3) @(posedge clk); rst_n = 1;
    load_root();
    run(400);
    ce_div = 3;
    run(200);
    // peak rate: root plus leaves of at most two rules
    ce_div = 1;
    rs.make(16, 1); rs.build(1);
    load_root();
    n = 100;
    t0 = cyc;
    run(n);
    t1 = cyc;
    checks++;
    if (t1 - t0 > 2 * n + 6) begin
      failures++; $display("FAIL rate: %0d packets in %0d cycles", n, t1 - t0);
    end
    $display("rate: %0d packets in %0d cycles; leaves=%0d max leaf=%0d", n, t1 - t0, rs.n_leaves, rs.max_leaf);
    $display("events: match=%0d nomatch=%0d empty_child=%0d leaf_word_reads=%0d tt_slot_lost=%0d",
             n_match, n_nomatch, n_empty_path, n_multiword, n_hold);
    checks++;
    if (n_empty_path == 0 || n_hold == 0 || n_match == 0) begin
      failures++; $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
