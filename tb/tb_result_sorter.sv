// tb_result_sorter: feeds results for a running sequence of packet IDs in
// shuffled order. Each result arrives at most 12 places away from its
// sequence position, never 16 or more ahead of the next result due, with
// at most one per clock and random idle clocks.
// The outputs must come out in ID order, one per clock at most, each with
// the match flag and rule ID of its packet. The testbench also checks that
// a result that is already due leaves on the next clock (pass-through),
// and counts how often results had to be stored.
module tb_result_sorter;
  import pc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_match, out_valid, out_match, stored;
  rule_id_t in_rule_id, out_rule_id; pkt_id_t in_pkt_id, out_pkt_id;

  result_sorter dut (.*);

  int checks = 0, failures = 0, n_out = 0, n_stored = 0, n_pass = 0;
  int seq_out = 0;
  bit       m_of [int];
  rule_id_t r_of [int];
  int last_in_seq;
  bit last_was_due;

  // expected data depends only on the sequence number
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_pkt_id != 4'(seq_out) || out_match != m_of[seq_out] ||
        (out_match && out_rule_id != r_of[seq_out])) begin
      failures++; $display("FAIL seq %0d: id %0d m %0d r %0d", seq_out, out_pkt_id, out_match, out_rule_id);
    end
    seq_out++; n_out++;
  end

  initial begin
    int order[$]; int blk; int tmp, j;
    in_valid = 0; in_match = 0; in_rule_id = 0; in_pkt_id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 300; b++) begin
      // a block of 12 results, shuffled
      order.delete();
      for (int i = 0; i < 12; i++) order.push_back(b * 12 + i);
      for (int i = 11; i > 0; i--) begin
        j = $urandom % (i + 1); tmp = order[i]; order[i] = order[j]; order[j] = tmp;
      end
      if (b % 4 == 0) order.sort();   // some blocks in order: pass-through
      foreach (order[i]) begin
        m_of[order[i]] = ($urandom % 3 != 0);
        r_of[order[i]] = 16'($urandom);
        @(negedge clk);
        while ($urandom % 3 == 0 || order[i] - seq_out >= 16) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_pkt_id = 4'(order[i]);
        in_match = m_of[order[i]]; in_rule_id = r_of[order[i]];
        #1;
        if (stored) n_stored++;
        else begin
          n_pass++;
          // a due result must be on the output one clock later
          @(negedge clk); in_valid = 0;
          checks++;
          if (!out_valid || out_pkt_id != 4'(order[i])) begin failures++; $display("FAIL: no pass-through"); end
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (n_out != 3600) begin failures++; $display("FAIL: %0d outputs", n_out); end
    $display("outputs=%0d stored=%0d passthrough=%0d", n_out, n_stored, n_pass);
    if (n_stored == 0 || n_pass == 0) failures++;
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
