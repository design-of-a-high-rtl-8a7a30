// tb_classifier_side: one classifier side with two engines (NUM_ENG = 2,
// a smaller buffer) on a behavioural single-port RAM with one clock of
// read latency. The testbench drives its own phase counter. Random headers
// on a tb_pkg shape-0 tree must give, in packet order, the result of a
// linear search of the rule set. It also checks that results are reordered
// at least once and that the header buffer fills.
module tb_classifier_side;
  import pc_pkg::*;
  import tb_pkg::*;

  localparam int NE = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic phase;
  logic root_we; node_t root_wdata;
  logic in_valid, in_ready; hdr_t in_hdr;
  logic ram_en; addr_t ram_addr; word_t ram_rdata;
  logic out_valid, out_match, sort_stored; rule_id_t out_rule_id; pkt_id_t out_pkt_id;

  classifier_side #(.NUM_ENG(NE), .BUF_DEPTH(8)) dut (.*);

  ruleset rs;
  always_ff @(posedge clk) if (ram_en) ram_rdata <= rs.mem.exists(int'(ram_addr)) ? rs.mem[int'(ram_addr)] : '0;
  always_ff @(posedge clk or negedge rst_n) if (!rst_n) phase <= 0; else phase <= !phase;

  int checks = 0, failures = 0, n_out = 0, n_stored = 0, n_full = 0;
  bit qh[$]; logic [15:0] qi[$]; pkt_id_t next_id = 0;

  always @(negedge clk) if (rst_n) begin
    if (sort_stored) n_stored++;
    if (out_valid) begin
      bit h; logic [15:0] id;
      checks++;
      if (qh.size() == 0) begin failures++; $display("FAIL: extra result"); end
      else begin
        h = qh.pop_front(); id = qi.pop_front();
        if (out_pkt_id != next_id || out_match != h || (h && out_rule_id != id)) begin
          failures++; $display("FAIL pkt %0d: m=%0d r=%0d want m=%0d r=%0d", next_id, out_match, out_rule_id, h, id);
        end
      end
      next_id++; n_out++;
    end
  end

  initial begin
    hdr_t h; bit hit; logic [15:0] id; int sent = 0, g = 0;
    rs = new();
    root_we = 0; root_wdata = '0; in_valid = 0; in_hdr = '0; ram_rdata = '0;
    rs.make(40, 0); rs.build(0);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); root_we = 1; root_wdata = rs.root; @(negedge clk); root_we = 0;
    h = rs.hdr_for(-1);
    while (sent < 2000) begin
      @(negedge clk);
      if (in_valid || $urandom % 3 != 0) begin in_valid = 1; in_hdr = h; end
      else in_valid = 0;
      if (in_valid && !in_ready) n_full++;
      if (in_valid && in_ready) begin
        hit = rs.classify(h, id); qh.push_back(hit); qi.push_back(id); sent++;
        case ($urandom % 4)
          0: h = rs.hdr_for(-1);
          1: begin h = rs.hdr_for(-1); h.sip[31:30] = 2'b11; h.dp[15] = 1'b0; end
          default: h = rs.hdr_for($urandom % rs.rules.size());
        endcase
      end
    end
    @(negedge clk); in_valid = 0;
    while (qh.size() != 0 && g < 5000) begin @(negedge clk); g++; end
    checks++;
    if (n_out != 2000) begin failures++; $display("FAIL: %0d results", n_out); end
    $display("results=%0d stored=%0d buffer_full=%0d", n_out, n_stored, n_full);
    checks++;
    if (n_stored == 0 || n_full == 0) failures++;
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
