// tb_packet_header_buffer: random pushes and pops, with bursts that fill
// the queue and bursts that empty it. Headers must come out in the order
// they went in, each with a packet ID one above the previous (mod 16).
// in_ready must drop exactly when DEPTH headers are held, and out_valid
// exactly when none are.
module tb_packet_header_buffer;
  import pc_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_pop;
  hdr_t in_hdr, out_hdr; pkt_id_t out_pkt_id;

  packet_header_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  hdr_t q[$];
  int   n_pushed = 0, n_popped = 0;

  initial begin
    int push_p, pop_p;
    in_valid = 0; out_pop = 0; in_hdr = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      // phases: fill, drain, random
      push_p = ((t / 300) % 3 == 0) ? 90 : ((t / 300) % 3 == 1) ? 10 : 50;
      pop_p  = 100 - push_p;
      @(negedge clk);
      in_valid = ($urandom % 100) < push_p;
      in_hdr   = {$urandom, $urandom, $urandom, 8'($urandom)};
      out_pop  = (($urandom % 100) < pop_p) && out_valid;
      #1;
      checks += 2;
      if (in_ready != (q.size() < DEPTH)) begin failures++; $display("FAIL in_ready at %0d", q.size()); end
      if (out_valid != (q.size() > 0))    begin failures++; $display("FAIL out_valid at %0d", q.size()); end
      if (!in_ready) n_full++;
      if (!out_valid) n_empty++;
      if (out_pop) begin
        checks++;
        if (out_hdr != q[0] || out_pkt_id != 4'(n_popped)) begin
          failures++; $display("FAIL pop %0d", n_popped);
        end
        void'(q.pop_front()); n_popped++;
      end
      if (in_valid && in_ready) begin q.push_back(in_hdr); n_pushed++; end
    end
    $display("pushed=%0d popped=%0d full=%0d empty=%0d", n_pushed, n_popped, n_full, n_empty);
    checks++;
    if (n_full == 0 || n_empty == 0) failures++;
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
