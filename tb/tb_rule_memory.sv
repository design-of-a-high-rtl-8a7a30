// tb_rule_memory: fills a random set of addresses through the write port,
// then reads them through ports A and B at once, in random order, with
// random enables. A port's data must be the word last written at the
// address it read, and it must stay unchanged while the port is not
// enabled.
module tb_rule_memory;
  import pc_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en, b_en, we;
  addr_t a_addr, b_addr, waddr;
  word_t a_rdata, b_rdata, wdata;

  rule_memory dut (.*);

  int checks = 0, failures = 0;
  word_t model [int];
  int addrs[$];

  function automatic word_t rnd_word();
    word_t w;
    for (int i = 0; i < WORD_W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    word_t ea, eb; int a, b;
    a_en = 0; b_en = 0; we = 0; a_addr = '0; b_addr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      a = $urandom % (1 << ADDR_W);
      we = 1; waddr = addr_t'(a); wdata = rnd_word();
      model[a] = wdata;
      addrs.push_back(a);
    end
    @(negedge clk); we = 0;
    // make sure the last address is read too
    ea = model[addrs[0]]; eb = model[addrs[0]];
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      a_en = (t == 0) || ($urandom % 4 != 0); b_en = (t == 0) || ($urandom % 4 != 0);
      a = addrs[$urandom % addrs.size()]; b = addrs[$urandom % addrs.size()];
      a_addr = addr_t'(a); b_addr = addr_t'(b);
      @(posedge clk); #1;
      if (a_en) ea = model[a];
      if (b_en) eb = model[b];
      if (t > 0) begin
        checks += 2;
        if (a_rdata != ea) begin failures++; $display("FAIL A at %0d", t); end
        if (b_rdata != eb) begin failures++; $display("FAIL B at %0d", t); end
      end
    end
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
