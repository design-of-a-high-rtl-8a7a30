// tb_memory_interface: four engines share one RAM port through the
// interface. The RAM model returns a word that is a known function of the
// address, one clock after a read. Each engine issues random reads in its
// own phase. In its next phase the word it sees must be the one for the
// address it asked for, or the previous one if it asked for nothing. The
// port must carry exactly the request of the engine whose phase it is.
module tb_memory_interface;
  import pc_pkg::*;

  localparam int NE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] phase;
  logic [NE-1:0] eng_req;
  addr_t eng_addr [NE];
  word_t eng_rdata [NE];
  logic ram_en; addr_t ram_addr; word_t ram_rdata;

  memory_interface #(.NUM_ENG(NE)) dut (.*);

  function automatic word_t f(addr_t a);
    return {10{a * 13'd7 + 13'd1, 19'(a) ^ 19'h5A5A5}};
  endfunction

  always_ff @(posedge clk) if (ram_en) ram_rdata <= f(ram_addr);

  int checks = 0, failures = 0, n_req = 0;
  word_t exp [NE];
  bit    have [NE];

  initial begin
    for (int k = 0; k < NE; k++) begin eng_addr[k] = '0; have[k] = 0; end
    eng_req = '0; phase = 0; ram_rdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // engine `phase` sees its data from its previous request
      if (have[phase]) begin
        checks++;
        if (eng_rdata[phase] != exp[phase]) begin failures++; $display("FAIL eng %0d at %0d", phase, t); end
      end
      eng_req = '0;
      if ($urandom % 4 != 0) begin
        eng_req[phase] = 1; eng_addr[phase] = addr_t'($urandom);
        exp[phase] = f(eng_addr[phase]); have[phase] = 1; n_req++;
      end
      // other engines' stale requests must not reach the port
      for (int k = 0; k < NE; k++) if (k != phase) begin
        eng_req[k] = $urandom % 2; eng_addr[k] = addr_t'($urandom);
      end
      #1;
      checks++;
      if (ram_en != eng_req[phase] || (ram_en && ram_addr != eng_addr[phase])) begin
        failures++; $display("FAIL port at %0d", t);
      end
      @(posedge clk); #1 phase = phase + 1;
    end
    $display("requests=%0d", n_req);
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
