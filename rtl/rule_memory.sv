// rule_memory: the on-chip block RAM that holds the search structure.
//
// One array of 2**ADDR_W words of WORD_W bits holds child-pointer words,
// internal-node words and leaf words (two rules each). Ports A and B are
// synchronous read ports: the word addressed in a clock with the port's
// enable high appears on its rdata in the next clock and stays there until
// the next read. Port A serves classifier side A and port B side B. A
// separate synchronous write port loads the structure. It is meant to be
// used while the classifier is idle; a read of the word written in the same
// clock returns the old contents.
//
// The paper gives only that the decision tree and rules live in the FPGA's
// block memory, which both sides share through separate data ports. The
// depth and the write port are this design's choices.
module rule_memory
  import pc_pkg::*;
#(
  parameter int unsigned AW = ADDR_W
)(
  input  logic            clk,
  input  logic            a_en,
  input  logic [AW-1:0]   a_addr,
  output word_t           a_rdata,
  input  logic            b_en,
  input  logic [AW-1:0]   b_addr,
  output word_t           b_rdata,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  word_t           wdata
);

  word_t mem [2**AW];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
