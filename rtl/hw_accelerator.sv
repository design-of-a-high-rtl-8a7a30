// hw_accelerator: top level of the packet classification accelerator.
//
// One dual-port block RAM holds the decision tree and the rules. It serves
// two classifier sides, A on port A and B on port B. Each side has its own
// header buffer, NUM_ENG engines and result sorter. The RAM runs at the
// clock rate. A free-running phase counter (0..NUM_ENG-1) gives each engine
// one RAM access per NUM_ENG clocks, in its own phase, so both ports carry a
// request every clock while engines are busy. The root node is written once
// into the registers of every engine (root_we/root_wdata). The rest of the
// tree is written through the memory write port (mem_we/mem_waddr/
// mem_wdata). Both should be loaded while no packet is in flight.
//
// Per side s (index 0 = A, 1 = B): headers enter on in_valid[s]/in_ready[s]/
// in_hdr[s]. Results leave in packet order on out_valid[s] with out_match[s],
// out_rule_id[s] and the packet ID out_pkt_id[s] (4 bits, wraps, counted
// per side from reset). There is no output back-pressure.
//
// The structure follows the paper's accelerator diagram: a shared memory and
// memory interface, two buffers, 2 x 4 engines and two sorters. The clock
// enables in place of phase-shifted clocks, and the loading ports, are this
// design's choices.
module hw_accelerator
  import pc_pkg::*;
#(
  parameter int unsigned NUM_ENG    = 4,
  parameter int unsigned BUF_DEPTH  = 16,
  localparam int unsigned SIDES     = 2,
  localparam int unsigned PH_W      = (NUM_ENG > 1) ? $clog2(NUM_ENG) : 1
)(
  input  logic                clk,
  input  logic                rst_n,
  // loading
  input  logic                root_we,
  input  node_t               root_wdata,
  input  logic                mem_we,
  input  addr_t               mem_waddr,
  input  word_t               mem_wdata,
  // headers
  input  logic    [SIDES-1:0] in_valid,
  output logic    [SIDES-1:0] in_ready,
  input  hdr_t    [SIDES-1:0] in_hdr,
  // results
  output logic    [SIDES-1:0] out_valid,
  output logic    [SIDES-1:0] out_match,
  output rule_id_t [SIDES-1:0] out_rule_id,
  output pkt_id_t [SIDES-1:0] out_pkt_id
);

  logic [PH_W-1:0] phase;
  logic  [SIDES-1:0] ram_en;
  addr_t ram_addr  [SIDES];
  word_t ram_rdata [SIDES];
  logic  [SIDES-1:0] sort_stored;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           phase <= '0;
    else if (phase == PH_W'(NUM_ENG - 1)) phase <= '0;
    else                                  phase <= phase + PH_W'(1);
  end

  rule_memory u_mem (
    .clk,
    .a_en(ram_en[0]), .a_addr(ram_addr[0]), .a_rdata(ram_rdata[0]),
    .b_en(ram_en[1]), .b_addr(ram_addr[1]), .b_rdata(ram_rdata[1]),
    .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata)
  );

  for (genvar s = 0; s < SIDES; s++) begin : g_side
    classifier_side #(.NUM_ENG(NUM_ENG), .BUF_DEPTH(BUF_DEPTH)) u_side (
      .clk, .rst_n, .phase,
      .root_we, .root_wdata,
      .in_valid(in_valid[s]), .in_ready(in_ready[s]), .in_hdr(in_hdr[s]),
      .ram_en(ram_en[s]), .ram_addr(ram_addr[s]), .ram_rdata(ram_rdata[s]),
      .out_valid(out_valid[s]), .out_match(out_match[s]),
      .out_rule_id(out_rule_id[s]), .out_pkt_id(out_pkt_id[s]),
      .sort_stored(sort_stored[s])
    );
  end

endmodule
