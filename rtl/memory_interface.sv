// memory_interface: shares one block-RAM data port among the engines of
// one side.
//
// The RAM runs NUM_ENG times as fast as an engine. Engine k owns the port in
// phase k of the phase counter (its clock enable), so the RAM gets a request
// every clock. In phase k this block drives engine k's request onto the
// port. The RAM answers one clock later. The data goes straight to engine k
// in that clock and is also held in engine k's own data register until
// engine k's next phase. Each engine therefore sees an ordinary synchronous
// memory with one engine cycle of read latency.
//
// The paper gives the idea of engines phase-shifted against a faster RAM.
// This design's choice is to express the phase shift as clock enables on
// one clock, not as separate phase-shifted clocks.
module memory_interface
  import pc_pkg::*;
#(
  parameter int unsigned NUM_ENG = 4,
  localparam int unsigned PH_W   = (NUM_ENG > 1) ? $clog2(NUM_ENG) : 1
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [PH_W-1:0]  phase,
  input  logic [NUM_ENG-1:0] eng_req,
  input  addr_t            eng_addr  [NUM_ENG],
  output word_t            eng_rdata [NUM_ENG],
  output logic             ram_en,
  output addr_t            ram_addr,
  input  word_t            ram_rdata
);

  logic [PH_W-1:0] phase_q;
  logic            en_q;
  word_t           held [NUM_ENG];

  assign ram_en   = eng_req[phase];
  assign ram_addr = eng_addr[phase];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q <= '0;
      en_q    <= 1'b0;
    end else begin
      phase_q <= phase;
      en_q    <= ram_en;
    end
  end

  always_ff @(posedge clk) begin
    if (en_q) held[phase_q] <= ram_rdata;
  end

  always_comb begin
    for (int k = 0; k < NUM_ENG; k++) begin
      eng_rdata[k] = (en_q && (phase_q == PH_W'(k))) ? ram_rdata : held[k];
    end
  end

endmodule
