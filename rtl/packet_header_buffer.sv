// packet_header_buffer: first-come, first-served queue of packet headers.
//
// Headers enter with a valid/ready handshake (in_valid && in_ready). Each
// one is stored with a packet ID: a PKT_ID_W-bit counter that goes up by
// one per header and wraps. The result sorter uses the ID to put the
// results back in arrival order. The head of the queue is always shown on
// out_hdr/out_pkt_id while out_valid is high. Pulsing out_pop takes it out
// in that clock. A header can enter and another leave in the same clock.
//
// The paper gives the FCFS order, the five stored fields and the packet ID.
// The depth (DEPTH) and the handshake are this design's choices.
module packet_header_buffer
  import pc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
)(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  hdr_t    in_hdr,
  output logic    out_valid,
  input  logic    out_pop,
  output hdr_t    out_hdr,
  output pkt_id_t out_pkt_id
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  hdr_t    q_hdr [DEPTH];
  pkt_id_t q_id  [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   count;
  pkt_id_t       next_id;
  logic push, pop;

  assign in_ready   = (count < (PW+1)'(DEPTH));
  assign out_valid  = (count != '0);
  assign out_hdr    = q_hdr[rd];
  assign out_pkt_id = q_id[rd];
  assign push = in_valid && in_ready;
  assign pop  = out_pop && out_valid;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd      <= '0;
      wr      <= '0;
      count   <= '0;
      next_id <= '0;
    end else begin
      if (push) begin
        wr      <= inc(wr);
        next_id <= next_id + pkt_id_t'(1);
      end
      if (pop) rd <= inc(rd);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      q_hdr[wr] <= in_hdr;
      q_id[wr]  <= next_id;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_pop |-> out_valid);

endmodule
