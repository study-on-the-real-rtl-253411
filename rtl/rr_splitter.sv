// rr_splitter: round-robin splitter in front of the parallel Huffman cores.
//
// Item k of the input stream goes to output (k mod N): the input is offered only
// to the output whose turn it is, and the turn moves on when that output takes it.
// A busy core therefore stalls the stream rather than being skipped, which keeps
// the order fixed so the bit packer can collect the codes in the same rotation.
// Combinational apart from the turn pointer, which reset sets to output 0.
// The splitter and its round-robin order follow the paper; the strict rotation
// and the handshake are this design's choices.
module rr_splitter
  import mpgd_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  huff_item_t   in_item,
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output huff_item_t   out_item
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] turn;

  assign out_item = in_item;
  assign in_ready = out_ready[turn];

  always_comb begin
    out_valid       = '0;
    out_valid[turn] = in_valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) turn <= '0;
    else if (in_valid && in_ready) turn <= (turn == PW'(N-1)) ? '0 : turn + 1'b1;
  end

endmodule
