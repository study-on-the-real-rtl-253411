// huffman_core: one static-table Huffman encoder of the parallel coder.
//
// Codes one item per CORE_CYCLES clocks. An accepted item is held in a register;
// the table look-up (mpgd_pkg::huff_encode: table code, escape code + 13-bit
// difference, or raw literal) is plain combinational logic from that register and
// is captured CORE_CYCLES-1 clocks later, so it may be constrained as a
// multicycle path and run much slower than the system clock. The coded word is
// then offered on out_valid/out_word; a new item is accepted in the same clock the
// word is taken.
// Interface: in_valid/in_ready/in_item, out_valid/out_ready/out_word.
// Timing: item accepted at clock edge t, word valid from edge t+CORE_CYCLES-1.
// A static look-up in slow combinational logic follows the paper; the cycle count
// and the handshake are this design's choices.
module huffman_core
  import mpgd_pkg::*;
#(
  parameter int unsigned CORE_CYCLES = 4    // >= 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  huff_item_t in_item,
  output logic       out_valid,
  input  logic       out_ready,
  output code_word_t out_word
);
  typedef enum logic [1:0] {C_IDLE, C_BUSY, C_DONE} cstate_e;
  cstate_e state;

  localparam int unsigned CW = $clog2(CORE_CYCLES);

  huff_item_t item_q;
  logic [CW-1:0] cnt;
  code_word_t    lookup;

  assign lookup    = huff_encode(item_q);     // multicycle combinational path
  assign out_valid = (state == C_DONE);
  assign in_ready  = (state == C_IDLE) || (state == C_DONE && out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      item_q   <= '0;
      cnt      <= '0;
      out_word <= '0;
    end else begin
      if (state == C_DONE && out_ready) state <= C_IDLE;
      if (state == C_BUSY) begin
        if (cnt == '0) begin
          out_word <= lookup;
          state    <= C_DONE;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        item_q <= in_item;
        cnt    <= CW'(CORE_CYCLES - 2);
        state  <= C_BUSY;
      end
    end
  end

  // an offered word stays put until it is taken
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
