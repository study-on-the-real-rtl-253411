// bit_packer: round-robin collector and bit packer of the parallel Huffman coder.
//
// Takes coded words from the N cores in the same rotation the splitter used, so
// codes leave in input order, and appends them MSB first to an ACC_W-bit shift
// accumulator. Each clock at most one OUT_W-bit word leaves: the oldest OUT_W bits
// once that many are held. When the last code of a frame is taken, zero bits are
// appended at once up to the next word boundary, and a counter (eof_bits) notes
// how many held bits remain up to that boundary; the word that empties it is
// flagged out_last. Codes of the next frame may follow immediately. A code is
// taken only while the accumulator has room for the widest code (BITS_W bits),
// otherwise the cores wait (backpressure); a second frame end is held back until
// the first one's last word has left.
// Timing: a code taken at edge t can appear in the word offered from edge t+1.
// The round-robin collection and the packer follow the paper; word width, bit
// order and padding are this design's choices.
module bit_packer
  import mpgd_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned ACC_W = 96    // >= OUT_W + 2*BITS_W rounded to OUT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     in_valid,
  output logic [N-1:0]     in_ready,
  input  code_word_t       in_word [N],
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_last
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned CW = $clog2(ACC_W + 1);

  logic [PW-1:0]    turn;
  logic [ACC_W-1:0] acc;        // valid bits are acc[cnt-1:0], oldest at the top
  logic [CW-1:0]    cnt;
  logic             eof_pending;
  logic [CW-1:0]    eof_bits;   // held bits up to the end of the pending frame
  logic             room, accept, take, emit;
  code_word_t       cur;
  logic [CW-1:0]    cnt_after, sum, padded;
  logic [ACC_W-1:0] acc_sh, acc_new;

  assign cur    = in_word[turn];
  assign room   = (cnt + CW'(BITS_W)) <= CW'(ACC_W);
  assign emit   = (!out_valid || out_ready) && (cnt >= CW'(OUT_W));
  assign accept = room && !(cur.last && eof_pending);
  assign take   = in_valid[turn] && accept;

  always_comb begin
    in_ready       = '0;
    in_ready[turn] = accept;
  end

  always_comb begin
    acc_sh    = acc >> (cnt - CW'(OUT_W));
    cnt_after = emit ? cnt - CW'(OUT_W) : cnt;
    sum       = cnt_after + CW'(cur.len);
    padded    = (sum + CW'(OUT_W - 1)) & ~CW'(OUT_W - 1);    // OUT_W is a power of two
    acc_new   = (acc << cur.len) | ACC_W'(cur.bits);
    if (cur.last) acc_new = acc_new << (padded - sum);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      turn        <= '0;
      acc         <= '0;
      cnt         <= '0;
      eof_pending <= 1'b0;
      eof_bits    <= '0;
      out_valid   <= 1'b0;
      out_data    <= '0;
      out_last    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      cnt <= cnt_after;
      if (emit) begin
        out_valid <= 1'b1;
        out_data  <= acc_sh[OUT_W-1:0];
        out_last  <= eof_pending && (eof_bits == CW'(OUT_W));
        if (eof_pending) begin
          eof_bits <= eof_bits - CW'(OUT_W);
          if (eof_bits == CW'(OUT_W)) eof_pending <= 1'b0;
        end
      end
      if (take) begin
        acc  <= acc_new;
        turn <= (turn == PW'(N-1)) ? '0 : turn + 1'b1;
        if (cur.last) begin
          cnt         <= padded;
          eof_pending <= 1'b1;
          eof_bits    <= padded;
        end else begin
          cnt <= sum;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));

endmodule
