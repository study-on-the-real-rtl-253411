// wave_subtractor: the subtraction node of both pre-processing chains.
//
// Forms sample - pred as a signed DELTA_W-bit difference and wraps it as a symbol
// item for the Huffman coder (is_raw = 0, difference sign-extended into data).
// In the micromegas chain pred is the aligned, scaled reference value; in the
// PandaX-III chain it is the previous sample. Purely combinational.
// The subtraction follows the paper; passing the full 13-bit difference on (rather
// than clipping it to 8 bits) is this design's choice, so the coder can escape
// large values and stay lossless.
module wave_subtractor
  import mpgd_pkg::*;
(
  input  logic [SAMPLE_W-1:0] sample,
  input  logic [SAMPLE_W-1:0] pred,     // unsigned prediction
  input  logic                last,
  output huff_item_t          item
);
  logic signed [SAMPLE_W+1:0] diff;

  assign diff = signed'({2'b00, sample}) - signed'({2'b00, pred});

  always_comb begin
    item        = '0;
    item.is_raw = 1'b0;
    item.tbl    = TBL_REF;        // diff_preproc retags its items
    item.data   = RAW_W'(diff);            // sign extension
    item.nbits  = LEN_W'(DELTA_W);
    item.last   = last;
  end

endmodule
