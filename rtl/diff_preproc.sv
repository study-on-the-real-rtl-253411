// diff_preproc: differential pre-processing for long flat-topped signals.
//
// Two paths carry the sample stream: one straight, one through a one-sample delay
// register. Their difference, sample[n] - sample[n-1], is mostly near zero on the
// flat parts of the wave and is passed to the Huffman coder as a symbol item
// (wave_subtractor), tagged for the differential code table. The delay register is cleared at the start of every frame, so
// the first item of a frame is the raw first sample, as a difference from zero.
// The delay and the subtraction follow the paper; clearing per frame and the
// valid/ready handshake (one output register, one item per clock, stalls with
// out_ready) are this design's choices.
module diff_preproc
  import mpgd_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [SAMPLE_W-1:0] in_data,
  input  logic                in_last,
  output logic                out_valid,
  input  logic                out_ready,
  output huff_item_t          out_item
);
  logic [SAMPLE_W-1:0] prev;      // the delay path
  huff_item_t          diff_item, diff_tagged;

  assign in_ready = !out_valid || out_ready;

  wave_subtractor u_sub (
    .sample (in_data),
    .pred   (prev),
    .last   (in_last),
    .item   (diff_item)
  );

  // differences are coded with the narrow differential table
  always_comb begin
    diff_tagged     = diff_item;
    diff_tagged.tbl = TBL_DIFF;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev      <= '0;
      out_valid <= 1'b0;
      out_item  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_item <= diff_tagged;
        prev     <= in_last ? '0 : in_data;
      end
    end
  end

endmodule
