// peak_search: peak searching module of the reference-wave compressor.
//
// Watches the samples as they are written into the input FIFO and keeps the
// largest value of the current frame and its position (sample index from 0; on
// equal values the first one wins). When the frame's last sample is accepted, the
// result is held on res_pos/res_val with res_valid until res_ready takes it.
// A frame whose last sample arrives while the previous result is still unread is
// held back by in_ready going low for that one sample; every other sample is
// accepted at once. Result is valid the clock after the last sample is accepted.
// Searching for peak position and value follows the paper; doing it on the write
// side of the FIFO and the tie rule are this design's choices.
module peak_search #(
  parameter int unsigned SAMPLE_W = 12,
  parameter int unsigned POS_W    = 9
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [SAMPLE_W-1:0] in_data,
  input  logic                in_last,
  output logic                res_valid,
  input  logic                res_ready,
  output logic [POS_W-1:0]    res_pos,
  output logic [SAMPLE_W-1:0] res_val
);
  logic [POS_W-1:0]    idx, max_pos;
  logic [SAMPLE_W-1:0] max_val;
  logic                first;      // next sample starts a frame
  logic                fire, better;
  logic                res_free;

  assign res_free = !res_valid || res_ready;
  assign in_ready = !in_last || res_free;
  assign fire     = in_valid && in_ready;
  assign better   = first || (in_data > max_val);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx       <= '0;
      max_pos   <= '0;
      max_val   <= '0;
      first     <= 1'b1;
      res_valid <= 1'b0;
      res_pos   <= '0;
      res_val   <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (fire) begin
        if (in_last) begin
          res_valid <= 1'b1;
          res_pos   <= better ? idx : max_pos;
          res_val   <= better ? in_data : max_val;
          idx       <= '0;
          first     <= 1'b1;
        end else begin
          idx   <= idx + 1'b1;
          first <= 1'b0;
          if (better) begin
            max_val <= in_data;
            max_pos <= idx;
          end
        end
      end
    end
  end

endmodule
