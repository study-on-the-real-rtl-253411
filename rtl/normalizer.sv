// normalizer: normalising, aligning and comparing against the reference wave.
//
// For each frame in the input FIFO it takes the frame's peak (position P, value V)
// from the peak search and the reference's peak (position RP, value R). It then
// predicts every sample from the reference: the reference is shifted so that its
// peak lands on P and scaled so that its peak equals V, and the predicted value is
// subtracted from the sample (wave_subtractor). The resulting signed deltas go to
// the Huffman coder.
//
// Scaling: a gain K = floor(V * 2^FRAC / R) is computed once per frame by a
// restoring divider (FRAC+SAMPLE_W clocks; K = 0 when R = 0), and the prediction
// of sample i is  ref[i - P + RP] * K + 2^(FRAC-1) >> FRAC  (0 where i - P + RP
// falls outside the table, capped at 2^SAMPLE_W-1). Because a decoder that knows
// P and V can repeat exactly this arithmetic, every frame starts with a raw
// HDR_W-bit header item {V, P} and the scheme is lossless.
//
// The paper normalises the samples to the reference; scaling a sample by a
// non-integer gain cannot be undone exactly, so this design scales the reference
// to the sample instead, which compares the same two shapes and keeps all
// information. The header, the divider and the pipeline are this design's choices.
//
// Timing: after the peak result is taken, FRAC+SAMPLE_W+1 clocks of division, one
// header item, then one delta per clock through a two-stage pipeline (FIFO read and
// reference read, then scale and subtract). The whole pipeline stalls while
// out_valid && !out_ready.
module normalizer
  import mpgd_pkg::*;
#(
  parameter int unsigned REF_LEN = 512,
  parameter int unsigned FRAC  = 12,
  localparam int unsigned AW   = $clog2(REF_LEN)
) (
  input  logic                clk,
  input  logic                rst_n,
  // peak of the frame at the FIFO head
  input  logic                peak_valid,
  output logic                peak_ready,
  input  logic [AW-1:0]       peak_pos,
  input  logic [SAMPLE_W-1:0] peak_val,
  // FIFO read side: {last, sample}
  input  logic                fifo_valid,
  output logic                fifo_ready,
  input  logic [SAMPLE_W:0]   fifo_data,
  // reference wave
  output logic                ref_rd_en,
  output logic [AW-1:0]       ref_rd_addr,
  input  logic [SAMPLE_W-1:0] ref_rd_data,
  input  logic [AW-1:0]       ref_peak_pos,
  input  logic [SAMPLE_W-1:0] ref_peak_val,
  // items for the Huffman coder
  output logic                out_valid,
  input  logic                out_ready,
  output huff_item_t          out_item
);
  localparam int unsigned QW = FRAC + SAMPLE_W;    // gain width

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_HDR, S_RUN} state_e;
  state_e state;

  logic [AW-1:0]       p_pos;
  logic [SAMPLE_W-1:0] p_val;
  logic [QW-1:0]       gain;

  // restoring divider: (p_val << FRAC) / ref_peak_val
  logic [QW-1:0]       dividend;
  logic [SAMPLE_W-1:0] rem;     // always below the divisor
  logic [$clog2(QW+1)-1:0] div_cnt;
  logic [SAMPLE_W:0]   rem_sh;

  // pipeline
  logic                adv;
  logic                a_valid, a_last, a_inrange;
  logic [SAMPLE_W-1:0] a_sample;
  logic [AW-1:0]       idx;
  logic                seen_last;
  logic                pop;
  logic signed [AW+2:0] ref_idx;
  logic [SAMPLE_W+QW-1:0] prod;
  logic [SAMPLE_W+QW-1:0] scaled_full;
  logic [SAMPLE_W-1:0] pred;
  huff_item_t          delta_item;

  assign adv        = !out_valid || out_ready;
  assign peak_ready = (state == S_IDLE);
  assign pop        = adv && (state == S_RUN) && !seen_last && fifo_valid;
  assign fifo_ready = pop;

  assign ref_idx     = signed'({3'b000, idx}) - signed'({3'b000, p_pos}) + signed'({3'b000, ref_peak_pos});
  assign ref_rd_en   = adv;
  assign ref_rd_addr = ref_idx[AW-1:0];

  assign rem_sh      = {rem, dividend[QW-1]};

  assign prod        = SAMPLE_W'(ref_rd_data) * gain;
  assign scaled_full = (prod + (SAMPLE_W+QW)'(1 << (FRAC-1))) >> FRAC;
  always_comb begin
    if (!a_inrange)                             pred = '0;
    else if (scaled_full > (2**SAMPLE_W) - 1)   pred = '1;
    else                                        pred = scaled_full[SAMPLE_W-1:0];
  end

  wave_subtractor u_sub (
    .sample (a_sample),
    .pred   (pred),
    .last   (a_last),
    .item   (delta_item)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      p_pos     <= '0;
      p_val     <= '0;
      gain      <= '0;
      dividend  <= '0;
      rem       <= '0;
      div_cnt   <= '0;
      idx       <= '0;
      seen_last <= 1'b0;
      a_valid   <= 1'b0;
      a_last    <= 1'b0;
      a_inrange <= 1'b0;
      a_sample  <= '0;
      out_valid <= 1'b0;
      out_item  <= '0;
    end else begin
      case (state)
        S_IDLE: if (peak_valid) begin
          p_pos    <= peak_pos;
          p_val    <= peak_val;
          dividend <= QW'(peak_val) << FRAC;
          rem      <= '0;
          gain     <= '0;
          div_cnt  <= ($clog2(QW+1))'(QW);
          state    <= S_DIV;
        end
        S_DIV: begin
          if (div_cnt == 0) begin
            if (ref_peak_val == '0) gain <= '0;
            state <= S_HDR;
          end else begin
            div_cnt  <= div_cnt - 1'b1;
            dividend <= dividend << 1;
            if (rem_sh >= {1'b0, ref_peak_val}) begin
              rem  <= SAMPLE_W'(rem_sh - {1'b0, ref_peak_val});
              gain <= {gain[QW-2:0], 1'b1};
            end else begin
              rem  <= rem_sh[SAMPLE_W-1:0];
              gain <= {gain[QW-2:0], 1'b0};
            end
          end
        end
        S_HDR: if (adv) begin
          idx       <= '0;
          seen_last <= 1'b0;
          state     <= S_RUN;
        end
        S_RUN: if (adv && seen_last && !a_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase

      if (adv) begin
        // stage A: FIFO read, reference read issued (ref_rd_en = adv)
        a_valid <= pop;
        if (pop) begin
          a_sample  <= fifo_data[SAMPLE_W-1:0];
          a_last    <= fifo_data[SAMPLE_W];
          a_inrange <= (ref_idx >= 0) && (ref_idx < (AW+3)'(REF_LEN));
          idx       <= idx + 1'b1;
          if (fifo_data[SAMPLE_W]) seen_last <= 1'b1;
        end
        // stage B: scale, subtract, present
        if (state == S_HDR) begin
          out_valid       <= 1'b1;
          out_item        <= '0;
          out_item.is_raw <= 1'b1;
          out_item.data   <= RAW_W'({p_val, p_pos});
          out_item.nbits  <= LEN_W'(HDR_W);
          out_item.last   <= 1'b0;
        end else begin
          out_valid <= a_valid;
          out_item  <= delta_item;
        end
      end
    end
  end

endmodule
