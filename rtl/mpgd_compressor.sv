// mpgd_compressor: real-time lossless compressor for MPGD waveform readout.
//
// Frames of 12-bit ADC samples (one frame = one channel's waveform, up to NSAMP
// samples, s_last on the final one) are turned into small signed differences and
// coded with a static Huffman table by a parallel coder that takes one item per
// clock. Two pre-processing chains exist, chosen by the static 'mode' input:
//   MODE_REF_DELTA (0), for quasi-Gaussian pulses: samples are cached in a FIFO
//     while their peak is searched; the stored reference wave is then aligned to
//     the peak position and scaled to the peak value, and sample - reference is
//     coded. Each coded frame starts with a raw 21-bit header {peak value, peak
//     position} so that a decoder can rebuild the same reference.
//   MODE_DIFF (1), for long flat-topped pulses: sample[n] - sample[n-1] is coded.
// The reference wave is loaded through ref_wr_* before data taking. The output is
// a stream of 32-bit words, MSB first; the last word of each frame is zero padded
// and flagged m_last. All streams use valid/ready; s_ready and m_ready give
// backpressure in both directions.
// Timing: about one sample per clock in both modes; in MODE_REF_DELTA a frame's
// first code follows its last input sample by the 25-clock gain division plus a
// few pipeline clocks.
// The two chains and the parallel coder follow the paper, which builds the two
// chains as separate FPGA designs; putting both in one top behind a mode input
// that may only change while no frame is in flight is this design's choice.
module mpgd_compressor
  import mpgd_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH  = 1024,
  parameter int unsigned N_CORES     = 4,
  parameter int unsigned CORE_CYCLES = 4,
  localparam int unsigned AW         = POS_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mode,          // mode_e
  // sample stream
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [SAMPLE_W-1:0] s_data,
  input  logic                s_last,
  // reference wave load port
  input  logic                ref_wr_en,
  input  logic [AW-1:0]       ref_wr_addr,
  input  logic [SAMPLE_W-1:0] ref_wr_data,
  // compressed word stream
  output logic                m_valid,
  input  logic                m_ready,
  output logic [31:0]         m_data,
  output logic                m_last
);
  mode_e mode_q;
  assign mode_q = mode_e'(mode);

  // ---- reference-wave chain ------------------------------------------------
  logic                rf_valid, fifo_in_ready, pk_in_ready, rf_fire;
  logic                fifo_out_valid, fifo_out_ready;
  logic [SAMPLE_W:0]   fifo_out_data;
  logic                pk_valid, pk_ready;
  logic [AW-1:0]       pk_pos;
  logic [SAMPLE_W-1:0] pk_val;
  logic                ref_rd_en;
  logic [AW-1:0]       ref_rd_addr, ref_peak_pos;
  logic [SAMPLE_W-1:0] ref_rd_data, ref_peak_val;
  logic                nm_valid, nm_ready;
  huff_item_t          nm_item;

  assign rf_valid = s_valid && (mode_q == MODE_REF_DELTA);
  assign rf_fire  = rf_valid && fifo_in_ready && pk_in_ready;

  sample_fifo #(.WIDTH(SAMPLE_W+1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid  (rf_fire), .in_ready (fifo_in_ready), .in_data ({s_last, s_data}),
    .out_valid (fifo_out_valid), .out_ready (fifo_out_ready), .out_data (fifo_out_data)
  );

  peak_search #(.SAMPLE_W(SAMPLE_W), .POS_W(AW)) u_peak (
    .clk, .rst_n,
    .in_valid  (rf_valid && fifo_in_ready), .in_ready (pk_in_ready),
    .in_data   (s_data), .in_last (s_last),
    .res_valid (pk_valid), .res_ready (pk_ready), .res_pos (pk_pos), .res_val (pk_val)
  );

  reference_wave #(.NSAMP(NSAMP), .SAMPLE_W(SAMPLE_W)) u_ref (
    .clk, .rst_n,
    .wr_en   (ref_wr_en), .wr_addr (ref_wr_addr), .wr_data (ref_wr_data),
    .rd_en   (ref_rd_en), .rd_addr (ref_rd_addr), .rd_data (ref_rd_data),
    .peak_pos (ref_peak_pos), .peak_val (ref_peak_val)
  );

  normalizer #(.REF_LEN(NSAMP)) u_norm (
    .clk, .rst_n,
    .peak_valid (pk_valid), .peak_ready (pk_ready), .peak_pos (pk_pos), .peak_val (pk_val),
    .fifo_valid (fifo_out_valid), .fifo_ready (fifo_out_ready), .fifo_data (fifo_out_data),
    .ref_rd_en, .ref_rd_addr, .ref_rd_data, .ref_peak_pos, .ref_peak_val,
    .out_valid (nm_valid), .out_ready (nm_ready), .out_item (nm_item)
  );

  // ---- differential chain --------------------------------------------------
  logic       df_in_ready, df_valid, df_ready;
  huff_item_t df_item;

  diff_preproc u_diff (
    .clk, .rst_n,
    .in_valid  (s_valid && (mode_q == MODE_DIFF)), .in_ready (df_in_ready),
    .in_data   (s_data), .in_last (s_last),
    .out_valid (df_valid), .out_ready (df_ready), .out_item (df_item)
  );

  assign s_ready = (mode_q == MODE_DIFF) ? df_in_ready : (fifo_in_ready && pk_in_ready);

  // ---- shared parallel Huffman coder ---------------------------------------
  logic       hf_valid, hf_ready;
  huff_item_t hf_item;

  always_comb begin
    if (mode_q == MODE_DIFF) begin
      hf_valid = df_valid;
      hf_item  = df_item;
    end else begin
      hf_valid = nm_valid;
      hf_item  = nm_item;
    end
  end
  assign nm_ready = hf_ready && (mode_q == MODE_REF_DELTA);
  assign df_ready = hf_ready && (mode_q == MODE_DIFF);

  parallel_huffman #(.N_CORES(N_CORES), .CORE_CYCLES(CORE_CYCLES), .OUT_W(32)) u_huff (
    .clk, .rst_n,
    .in_valid  (hf_valid), .in_ready (hf_ready), .in_item (hf_item),
    .out_valid (m_valid), .out_ready (m_ready), .out_data (m_data), .out_last (m_last)
  );

endmodule
