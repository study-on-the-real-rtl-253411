// reference_wave: store of the reference waveform for the micromegas mode.
//
// Holds one SAMPLE_W-bit reference value per sample position. The table is loaded
// through the write port before data taking (wr_en, wr_addr, wr_data, one entry per
// clock) and read through a registered port: rd_data shows mem[rd_addr] the clock
// after rd_en. While loading, the module also tracks the largest value written
// since reset and its position (first one on ties); the normaliser scales and
// aligns the reference with these. Load the table once after reset.
// That the reference is kept in the FPGA follows the paper; the write port, the
// registered read and the peak tracking are this design's choices.
module reference_wave #(
  parameter int unsigned NSAMP    = 512,
  parameter int unsigned SAMPLE_W = 12,
  localparam int unsigned AW      = $clog2(NSAMP)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [SAMPLE_W-1:0] wr_data,
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr,
  output logic [SAMPLE_W-1:0] rd_data,
  output logic [AW-1:0]       peak_pos,
  output logic [SAMPLE_W-1:0] peak_val
);
  logic [SAMPLE_W-1:0] mem [NSAMP];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      peak_pos <= '0;
      peak_val <= '0;
    end else if (wr_en && wr_data > peak_val) begin
      peak_pos <= wr_addr;
      peak_val <= wr_data;
    end
  end

endmodule
