// sample_fifo: input buffer of the reference-wave compressor.
//
// Incoming ADC words are cached here while the peak of their frame is searched;
// the normaliser reads a frame only once its peak is known. Synchronous FIFO with
// first-word fall-through: out_data shows the oldest word whenever out_valid is
// high, and a word leaves on out_valid && out_ready. A word enters on
// in_valid && in_ready. The store is a plain array read asynchronously; pointers
// carry one extra bit to tell full from empty. Reset empties the FIFO.
// Caching the data in a FIFO follows the paper; the depth (two 512-sample frames,
// so one frame can arrive while the previous one is processed) and the handshake
// are this design's choices.
module sample_fifo #(
  parameter int unsigned WIDTH = 13,
  parameter int unsigned DEPTH = 1024   // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (wr_ptr - rd_ptr) != (AW+1)'(DEPTH);
  assign out_valid = wr_ptr != rd_ptr;
  assign out_data  = mem[rd_ptr[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

endmodule
