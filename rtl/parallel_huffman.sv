// parallel_huffman: the parallel Huffman module.
//
// One static-table core is too slow to code a symbol every clock, so N_CORES
// cores run side by side: the splitter deals the item stream to them in
// round-robin order, each core spends CORE_CYCLES clocks on its item, and the bit
// packer collects the codes in the same rotation and packs them into OUT_W-bit
// words. With N_CORES >= CORE_CYCLES the module codes one item per clock.
// Interface: item stream in (valid/ready, mpgd_pkg::huff_item_t, last marks the
// end of a frame); packed word stream out (valid/ready, last on a frame's final,
// zero-padded word).
// The structure (splitter, round robin, cores, round robin, bit packer) follows
// the paper; the core count, cycles per core and word width are this design's
// choices.
module parallel_huffman
  import mpgd_pkg::*;
#(
  parameter int unsigned N_CORES     = 4,
  parameter int unsigned CORE_CYCLES = 4,
  parameter int unsigned OUT_W       = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  huff_item_t       in_item,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_last
);
  logic [N_CORES-1:0] sp_valid, sp_ready;
  huff_item_t         sp_item;
  logic [N_CORES-1:0] cw_valid, cw_ready;
  code_word_t         cw_word [N_CORES];

  rr_splitter #(.N(N_CORES)) u_split (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_item,
    .out_valid (sp_valid), .out_ready (sp_ready), .out_item (sp_item)
  );

  for (genvar g = 0; g < N_CORES; g++) begin : g_core
    huffman_core #(.CORE_CYCLES(CORE_CYCLES)) u_core (
      .clk, .rst_n,
      .in_valid  (sp_valid[g]), .in_ready (sp_ready[g]), .in_item (sp_item),
      .out_valid (cw_valid[g]), .out_ready (cw_ready[g]), .out_word (cw_word[g])
    );
  end

  bit_packer #(.N(N_CORES), .OUT_W(OUT_W), .ACC_W(OUT_W + 2*BITS_W)) u_pack (
    .clk, .rst_n,
    .in_valid (cw_valid), .in_ready (cw_ready), .in_word (cw_word),
    .out_valid, .out_ready, .out_data, .out_last
  );

endmodule
