// ebpc_top: EBPC compressor and decompressor as a pair.
//
// An accelerator that writes feature maps (or gradient maps) to external or
// background memory compresses them on the way out and decompresses them on
// the way back in. This top holds one ebpc_compressor (c_* ports) and one
// ebpc_decompressor (d_* ports) on a common clock and reset. Each side
// produces or consumes two compressed byte streams, the Zero-RLE stream and
// the bit-plane stream, which are kept apart as in the paper; the memory or
// bus that stores them is outside this design.
//
// Parameters: WORD_W-bit data words (8), BLOCK_N words per bit-plane block
// (8), MAX_ZBURST longest zero burst per Zero-RLE symbol (16), BUS_W-bit
// compressed bus words (8); all are the paper's main configuration.
// Throughput: up to one word per cycle on each side, 0.8 words per cycle in
// the worst case of no zeros. The symbol-class outputs are for statistics.
module ebpc_top
  import ebpc_pkg::*;
#(
  parameter int unsigned WORD_W     = 8,
  parameter int unsigned BLOCK_N    = 8,
  parameter int unsigned MAX_ZBURST = 16,
  parameter int unsigned BUS_W      = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              c_clear_i,
  input  logic              c_in_valid_i,
  output logic              c_in_ready_o,
  input  logic [WORD_W-1:0] c_in_data_i,
  input  logic              c_in_last_i,
  output logic              c_zrle_valid_o,
  input  logic              c_zrle_ready_i,
  output logic [BUS_W-1:0]  c_zrle_data_o,
  output logic              c_zrle_last_o,
  output logic              c_bpc_valid_o,
  input  logic              c_bpc_ready_i,
  output logic [BUS_W-1:0]  c_bpc_data_o,
  output logic              c_bpc_last_o,
  output logic              c_sym_fire_o,
  output sym_kind_e         c_sym_kind_o,
  input  logic              d_clear_i,
  input  logic              d_zrle_valid_i,
  output logic              d_zrle_ready_o,
  input  logic [BUS_W-1:0]  d_zrle_data_i,
  input  logic              d_bpc_valid_i,
  output logic              d_bpc_ready_o,
  input  logic [BUS_W-1:0]  d_bpc_data_i,
  output logic              d_out_valid_o,
  input  logic              d_out_ready_i,
  output logic [WORD_W-1:0] d_out_data_o,
  output logic              d_sym_fire_o,
  output sym_kind_e         d_sym_kind_o
);
  ebpc_compressor #(
    .WORD_W(WORD_W), .BLOCK_N(BLOCK_N), .MAX_ZBURST(MAX_ZBURST), .BUS_W(BUS_W)
  ) i_comp (
    .clk_i, .rst_ni, .clear_i (c_clear_i),
    .in_valid_i (c_in_valid_i), .in_ready_o (c_in_ready_o),
    .in_data_i (c_in_data_i), .in_last_i (c_in_last_i),
    .zrle_valid_o (c_zrle_valid_o), .zrle_ready_i (c_zrle_ready_i),
    .zrle_data_o (c_zrle_data_o), .zrle_last_o (c_zrle_last_o),
    .bpc_valid_o (c_bpc_valid_o), .bpc_ready_i (c_bpc_ready_i),
    .bpc_data_o (c_bpc_data_o), .bpc_last_o (c_bpc_last_o),
    .bpc_sym_fire_o (c_sym_fire_o), .bpc_sym_kind_o (c_sym_kind_o)
  );

  ebpc_decompressor #(
    .WORD_W(WORD_W), .BLOCK_N(BLOCK_N), .MAX_ZBURST(MAX_ZBURST), .BUS_W(BUS_W)
  ) i_decomp (
    .clk_i, .rst_ni, .clear_i (d_clear_i),
    .zrle_valid_i (d_zrle_valid_i), .zrle_ready_o (d_zrle_ready_o), .zrle_data_i (d_zrle_data_i),
    .bpc_valid_i (d_bpc_valid_i), .bpc_ready_o (d_bpc_ready_o), .bpc_data_i (d_bpc_data_i),
    .out_valid_o (d_out_valid_o), .out_ready_i (d_out_ready_i), .out_data_o (d_out_data_o),
    .bpc_sym_fire_o (d_sym_fire_o), .bpc_sym_kind_o (d_sym_kind_o)
  );
endmodule
