// ebpc_compressor: extended bit-plane compressor (EBPC) for a stream of
// fixed-point words, e.g. CNN feature maps or gradient maps.
//
// Two paths work in parallel on the input stream:
//   * Zero-RLE: each word is tested for zero; the zero/non-zero pattern is
//     run-length coded (ebpc_zrle_enc) and packed into the ZRLE bus stream.
//   * Bit-plane: the non-zero words only are grouped into blocks of BLOCK_N
//     (ebpc_delta_xform), held in a depth-1 FIFO (ebpc_block_fifo), coded
//     plane by plane (ebpc_bp_encoder) and packed into the BPC bus stream.
// The two streams leave on separate BUS_W-bit ports, as in the paper; they
// are not merged.
//
// Interface: valid/ready on every port. in_last_i marks the final word of a
// stream; both output streams then end with a zero-padded word flagged by
// *_last_o (a stream that holds no bits ends without a flagged word).
// bpc_sym_fire_o/bpc_sym_kind_o report each bit-plane symbol's class for
// statistics; they do not affect the streams.
// in_ready_o depends on whether the offered word is zero: a zero word needs
// only the Zero-RLE path, so zeros keep flowing while the bit-plane path is
// busy with a block.
//
// Rate: the bit-plane path takes up to 10 cycles per block of 8 non-zero
// 8-bit words (0.8 words/cycle); zero words cost one cycle each, and a
// non-zero word that ends a zero burst costs one extra cycle.
module ebpc_compressor
  import ebpc_pkg::*;
#(
  parameter int unsigned WORD_W     = 8,
  parameter int unsigned BLOCK_N    = 8,
  parameter int unsigned MAX_ZBURST = 16,
  parameter int unsigned BUS_W      = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              clear_i,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  logic [WORD_W-1:0] in_data_i,
  input  logic              in_last_i,
  output logic              zrle_valid_o,
  input  logic              zrle_ready_i,
  output logic [BUS_W-1:0]  zrle_data_o,
  output logic              zrle_last_o,
  output logic              bpc_valid_o,
  input  logic              bpc_ready_i,
  output logic [BUS_W-1:0]  bpc_data_o,
  output logic              bpc_last_o,
  output logic              bpc_sym_fire_o,
  output sym_kind_e         bpc_sym_kind_o
);
  localparam int unsigned D_W   = WORD_W + 1;
  localparam int unsigned DLT_W = (BLOCK_N - 1) * D_W;
  localparam int unsigned FIFO_W = WORD_W + DLT_W + 2;
  localparam int unsigned ZC_W   = $clog2(MAX_ZBURST);
  localparam int unsigned ZSYM_W = 1 + ZC_W;
  localparam int unsigned ZLEN_W = $clog2(ZSYM_W + 1);
  // Longest bit-plane symbol (see ebpc_bp_encoder).
  localparam int unsigned L_MULTI = 3 + $clog2(WORD_W);
  localparam int unsigned L_ONE   = 5 + $clog2(BLOCK_N - 1);
  localparam int unsigned L_RAW   = BLOCK_N;
  localparam int unsigned BSYM_W  = (WORD_W > L_RAW ? WORD_W : L_RAW) > (L_ONE > L_MULTI ? L_ONE : L_MULTI)
                                  ? (WORD_W > L_RAW ? WORD_W : L_RAW) : (L_ONE > L_MULTI ? L_ONE : L_MULTI);
  localparam int unsigned BLEN_W  = $clog2(BSYM_W + 1);

  // ---------------- input split ----------------
  logic nonzero, need_dx;
  logic z_in_valid, z_in_ready, dx_in_valid, dx_in_ready;

  assign nonzero     = (in_data_i != '0);
  assign need_dx     = nonzero || in_last_i;   // zeros bypass the bit-plane path
  assign in_ready_o  = z_in_ready && (dx_in_ready || !need_dx);
  assign z_in_valid  = in_valid_i && (dx_in_ready || !need_dx);
  assign dx_in_valid = in_valid_i && need_dx && z_in_ready;

  // ---------------- Zero-RLE path ----------------
  logic              zs_valid, zs_ready, zs_last;
  logic [ZSYM_W-1:0] zs_data;
  logic [ZLEN_W-1:0] zs_len;

  ebpc_zrle_enc #(.WORD_W(WORD_W), .MAX_ZBURST(MAX_ZBURST)) i_zrle_enc (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (z_in_valid), .in_ready_o (z_in_ready),
    .in_data_i, .in_last_i,
    .sym_valid_o (zs_valid), .sym_ready_i (zs_ready),
    .sym_data_o (zs_data), .sym_len_o (zs_len), .sym_last_o (zs_last)
  );

  ebpc_packer #(.SYM_W(ZSYM_W), .LEN_W(ZLEN_W), .BUS_W(BUS_W)) i_zrle_pack (
    .clk_i, .rst_ni, .clear_i,
    .sym_valid_i (zs_valid), .sym_ready_o (zs_ready),
    .sym_data_i (zs_data), .sym_len_i (zs_len), .sym_last_i (zs_last),
    .out_valid_o (zrle_valid_o), .out_ready_i (zrle_ready_i),
    .out_data_o (zrle_data_o), .out_last_o (zrle_last_o)
  );

  // ---------------- bit-plane path ----------------
  logic              blk_valid, blk_ready, blk_last, blk_empty;
  logic [WORD_W-1:0] blk_base;
  logic [DLT_W-1:0]  blk_delta;
  logic              f_valid, f_ready;
  logic [FIFO_W-1:0] f_data;
  logic              bs_valid, bs_ready, bs_last;
  logic [BSYM_W-1:0] bs_data;
  logic [BLEN_W-1:0] bs_len;
  sym_kind_e         bs_kind;

  // Observation: class of each bit-plane symbol as it enters the packer.
  assign bpc_sym_fire_o = bs_valid && bs_ready;
  assign bpc_sym_kind_o = bs_kind;

  ebpc_delta_xform #(.WORD_W(WORD_W), .BLOCK_N(BLOCK_N)) i_delta (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (dx_in_valid), .in_ready_o (dx_in_ready),
    .in_word_i (nonzero), .in_data_i, .in_last_i,
    .out_valid_o (blk_valid), .out_ready_i (blk_ready),
    .out_base_o (blk_base), .out_delta_o (blk_delta),
    .out_last_o (blk_last), .out_empty_o (blk_empty)
  );

  ebpc_block_fifo #(.WIDTH(FIFO_W)) i_fifo (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (blk_valid), .in_ready_o (blk_ready),
    .in_data_i ({blk_last, blk_empty, blk_base, blk_delta}),
    .out_valid_o (f_valid), .out_ready_i (f_ready), .out_data_o (f_data)
  );

  ebpc_bp_encoder #(.WORD_W(WORD_W), .BLOCK_N(BLOCK_N)) i_bp_enc (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (f_valid), .in_ready_o (f_ready),
    .in_base_i (f_data[DLT_W +: WORD_W]), .in_delta_i (f_data[DLT_W-1:0]),
    .in_last_i (f_data[FIFO_W-1]), .in_empty_i (f_data[FIFO_W-2]),
    .sym_valid_o (bs_valid), .sym_ready_i (bs_ready),
    .sym_data_o (bs_data), .sym_len_o (bs_len), .sym_last_o (bs_last),
    .sym_kind_o (bs_kind)
  );

  ebpc_packer #(.SYM_W(BSYM_W), .LEN_W(BLEN_W), .BUS_W(BUS_W)) i_bpc_pack (
    .clk_i, .rst_ni, .clear_i,
    .sym_valid_i (bs_valid), .sym_ready_o (bs_ready),
    .sym_data_i (bs_data), .sym_len_i (bs_len), .sym_last_i (bs_last),
    .out_valid_o (bpc_valid_o), .out_ready_i (bpc_ready_i),
    .out_data_o (bpc_data_o), .out_last_o (bpc_last_o)
  );
endmodule
