// ebpc_decompressor: extended bit-plane decompressor (EBPC).
//
// Reverses ebpc_compressor. The bit-plane (BPC) bus stream runs through
//   ebpc_unpacker        bus words -> bit window, symbol length fed back
//   ebpc_symbol_decoder  base word, then DBX -> DBP per plane (10 cycles/block)
//   ebpc_dbp_buffer      gathers a block, depth-1 FIFO
//   ebpc_delta_reverse   base + running sum of deltas (8 cycles/block)
// and yields the non-zero words in order. ebpc_zrle_dec decodes the Zero-RLE
// bus stream and merges: a '1' takes the next non-zero word, a zero burst
// emits zeros. Unpacking and decoding of a block overlap with the delta
// reversal of the previous one, so the bit-plane path sustains 0.8 non-zero
// words per cycle and zeros come out at one per cycle.
//
// Interface: valid/ready on all ports. The decompressor has no end-of-stream
// input; after the last expected word the caller may pulse clear_i to drop
// padding bits and partial blocks before the next stream. The output is one
// word per cycle at most. bpc_sym_fire_o/bpc_sym_kind_o report the class of
// every plane the symbol decoder emits, for statistics only.
module ebpc_decompressor
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
  input  logic              zrle_valid_i,
  output logic              zrle_ready_o,
  input  logic [BUS_W-1:0]  zrle_data_i,
  input  logic              bpc_valid_i,
  output logic              bpc_ready_o,
  input  logic [BUS_W-1:0]  bpc_data_i,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output logic [WORD_W-1:0] out_data_o,
  output logic              bpc_sym_fire_o,
  output sym_kind_e         bpc_sym_kind_o
);
  localparam int unsigned P_W     = BLOCK_N - 1;
  localparam int unsigned NPL     = WORD_W + 1;
  localparam int unsigned L_MULTI = 3 + $clog2(WORD_W);
  localparam int unsigned L_ONE   = 5 + $clog2(BLOCK_N - 1);
  localparam int unsigned L_RAW   = BLOCK_N;
  localparam int unsigned SYM_W   = (WORD_W > L_RAW ? WORD_W : L_RAW) > (L_ONE > L_MULTI ? L_ONE : L_MULTI)
                                  ? (WORD_W > L_RAW ? WORD_W : L_RAW) : (L_ONE > L_MULTI ? L_ONE : L_MULTI);
  localparam int unsigned LEN_W   = $clog2(SYM_W + 1);
  localparam int unsigned BUF_W   = SYM_W - 1 + BUS_W;
  localparam int unsigned CNT_W   = $clog2(BUF_W + 1);

  logic [SYM_W-1:0]   win;
  logic [CNT_W-1:0]   cnt;
  logic               consume;
  logic [LEN_W-1:0]   consume_len;
  logic               sd_valid, sd_ready, sd_is_base;
  logic [WORD_W-1:0]  sd_base;
  logic [P_W-1:0]     sd_dbp;
  sym_kind_e          sd_kind;
  logic               bf_valid, bf_ready;
  logic [WORD_W-1:0]  bf_base;
  logic [NPL*P_W-1:0] bf_dbp;
  logic               nz_valid, nz_ready;
  logic [WORD_W-1:0]  nz_data;

  ebpc_unpacker #(.WIN_W(SYM_W), .LEN_W(LEN_W), .BUS_W(BUS_W), .BUF_W(BUF_W)) i_unpack (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (bpc_valid_i), .in_ready_o (bpc_ready_o), .in_data_i (bpc_data_i),
    .win_o (win), .count_o (cnt),
    .consume_i (consume), .consume_len_i (consume_len)
  );

  ebpc_symbol_decoder #(.WORD_W(WORD_W), .BLOCK_N(BLOCK_N), .BUS_W(BUS_W)) i_symdec (
    .clk_i, .rst_ni, .clear_i,
    .win_i (win), .count_i (cnt),
    .consume_o (consume), .consume_len_o (consume_len),
    .out_valid_o (sd_valid), .out_ready_i (sd_ready),
    .out_is_base_o (sd_is_base), .out_base_o (sd_base), .out_dbp_o (sd_dbp),
    .out_kind_o (sd_kind)
  );

  ebpc_dbp_buffer #(.WORD_W(WORD_W), .BLOCK_N(BLOCK_N)) i_buffer (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (sd_valid), .in_ready_o (sd_ready),
    .in_is_base_i (sd_is_base), .in_base_i (sd_base), .in_dbp_i (sd_dbp),
    .out_valid_o (bf_valid), .out_ready_i (bf_ready),
    .out_base_o (bf_base), .out_dbp_o (bf_dbp)
  );

  ebpc_delta_reverse #(.WORD_W(WORD_W), .BLOCK_N(BLOCK_N)) i_delta_rev (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (bf_valid), .in_ready_o (bf_ready),
    .in_base_i (bf_base), .in_dbp_i (bf_dbp),
    .out_valid_o (nz_valid), .out_ready_i (nz_ready), .out_data_o (nz_data)
  );

  ebpc_zrle_dec #(.WORD_W(WORD_W), .MAX_ZBURST(MAX_ZBURST), .BUS_W(BUS_W)) i_zrle_dec (
    .clk_i, .rst_ni, .clear_i,
    .zin_valid_i (zrle_valid_i), .zin_ready_o (zrle_ready_o), .zin_data_i (zrle_data_i),
    .nz_valid_i (nz_valid), .nz_ready_o (nz_ready), .nz_data_i (nz_data),
    .out_valid_o, .out_ready_i, .out_data_o
  );

  // Observation: class of each decoded bit-plane symbol (or run plane).
  assign bpc_sym_fire_o = sd_valid && sd_ready;
  assign bpc_sym_kind_o = sd_kind;
endmodule
