// ebpc_symbol_decoder: decodes the bit-plane stream of the EBPC decompressor.
//
// Reads the window of an ebpc_unpacker (first stream bit in bit 0) and
// decodes, per block, the base word (WORD_W bits, MSB first) followed by the
// code symbols of the planes WORD_W..0 (the table is listed in
// ebpc_bp_encoder). It feeds the symbol length back to the unpacker and turns
// each DBX into a DBP by XOR with the previous plane's DBP (zero for the top
// plane). Output words go to ebpc_dbp_buffer: first the base
// (out_is_base_o), then one DBP per plane, top plane first.
//
// A symbol is only taken when the unpacker holds at least as many bits as
// its decoded length, so a short symbol at the very end of a stream is
// decoded without waiting for bits that never come. A multi-all-0 symbol is
// consumed in its first cycle and its remaining planes follow one per cycle,
// so every block takes 1 + (WORD_W+1) cycles (10 for 8-bit words), the rate
// stated in the paper. The code table is the paper's; the bit order and the
// handshake are this design's own (matching ebpc_bp_encoder).
module ebpc_symbol_decoder
  import ebpc_pkg::*;
#(
  parameter int unsigned WORD_W  = 8,
  parameter int unsigned BLOCK_N = 8,
  parameter int unsigned BUS_W   = 8,
  localparam int unsigned P_W    = BLOCK_N - 1,
  localparam int unsigned NPL    = WORD_W + 1,
  localparam int unsigned RUN_W  = $clog2(WORD_W),
  localparam int unsigned POS2_W = $clog2(BLOCK_N - 2),
  localparam int unsigned POS1_W = $clog2(BLOCK_N - 1),
  localparam int unsigned L_MULTI = 3 + RUN_W,
  localparam int unsigned L_TWO   = 5 + POS2_W,
  localparam int unsigned L_ONE   = 5 + POS1_W,
  localparam int unsigned L_RAW   = 1 + P_W,
  localparam int unsigned SYM_W   = (WORD_W > L_RAW ? WORD_W : L_RAW) > (L_ONE > L_MULTI ? L_ONE : L_MULTI)
                                  ? (WORD_W > L_RAW ? WORD_W : L_RAW) : (L_ONE > L_MULTI ? L_ONE : L_MULTI),
  localparam int unsigned LEN_W   = $clog2(SYM_W + 1),
  localparam int unsigned CNT_W   = $clog2(SYM_W + BUS_W),   // unpacker count width
  localparam int unsigned PL_W    = $clog2(NPL + 1)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              clear_i,
  input  logic [SYM_W-1:0]  win_i,
  input  logic [CNT_W-1:0]  count_i,
  output logic              consume_o,
  output logic [LEN_W-1:0]  consume_len_o,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output logic              out_is_base_o,
  output logic [WORD_W-1:0] out_base_o,
  output logic [P_W-1:0]    out_dbp_o,
  output sym_kind_e         out_kind_o
);
  logic            base_done_q;
  logic [PL_W-1:0] pl_q;        // plane whose DBP is produced next
  logic [PL_W-1:0] run_q;       // planes still owed by a multi-all-0 symbol
  logic [P_W-1:0]  prev_q;      // DBP of the plane above

  logic [SYM_W-1:0] w;          // window, first stream bit in bit SYM_W-1
  logic [LEN_W-1:0] len;
  logic [P_W-1:0]   dbp;
  logic [PL_W-1:0]  run_new;
  sym_kind_e        kind;
  logic             have, fire;

  always_comb begin
    for (int i = 0; i < SYM_W; i++) w[i] = win_i[SYM_W-1-i];
  end

  // Decode one symbol.
  always_comb begin
    logic [SYM_W-1:0] f;
    dbp     = prev_q;
    len     = '0;
    run_new = '0;
    kind    = SYM_NONE;
    f       = '0;
    if (run_q != '0) begin
      // Still inside a multi-all-0 run: DBX = 0, DBP repeats, no bits used.
      kind = SYM_MULTI_ZERO;
    end else if (!base_done_q) begin
      kind = SYM_BASE;
      len  = LEN_W'(WORD_W);
    end else if (w[SYM_W-1]) begin
      kind = SYM_RAW;
      len  = LEN_W'(L_RAW);
      f    = w >> (SYM_W - L_RAW);
      dbp  = prev_q ^ P_W'(f);
    end else if (w[SYM_W-2]) begin
      kind = SYM_ZERO_DBX;
      len  = LEN_W'(2);
    end else if (w[SYM_W-3]) begin
      kind    = SYM_MULTI_ZERO;
      len     = LEN_W'(L_MULTI);
      f       = w >> (SYM_W - L_MULTI);
      run_new = PL_W'(RUN_W'(f)) + PL_W'(1);   // run-2 coded; this cycle is one
    end else begin
      if (!w[SYM_W-4]) begin
        len = LEN_W'(5);
        if (!w[SYM_W-5]) begin
          kind = SYM_ALL_ONE;
          dbp  = prev_q ^ '1;
        end else begin
          kind = SYM_ZERO_DBP;
          dbp  = '0;
        end
      end else if (!w[SYM_W-5]) begin
        kind = SYM_TWO_ONES;
        len  = LEN_W'(L_TWO);
        f    = w >> (SYM_W - L_TWO);
        dbp  = prev_q ^ (P_W'(3) << POS2_W'(f));
      end else begin
        kind = SYM_SINGLE_ONE;
        len  = LEN_W'(L_ONE);
        f    = w >> (SYM_W - L_ONE);
        dbp  = prev_q ^ (P_W'(1) << POS1_W'(f));
      end
    end
  end

  assign have          = (CNT_W'(len) <= count_i);
  assign out_valid_o   = have;
  assign out_is_base_o = !base_done_q && (run_q == '0);
  assign out_base_o    = w[SYM_W-1 -: WORD_W];
  assign out_dbp_o     = dbp;
  assign out_kind_o    = kind;
  assign fire          = out_valid_o && out_ready_i;
  assign consume_o     = fire && (len != '0);
  assign consume_len_o = len;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      base_done_q <= 1'b0;
      pl_q        <= PL_W'(NPL - 1);
      run_q       <= '0;
      prev_q      <= '0;
    end else if (clear_i) begin
      base_done_q <= 1'b0;
      pl_q        <= PL_W'(NPL - 1);
      run_q       <= '0;
      prev_q      <= '0;
    end else if (fire) begin
      if (out_is_base_o) begin
        base_done_q <= 1'b1;
        pl_q        <= PL_W'(NPL - 1);
        prev_q      <= '0;
      end else begin
        prev_q <= dbp;
        if (run_q != '0) run_q <= run_q - 1'b1;
        else             run_q <= run_new;
        if (pl_q == '0) begin
          base_done_q <= 1'b0;    // block complete; next comes a base
          run_q       <= '0;
          prev_q      <= '0;
        end else begin
          pl_q <= pl_q - 1'b1;
        end
      end
    end
  end
endmodule
