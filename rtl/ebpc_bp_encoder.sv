// ebpc_bp_encoder: DBP/DBX bit-plane encoder of the EBPC compressor.
//
// Takes one data block (base word and BLOCK_N-1 deltas of WORD_W+1 bits)
// and emits its code symbols, one per cycle: first the base word (WORD_W
// bits, MSB first), then the planes from the most significant one down.
//
//   DBP i   = bit i of every delta, a (BLOCK_N-1)-bit word; bit j is delta j
//   DBX i   = DBP i xor DBP i+1 for i < WORD_W;  DBX WORD_W = DBP WORD_W
//
// Each DBX is coded with the first matching row of the EBPC symbol table:
//
//   multi-all-0 DBX  '001' & bin(run-2)   run >= 2 zero DBX in a row
//   all-0 DBX        '01'
//   all-1 DBX        '00000'
//   all-0 DBP        '00001'              the DBX is not zero but its DBP is
//   2 consecutive 1s '00010' & bin(pos)   pos = lower of the two bit indices
//   single 1         '00011' & bin(pos)
//   uncompressed     '1' & DBX            DBX bit BLOCK_N-2 first
//
// The code table and the plane order follow the paper, including its
// simplification that the top DBP is XOR-ed with zero and coded like a DBX.
// Table priority, the meaning of the positions and the bit order are this
// design's choices. For 8-bit words and blocks of 8 a block takes at most
// 1 + 9 = 10 cycles (0.8 words/cycle); runs of zero planes make it shorter.
//
// sym_data_o has the first stream bit in bit 0. A block marked empty (a bare
// end-of-stream marker) produces one zero-length symbol with sym_last_o.
// The last symbol of a block marked last carries sym_last_o.
module ebpc_bp_encoder
  import ebpc_pkg::*;
#(
  parameter int unsigned WORD_W  = 8,
  parameter int unsigned BLOCK_N = 8,
  localparam int unsigned D_W    = WORD_W + 1,            // delta width
  localparam int unsigned P_W    = BLOCK_N - 1,           // plane width
  localparam int unsigned NPL    = WORD_W + 1,            // number of planes
  localparam int unsigned RUN_W  = $clog2(WORD_W),        // multi-all-0 field
  localparam int unsigned POS2_W = $clog2(BLOCK_N - 2),
  localparam int unsigned POS1_W = $clog2(BLOCK_N - 1),
  localparam int unsigned L_MULTI = 3 + RUN_W,
  localparam int unsigned L_TWO   = 5 + POS2_W,
  localparam int unsigned L_ONE   = 5 + POS1_W,
  localparam int unsigned L_RAW   = 1 + P_W,
  localparam int unsigned SYM_W   = (WORD_W > L_RAW ? WORD_W : L_RAW) > (L_ONE > L_MULTI ? L_ONE : L_MULTI)
                                  ? (WORD_W > L_RAW ? WORD_W : L_RAW) : (L_ONE > L_MULTI ? L_ONE : L_MULTI),
  localparam int unsigned LEN_W   = $clog2(SYM_W + 1),
  localparam int unsigned PL_W    = $clog2(NPL + 1)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clear_i,
  input  logic                       in_valid_i,
  output logic                       in_ready_o,
  input  logic [WORD_W-1:0]          in_base_i,
  input  logic [(BLOCK_N-1)*D_W-1:0] in_delta_i,
  input  logic                       in_last_i,
  input  logic                       in_empty_i,
  output logic                       sym_valid_o,
  input  logic                       sym_ready_i,
  output logic [SYM_W-1:0]           sym_data_o,
  output logic [LEN_W-1:0]           sym_len_o,
  output logic                       sym_last_o,
  output sym_kind_e                  sym_kind_o
);
  logic [P_W-1:0] dbp [NPL];
  logic [P_W-1:0] dbx [NPL];
  logic           base_done_q;            // base of the current block sent
  logic [PL_W-1:0] pl_q;                  // next plane to code
  logic [PL_W-1:0] run, adv;
  logic            block_done, sym_fire;

  // Bit-plane view and neighbour XOR (pure wiring and XOR gates).
  always_comb begin
    for (int i = 0; i < NPL; i++) begin
      for (int j = 0; j < P_W; j++) dbp[i][j] = in_delta_i[j*D_W + i];
    end
    for (int i = 0; i < NPL; i++) begin
      dbx[i] = (i == NPL - 1) ? dbp[i] : (dbp[i] ^ dbp[i+1]);
    end
  end

  // Length of the run of all-zero DBX starting at the current plane downwards.
  always_comb begin
    logic stop;
    run  = '0;
    stop = 1'b0;
    for (int k = NPL - 1; k >= 0; k--) begin
      if (k <= int'(pl_q) && !stop) begin
        if (dbx[k] == '0) run = run + 1'b1;
        else              stop = 1'b1;
      end
    end
  end

  // Left-aligned code, first stream bit in bit SYM_W-1; reversed on output.
  logic [SYM_W-1:0] code;
  logic [LEN_W-1:0] len;
  sym_kind_e        kind;

  function automatic logic [SYM_W-1:0] place(input logic [SYM_W-1:0] v, input int unsigned l);
    return v << (SYM_W - l);
  endfunction

  always_comb begin
    logic [P_W-1:0] x, p;
    int unsigned    ones, lo;
    logic           adj;
    x    = dbx[pl_q];
    p    = dbp[pl_q];
    ones = 0;
    lo   = 0;
    for (int j = P_W - 1; j >= 0; j--) begin
      if (x[j]) begin
        ones = ones + 1;
        lo   = j;
      end
    end
    adj  = (ones == 2) && (lo + 1 < P_W) && x[lo+1];
    adv  = PL_W'(1);
    if (!base_done_q) begin
      code = place(SYM_W'(in_base_i), WORD_W);
      len  = LEN_W'(WORD_W);
      kind = SYM_BASE;
      adv  = '0;
    end else if (run >= 2) begin
      code = place(SYM_W'({3'b001, RUN_W'(run - 2)}), L_MULTI);
      len  = LEN_W'(L_MULTI);
      kind = SYM_MULTI_ZERO;
      adv  = run;
    end else if (x == '0) begin
      code = place(SYM_W'(2'b01), 2);
      len  = LEN_W'(2);
      kind = SYM_ZERO_DBX;
    end else if (x == '1) begin
      code = place(SYM_W'(5'b00000), 5);
      len  = LEN_W'(5);
      kind = SYM_ALL_ONE;
    end else if (p == '0) begin
      code = place(SYM_W'(5'b00001), 5);
      len  = LEN_W'(5);
      kind = SYM_ZERO_DBP;
    end else if (adj) begin
      code = place(SYM_W'({5'b00010, POS2_W'(lo)}), L_TWO);
      len  = LEN_W'(L_TWO);
      kind = SYM_TWO_ONES;
    end else if (ones == 1) begin
      code = place(SYM_W'({5'b00011, POS1_W'(lo)}), L_ONE);
      len  = LEN_W'(L_ONE);
      kind = SYM_SINGLE_ONE;
    end else begin
      code = place(SYM_W'({1'b1, x}), L_RAW);
      len  = LEN_W'(L_RAW);
      kind = SYM_RAW;
    end
  end

  // The block ends with the symbol that codes plane 0.
  assign block_done = base_done_q && (adv > pl_q);

  always_comb begin
    for (int i = 0; i < SYM_W; i++) sym_data_o[i] = in_empty_i ? 1'b0 : code[SYM_W-1-i];
    sym_valid_o = in_valid_i;
    sym_len_o   = in_empty_i ? '0 : len;
    sym_kind_o  = in_empty_i ? SYM_NONE : kind;
    sym_last_o  = in_last_i && (in_empty_i || block_done);
  end

  assign sym_fire   = sym_valid_o && sym_ready_i;
  assign in_ready_o = sym_fire && (in_empty_i || block_done);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      base_done_q <= 1'b0;
      pl_q        <= PL_W'(NPL - 1);
    end else if (clear_i) begin
      base_done_q <= 1'b0;
      pl_q        <= PL_W'(NPL - 1);
    end else if (sym_fire && !in_empty_i) begin
      if (!base_done_q) begin
        base_done_q <= 1'b1;
        pl_q        <= PL_W'(NPL - 1);
      end else if (block_done) begin
        base_done_q <= 1'b0;
        pl_q        <= PL_W'(NPL - 1);
      end else begin
        pl_q <= pl_q - adv;
      end
    end
  end
endmodule
