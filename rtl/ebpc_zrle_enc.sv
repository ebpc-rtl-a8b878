// ebpc_zrle_enc: zero/non-zero run-length encoder of the EBPC compressor.
//
// Every input word is compared with zero. A non-zero word becomes the 1-bit
// symbol '1'. Zero words are counted; a zero burst becomes the symbol '0'
// followed by (burst length - 1) in clog2(MAX_ZBURST) bits, most significant
// bit first. A burst longer than MAX_ZBURST is cut: the maximum is emitted and
// the counting restarts, so the rest becomes the next symbol.
//
// Symbols go to an ebpc_packer: sym_data_o holds the first stream bit in
// bit 0, sym_len_o the number of bits. With MAX_ZBURST = 16 the burst symbol
// is 5 bits ('0' & 4-bit count), as in the compressor block diagram.
//
// Own choices: a non-zero word that closes a pending zero burst needs two
// symbols; the burst symbol is sent first while the input is held for one
// cycle (in_ready_o low), then the '1'. in_last_i marks the final word of a
// stream: any pending burst is emitted and the symbol carries sym_last_o so
// the packer pads and flushes. in_ready_o depends on in_data_i (a non-zero
// word may have to wait) but never on in_valid_i.
module ebpc_zrle_enc #(
  parameter int unsigned WORD_W     = 8,
  parameter int unsigned MAX_ZBURST = 16,
  localparam int unsigned ZC_W  = $clog2(MAX_ZBURST),
  localparam int unsigned SYM_W = 1 + ZC_W,
  localparam int unsigned LEN_W = $clog2(SYM_W + 1)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              clear_i,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  logic [WORD_W-1:0] in_data_i,
  input  logic              in_last_i,
  output logic              sym_valid_o,
  input  logic              sym_ready_i,
  output logic [SYM_W-1:0]  sym_data_o,
  output logic [LEN_W-1:0]  sym_len_o,
  output logic              sym_last_o
);
  // Number of zeros of the current burst seen so far (0 = no burst pending).
  logic [ZC_W:0] zcnt_q, zcnt_d;
  logic          is_zero;

  // Symbol '0' & bin(len-1), MSB of the count first in the stream.
  function automatic logic [SYM_W-1:0] burst_sym(input logic [ZC_W:0] len);
    logic [ZC_W-1:0] f;
    logic [SYM_W-1:0] s;
    f = ZC_W'(len - 1'b1);
    s = '0;
    for (int unsigned i = 0; i < ZC_W; i++) s[1+i] = f[ZC_W-1-i];
    return s;
  endfunction

  assign is_zero = (in_data_i == '0);

  always_comb begin
    sym_valid_o = 1'b0;
    sym_data_o  = '0;
    sym_len_o   = '0;
    sym_last_o  = 1'b0;
    in_ready_o  = 1'b0;
    zcnt_d      = zcnt_q;
    if (is_zero) begin
      // A zero word: count it; emit when the burst is full or the stream ends.
      in_ready_o = 1'b1;
      if (zcnt_q == (ZC_W+1)'(MAX_ZBURST - 1) || in_last_i) begin
        sym_valid_o = in_valid_i;
        sym_data_o  = burst_sym(zcnt_q + 1'b1);
        sym_len_o   = LEN_W'(SYM_W);
        sym_last_o  = in_last_i;
        in_ready_o  = sym_ready_i;
        if (in_valid_i && sym_ready_i) zcnt_d = '0;
      end else if (in_valid_i) begin
        zcnt_d = zcnt_q + 1'b1;
      end
    end else if (zcnt_q != '0) begin
      // A non-zero word ends a burst: send the burst first, hold the word.
      sym_valid_o = in_valid_i;
      sym_data_o  = burst_sym(zcnt_q);
      sym_len_o   = LEN_W'(SYM_W);
      if (in_valid_i && sym_ready_i) zcnt_d = '0;
    end else begin
      sym_valid_o = in_valid_i;
      sym_data_o  = SYM_W'(1);
      sym_len_o   = LEN_W'(1);
      sym_last_o  = in_last_i;
      in_ready_o  = sym_ready_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      zcnt_q <= '0;
    else if (clear_i) zcnt_q <= '0;
    else              zcnt_q <= zcnt_d;
  end

  initial assert (MAX_ZBURST >= 2 && (1 << ZC_W) == MAX_ZBURST)
    else $error("ebpc_zrle_enc: MAX_ZBURST must be a power of two >= 2");
endmodule
