// ebpc_zrle_dec: zero run-length decoder and output stage of the EBPC
// decompressor.
//
// Unpacks the Zero-RLE bus stream with its own ebpc_unpacker (a 16-bit
// register as in the decompressor block diagram) and reads one symbol at a
// time: for '1' it passes on the next word from the bit-plane path
// (nz_data_i), for '0' & bin(len-1) it emits len zero words, one per cycle.
// The final multiplexer between zero and the bit-plane word is the one shown
// at the output of the decompressor.
//
// The packer pads the end of a Zero-RLE stream with zero bits; if five or
// more of them remain they decode as one surplus zero word. A consumer that
// knows the stream length simply drops it (or pulses clear_i between
// streams). Handshakes are valid/ready; out_valid_o depends combinationally
// on nz_valid_i for non-zero words.
module ebpc_zrle_dec #(
  parameter int unsigned WORD_W     = 8,
  parameter int unsigned MAX_ZBURST = 16,
  parameter int unsigned BUS_W      = 8,
  localparam int unsigned ZC_W      = $clog2(MAX_ZBURST),
  localparam int unsigned SYM_W     = 1 + ZC_W,
  localparam int unsigned LEN_W     = $clog2(SYM_W + 1),
  localparam int unsigned BUF_W     = 16 > SYM_W - 1 + BUS_W ? 16 : SYM_W - 1 + BUS_W,
  localparam int unsigned CNT_W     = $clog2(BUF_W + 1)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              clear_i,
  input  logic              zin_valid_i,
  output logic              zin_ready_o,
  input  logic [BUS_W-1:0]  zin_data_i,
  input  logic              nz_valid_i,
  output logic              nz_ready_o,
  input  logic [WORD_W-1:0] nz_data_i,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output logic [WORD_W-1:0] out_data_o
);
  logic [SYM_W-1:0] win;
  logic [CNT_W-1:0] cnt;
  logic             consume;
  logic [LEN_W-1:0] consume_len;
  logic [ZC_W:0]    zleft_q, zleft_d;   // zeros still to emit
  logic [ZC_W-1:0]  field;
  logic             sel_nz;

  ebpc_unpacker #(.WIN_W(SYM_W), .LEN_W(LEN_W), .BUS_W(BUS_W), .BUF_W(BUF_W)) i_unpack (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i (zin_valid_i), .in_ready_o (zin_ready_o), .in_data_i (zin_data_i),
    .win_o (win), .count_o (cnt),
    .consume_i (consume), .consume_len_i (consume_len)
  );

  // Burst length field, MSB first in the stream after the leading '0'.
  always_comb begin
    for (int i = 0; i < ZC_W; i++) field[ZC_W-1-i] = win[1+i];
  end

  always_comb begin
    out_valid_o = 1'b0;
    nz_ready_o  = 1'b0;
    sel_nz      = 1'b0;
    consume     = 1'b0;
    consume_len = '0;
    zleft_d     = zleft_q;
    if (zleft_q != '0) begin
      out_valid_o = 1'b1;
      if (out_ready_i) zleft_d = zleft_q - 1'b1;
    end else if (cnt != '0 && win[0]) begin
      sel_nz      = 1'b1;
      out_valid_o = nz_valid_i;
      nz_ready_o  = out_ready_i;
      consume     = nz_valid_i && out_ready_i;
      consume_len = LEN_W'(1);
    end else if (cnt >= CNT_W'(SYM_W)) begin
      out_valid_o = 1'b1;
      consume     = out_ready_i;
      consume_len = LEN_W'(SYM_W);
      if (out_ready_i) zleft_d = (ZC_W+1)'(field);   // len-1 more after this one
    end
  end

  // Output multiplexer: zero or the next non-zero word.
  assign out_data_o = sel_nz ? nz_data_i : '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      zleft_q <= '0;
    else if (clear_i) zleft_q <= '0;
    else              zleft_q <= zleft_d;
  end
endmodule
