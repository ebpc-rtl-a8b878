// ebpc_delta_reverse: rebuilds the words of one block in the EBPC decompressor.
//
// Takes a block from the buffer FIFO as a base word and WORD_W+1 bit-planes
// (plane i in in_dbp_i[i*(BLOCK_N-1) +: BLOCK_N-1], bit j of a plane belongs
// to delta j). It emits the base word first, then for j = 0..BLOCK_N-2 adds
// delta j (WORD_W+1 bits, re-assembled from bit j of every plane) to the
// previous word, keeping WORD_W bits. One word per cycle, BLOCK_N cycles per
// block; the block is released in the cycle its last word is taken.
//
// The accumulate-and-register structure (9-bit delta, 8-bit sum) follows the
// decompressor block diagram; the handshake is this design's own.
module ebpc_delta_reverse #(
  parameter int unsigned WORD_W  = 8,
  parameter int unsigned BLOCK_N = 8,
  localparam int unsigned P_W    = BLOCK_N - 1,
  localparam int unsigned NPL    = WORD_W + 1,
  localparam int unsigned IDX_W  = $clog2(BLOCK_N)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  input  logic               in_valid_i,
  output logic               in_ready_o,
  input  logic [WORD_W-1:0]  in_base_i,
  input  logic [NPL*P_W-1:0] in_dbp_i,
  output logic               out_valid_o,
  input  logic               out_ready_i,
  output logic [WORD_W-1:0]  out_data_o
);
  logic [IDX_W-1:0]  idx_q;     // 0: base, j+1: word after delta j
  logic [WORD_W-1:0] acc_q;     // previous word of the block
  logic [WORD_W:0]   delta;
  logic [WORD_W-1:0] sum;
  logic              fire;

  always_comb begin
    delta = '0;
    for (int i = 0; i < NPL; i++) begin
      for (int j = 0; j < P_W; j++) begin
        if (int'(idx_q) == j + 1) delta[i] = in_dbp_i[i*P_W + j];
      end
    end
  end

  assign sum         = acc_q + delta[WORD_W-1:0];
  assign out_valid_o = in_valid_i;
  assign out_data_o  = (idx_q == '0) ? in_base_i : sum;
  assign fire        = out_valid_o && out_ready_i;
  assign in_ready_o  = fire && (idx_q == IDX_W'(BLOCK_N - 1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      idx_q <= '0;
      acc_q <= '0;
    end else if (clear_i) begin
      idx_q <= '0;
    end else if (fire) begin
      acc_q <= out_data_o;
      idx_q <= (idx_q == IDX_W'(BLOCK_N - 1)) ? '0 : idx_q + 1'b1;
    end
  end
endmodule
