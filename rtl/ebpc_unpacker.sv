// ebpc_unpacker: turns a stream of BUS_W-bit words back into a bit window.
//
// The inverse of ebpc_packer. Incoming bus words are appended above the bits
// already held in a BUF_W-bit register; the consumer reads the lowest WIN_W
// bits (win_o, first stream bit in bit 0) and, in the same cycle, tells how
// many of them it used (consume_i, consume_len_i). Those bits are shifted out
// towards the LSB. count_o says how many bits are valid; bits above it read
// as zero, which lets a consumer decode a short final symbol once its length
// is known to be covered by count_o.
//
// A bus word is taken whenever it fits after this cycle's consumption, so
// with a steady input the window stays filled at 1 symbol per cycle. The
// register size (WIN_W-1+BUS_W, 15 bits for the bit-plane stream) follows the
// decompressor block diagram; the handshakes are this design's own.
module ebpc_unpacker #(
  parameter int unsigned WIN_W = 8,
  parameter int unsigned LEN_W = 4,
  parameter int unsigned BUS_W = 8,
  parameter int unsigned BUF_W = WIN_W - 1 + BUS_W,
  localparam int unsigned CNT_W = $clog2(BUF_W + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [BUS_W-1:0] in_data_i,
  output logic [WIN_W-1:0] win_o,
  output logic [CNT_W-1:0] count_o,
  input  logic             consume_i,
  input  logic [LEN_W-1:0] consume_len_i
);
  logic [BUF_W-1:0] buf_q, buf_mid;
  logic [CNT_W-1:0] cnt_q, cnt_mid;

  assign win_o   = buf_q[WIN_W-1:0];
  assign count_o = cnt_q;

  always_comb begin
    buf_mid = buf_q;
    cnt_mid = cnt_q;
    if (consume_i) begin
      buf_mid = buf_q >> consume_len_i;
      cnt_mid = cnt_q - CNT_W'(consume_len_i);
    end
  end

  assign in_ready_o = (cnt_mid <= CNT_W'(BUF_W - BUS_W));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else if (clear_i) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else if (in_valid_i && in_ready_o) begin
      buf_q <= buf_mid | (BUF_W'(in_data_i) << cnt_mid);
      cnt_q <= cnt_mid + CNT_W'(BUS_W);
    end else begin
      buf_q <= buf_mid;
      cnt_q <= cnt_mid;
    end
  end

  a_no_overdraw: assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
    consume_i |-> (CNT_W'(consume_len_i) <= cnt_q));

  initial assert (BUF_W >= WIN_W - 1 + BUS_W) else $error("ebpc_unpacker: BUF_W too small");
endmodule
