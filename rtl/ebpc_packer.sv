// ebpc_packer: packs variable-length code symbols into fixed-width bus words.
//
// Each accepted symbol (sym_len_i bits, first stream bit in bit 0 of
// sym_data_i) is OR-ed into a fill register just above the bits already held.
// As soon as BUS_W or more bits are held, the lowest BUS_W bits leave as one
// bus word and the rest move down towards the LSB. The register is
// BUS_W-1+SYM_W bits wide (15 for 8-bit symbols, 12 for the 5-bit Zero-RLE
// symbols), which is the smallest size that never overflows.
//
// The packing scheme and register sizes follow the compressor block diagram;
// the valid/ready handshakes and the end-of-stream flush are this design's
// own: a symbol with sym_last_i set makes the packer pad the final partial
// word with zero bits, send it with out_last_o, and then accept symbols of
// the next stream. A zero-length symbol is allowed (used for a bare flush).
//
// Timing: one symbol per cycle is accepted whenever fewer than BUS_W bits are
// held, or the current bus word is taken in the same cycle and fewer than
// BUS_W bits remain after it. For symbols no wider than BUS_W+1 bits (all
// symbols at the default sizes) the second condition always holds, so with a
// ready sink the packer never stalls its source. Output words are registered.
module ebpc_packer #(
  parameter int unsigned SYM_W = 8,
  parameter int unsigned LEN_W = 4,
  parameter int unsigned BUS_W = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             sym_valid_i,
  output logic             sym_ready_o,
  input  logic [SYM_W-1:0] sym_data_i,
  input  logic [LEN_W-1:0] sym_len_i,
  input  logic             sym_last_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [BUS_W-1:0] out_data_o,
  output logic             out_last_o
);
  localparam int unsigned BUF_W = BUS_W - 1 + SYM_W;
  localparam int unsigned CNT_W = $clog2(BUF_W + 1);

  logic [BUF_W-1:0] buf_q, buf_d;
  logic [CNT_W-1:0] cnt_q, cnt_d;
  logic             flush_q, flush_d;
  logic             out_fire, sym_fire;
  logic [CNT_W-1:0] cnt_after_out;
  logic [BUF_W-1:0] buf_after_out;
  logic [BUF_W-1:0] sym_masked;

  // A word leaves when full, or when a flush is pending and bits remain.
  assign out_valid_o = (cnt_q >= CNT_W'(BUS_W)) || (flush_q && cnt_q != '0);
  assign out_data_o  = buf_q[BUS_W-1:0];
  assign out_last_o  = flush_q && (cnt_q <= CNT_W'(BUS_W));
  assign out_fire    = out_valid_o && out_ready_i;

  // No new symbols while a flush drains. A symbol fits if fewer than BUS_W
  // bits remain after this cycle's output word (always true for SYM_W <=
  // BUS_W + 1; wider symbols, e.g. 16-bit base words, may wait a cycle).
  assign sym_ready_o = !flush_q &&
                       ((cnt_q < CNT_W'(BUS_W)) || (out_ready_i && (cnt_q - CNT_W'(BUS_W) < CNT_W'(BUS_W))));
  assign sym_fire    = sym_valid_i && sym_ready_o;

  always_comb begin
    // Keep only the sym_len_i valid bits of the symbol.
    sym_masked = '0;
    for (int unsigned i = 0; i < SYM_W; i++) begin
      if (i < sym_len_i) sym_masked[i] = sym_data_i[i];
    end

    cnt_after_out = cnt_q;
    buf_after_out = buf_q;
    if (out_fire) begin
      buf_after_out = buf_q >> BUS_W;
      cnt_after_out = (cnt_q > CNT_W'(BUS_W)) ? cnt_q - CNT_W'(BUS_W) : '0;
    end

    buf_d   = buf_after_out;
    cnt_d   = cnt_after_out;
    flush_d = flush_q;
    // The flush ends with the last padded word, or at once if nothing is held.
    if (flush_q && ((out_fire && out_last_o) || cnt_q == '0)) flush_d = 1'b0;
    if (sym_fire) begin
      buf_d = buf_after_out | (sym_masked << cnt_after_out);
      cnt_d = cnt_after_out + CNT_W'(sym_len_i);
      if (sym_last_i) flush_d = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      buf_q   <= '0;
      cnt_q   <= '0;
      flush_q <= 1'b0;
    end else if (clear_i) begin
      buf_q   <= '0;
      cnt_q   <= '0;
      flush_q <= 1'b0;
    end else begin
      buf_q   <= buf_d;
      cnt_q   <= cnt_d;
      flush_q <= flush_d;
    end
  end

  // Handshake rule: a bus word once offered stays until taken.
  property p_out_stable;
    @(posedge clk_i) disable iff (!rst_ni || clear_i)
      (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o));
  endproperty
  a_out_stable: assert property (p_out_stable);

  initial begin
    assert (BUF_W >= BUS_W) else $error("ebpc_packer: SYM_W too small");
    assert ((1 << LEN_W) > SYM_W) else $error("ebpc_packer: LEN_W too small");
  end
endmodule
