// ebpc_delta_xform: delta transform of the EBPC compressor.
//
// Gathers BLOCK_N non-zero words into one data block. The first word of a
// block is kept in the base register; every following word is subtracted
// from its predecessor and the (WORD_W+1)-bit difference is pushed into a
// shift register. When the block is complete it is offered on the output in
// one piece: base and deltas, delta j in out_delta_o[j*(WORD_W+1) +: WORD_W+1].
// The later bit-plane view of the deltas is only a re-wiring of this vector.
//
// Input events: in_word_i says whether the event carries a (non-zero) word;
// an event without a word is used only to pass in_last_i, the end of the
// stream. On the end of a stream a partial block is filled up with zero
// deltas (one per cycle, input held meanwhile) and sent with out_last_o; if
// no word of a new block had arrived, a marker with out_empty_o is sent
// instead so the encoder still flushes its packer.
//
// Words are taken as two's complement and sign-extended before subtraction,
// as in the paper. Padding and the event interface are this design's own.
// Timing: one word per cycle; a completed block is offered the cycle after
// its last word and a new word is accepted in the cycle the block is taken.
module ebpc_delta_xform #(
  parameter int unsigned WORD_W  = 8,
  parameter int unsigned BLOCK_N = 8,
  localparam int unsigned D_W    = WORD_W + 1,
  localparam int unsigned CNT_W  = $clog2(BLOCK_N + 1)
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         clear_i,
  input  logic                         in_valid_i,
  output logic                         in_ready_o,
  input  logic                         in_word_i,
  input  logic [WORD_W-1:0]            in_data_i,
  input  logic                         in_last_i,
  output logic                         out_valid_o,
  input  logic                         out_ready_i,
  output logic [WORD_W-1:0]            out_base_o,
  output logic [(BLOCK_N-1)*D_W-1:0]   out_delta_o,
  output logic                         out_last_o,
  output logic                         out_empty_o
);
  logic [CNT_W-1:0]          cnt_q;      // words (or pad deltas) in the block
  logic [WORD_W-1:0]         base_q, prev_q;
  logic [D_W-1:0]            sreg_q [BLOCK_N-1];
  logic                      last_q;     // block being gathered ends the stream
  logic                      pad_q;      // filling a partial last block
  logic                      empty_q;    // a bare end-of-stream marker is pending
  logic                      full, push, accept;
  logic [CNT_W-1:0]          cnt_base, cnt_new;
  logic [D_W-1:0]            delta;

  assign full        = (cnt_q == CNT_W'(BLOCK_N)) || empty_q;
  assign out_valid_o = full;
  assign out_base_o  = base_q;
  assign out_last_o  = last_q;
  assign out_empty_o = empty_q;
  for (genvar j = 0; j < BLOCK_N - 1; j++) begin : g_out
    assign out_delta_o[j*D_W +: D_W] = empty_q ? '0 : sreg_q[j];
  end

  assign push       = full && out_ready_i;
  assign in_ready_o = !pad_q && (!full || out_ready_i);
  assign accept     = in_valid_i && in_ready_o;
  assign delta      = D_W'($signed(in_data_i)) - D_W'($signed(prev_q));

  // Block fill level after this cycle's push (a push starts a fresh block).
  assign cnt_base = push ? '0 : cnt_q;
  assign cnt_new  = (accept && in_word_i) ? cnt_base + 1'b1 : cnt_base;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q   <= '0;
      base_q  <= '0;
      prev_q  <= '0;
      last_q  <= 1'b0;
      pad_q   <= 1'b0;
      empty_q <= 1'b0;
      for (int j = 0; j < BLOCK_N - 1; j++) sreg_q[j] <= '0;
    end else if (clear_i) begin
      cnt_q   <= '0;
      last_q  <= 1'b0;
      pad_q   <= 1'b0;
      empty_q <= 1'b0;
    end else begin
      if (push) begin
        last_q  <= 1'b0;
        empty_q <= 1'b0;
      end
      if (pad_q) begin
        // Fill the partial last block with zero deltas.
        for (int j = 0; j < BLOCK_N - 2; j++) sreg_q[j] <= sreg_q[j+1];
        sreg_q[BLOCK_N-2] <= '0;
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == CNT_W'(BLOCK_N - 1)) pad_q <= 1'b0;
      end else begin
        cnt_q <= cnt_new;
        if (accept && in_word_i) begin
          prev_q <= in_data_i;
          if (cnt_base == '0) begin
            base_q <= in_data_i;
          end else begin
            for (int j = 0; j < BLOCK_N - 2; j++) sreg_q[j] <= sreg_q[j+1];
            sreg_q[BLOCK_N-2] <= delta;
          end
        end
        if (accept && in_last_i) begin
          if (cnt_new == '0) begin
            empty_q <= 1'b1;
            last_q  <= 1'b1;
          end else begin
            last_q <= 1'b1;
            if (cnt_new != CNT_W'(BLOCK_N)) pad_q <= 1'b1;
          end
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
    (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_delta_o) && $stable(out_base_o)));

  initial assert (BLOCK_N >= 3) else $error("ebpc_delta_xform: BLOCK_N must be >= 3");
endmodule
