// ebpc_dbp_buffer: block buffer of the EBPC decompressor.
//
// Collects what the symbol decoder emits for one block - the base word and
// then the WORD_W+1 DBPs, top plane first - in a base register and a shift
// register. The completed block is pushed into a depth-1 FIFO
// (ebpc_block_fifo), so that the decoder can unpack the next block (10
// cycles) while ebpc_delta_reverse rebuilds the words of this one (8 cycles).
// On the output, plane i is out_dbp_o[i*(BLOCK_N-1) +: BLOCK_N-1].
//
// Structure (shift register, base register, depth-1 FIFO) follows the
// decompressor block diagram; the handshake is this design's own. A new
// block starts in the cycle the finished one enters the FIFO, so the buffer
// never stalls the decoder while the FIFO has room.
module ebpc_dbp_buffer #(
  parameter int unsigned WORD_W  = 8,
  parameter int unsigned BLOCK_N = 8,
  localparam int unsigned P_W    = BLOCK_N - 1,
  localparam int unsigned NPL    = WORD_W + 1,
  localparam int unsigned CNT_W  = $clog2(NPL + 2)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  logic                in_is_base_i,
  input  logic [WORD_W-1:0]   in_base_i,
  input  logic [P_W-1:0]      in_dbp_i,
  output logic                out_valid_o,
  input  logic                out_ready_i,
  output logic [WORD_W-1:0]   out_base_o,
  output logic [NPL*P_W-1:0]  out_dbp_o
);
  logic [CNT_W-1:0]  cnt_q;          // planes held (base not counted)
  logic [WORD_W-1:0] base_q;
  logic [P_W-1:0]    sreg_q [NPL];
  logic              full, push, f_ready;
  logic [NPL*P_W-1:0] planes;

  // After NPL shifts, the top plane (first received) sits in sreg_q[NPL-1].
  for (genvar i = 0; i < NPL; i++) begin : g_pl
    assign planes[i*P_W +: P_W] = sreg_q[i];
  end

  assign full       = (cnt_q == CNT_W'(NPL));
  assign push       = full && f_ready;
  assign in_ready_o = !full || f_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q  <= '0;
      base_q <= '0;
      for (int i = 0; i < NPL; i++) sreg_q[i] <= '0;
    end else if (clear_i) begin
      cnt_q <= '0;
    end else begin
      if (push) cnt_q <= '0;
      if (in_valid_i && in_ready_o) begin
        if (in_is_base_i) begin
          base_q <= in_base_i;
        end else begin
          for (int i = NPL - 1; i > 0; i--) sreg_q[i] <= sreg_q[i-1];
          sreg_q[0] <= in_dbp_i;
          cnt_q     <= (push ? '0 : cnt_q) + 1'b1;
        end
      end
    end
  end

  a_base_first: assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
    (in_valid_i && in_ready_o && in_is_base_i) |-> (cnt_q == '0 || push));

  ebpc_block_fifo #(.WIDTH(WORD_W + NPL*P_W)) i_fifo (
    .clk_i, .rst_ni, .clear_i,
    .in_valid_i  (full),
    .in_ready_o  (f_ready),
    .in_data_i   ({base_q, planes}),
    .out_valid_o (out_valid_o),
    .out_ready_i (out_ready_i),
    .out_data_o  ({out_base_o, out_dbp_o})
  );
endmodule
