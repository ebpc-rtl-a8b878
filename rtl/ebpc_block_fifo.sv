// ebpc_block_fifo: one-entry FIFO for a complete data block.
//
// The compressor places one between the delta transform and the bit-plane
// encoder (the "intermediate register"), and the decompressor one between the
// bit-plane buffer and the delta reversal. It decouples the two sides so that
// the next block can be gathered while the current one is processed.
//
// The entry is a plain WIDTH-bit register with a full flag. A push is
// accepted when the register is empty or is popped in the same cycle, so a
// stream of blocks passes at full rate with one cycle of latency. The paper
// names this unit only ("depth-1 FIFO"); this is the simplest form of it.
module ebpc_block_fifo #(
  parameter int unsigned WIDTH = 73
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [WIDTH-1:0] in_data_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [WIDTH-1:0] out_data_o
);
  logic             full_q;
  logic [WIDTH-1:0] data_q;

  assign out_valid_o = full_q;
  assign out_data_o  = data_q;
  assign in_ready_o  = !full_q || out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= 1'b0;
      data_q <= '0;
    end else if (clear_i) begin
      full_q <= 1'b0;
    end else begin
      if (in_valid_i && in_ready_o) begin
        full_q <= 1'b1;
        data_q <= in_data_i;
      end else if (out_ready_i) begin
        full_q <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
    (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o)));
endmodule
