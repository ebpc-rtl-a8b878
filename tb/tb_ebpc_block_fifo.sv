// tb_ebpc_block_fifo: self-checking test of the depth-1 block FIFO.
//
// Random entries are pushed with random gaps and popped with random
// back-pressure; the popped sequence must equal the pushed one. With both
// sides always ready, 100 entries must pass in 100 cycles (push and pop in
// the same cycle), and a full FIFO must refuse a push while not popped.
module tb_ebpc_block_fifo;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, ov, orr = 0;
  logic [72:0] id = '0, od;
  int checks = 0, failures = 0;
  bit bp_on = 0, gaps = 0;
  always #5 clk = ~clk;

  ebpc_block_fifo #(.WIDTH(73)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id),
    .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od));

  logic [72:0] exp_q[$];
  int npop, nfull_refused;
  always @(posedge clk) begin
    if (ov && orr) begin
      checks++;
      if (exp_q.size() == 0 || od != exp_q[0]) begin failures++; $display("FAIL: pop %0d", npop); end
      else void'(exp_q.pop_front());
      npop++;
    end
    if (iv && !ir) nfull_refused++;
  end
  always @(negedge clk) orr <= bp_on ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    int cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      bp_on = (s != 0); gaps = (s == 2); cyc = 0;
      for (int k = 0; k < 100; k++) begin
        logic [72:0] v;
        v = {$urandom, $urandom, $urandom};
        @(negedge clk);
        while (gaps && $urandom_range(0, 3) == 0) begin iv = 0; @(negedge clk); end
        iv = 1; id = v;
        #1; while (!ir) begin @(negedge clk); cyc++; #1; end
        @(posedge clk); cyc++;
        exp_q.push_back(v);
      end
      @(negedge clk); iv = 0;
      repeat (10) @(posedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d entries lost", exp_q.size()); end
      if (s == 0) begin
        checks++;
        if (cyc != 100) begin failures++; $display("FAIL: %0d cycles for 100 entries", cyc); end
      end
    end
    checks++;
    if (nfull_refused == 0) begin failures++; $display("FAIL: full FIFO never refused a push"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
