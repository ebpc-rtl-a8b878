// tb_ebpc_delta_reverse: self-checking test of the delta-reverse unit.
//
// Blocks of random, smooth and wrapping words are converted by the reference
// model into base + 9 delta bit-planes (plane i bit j = bit i of delta j) and
// given to the unit; its output words must equal the original block words.
// The output is back-pressured at random in some runs. Rate: with a ready
// sink and blocks always available the unit emits one word per cycle, 8
// cycles per block, with no gap between blocks.
module tb_ebpc_delta_reverse;
  import ebpc_ref_pkg::*;
  localparam int M = 8, N = 8, NPL = M + 1, P = N - 1;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, ov, orr = 1;
  logic [M-1:0] ib = '0, od;
  logic [NPL*P-1:0] ip = '0;
  int checks = 0, failures = 0, ncyc = 0, t_first, t_last;
  bit bp_on;
  always #5 clk = ~clk;

  ebpc_delta_reverse #(.WORD_W(M), .BLOCK_N(N)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_base_i (ib), .in_dbp_i (ip),
    .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od));

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  wordq_t got;
  always @(posedge clk) begin
    ncyc++;
    if (ov && orr) begin
      got.push_back(od);
      if (t_first < 0) t_first = ncyc;
      t_last = ncyc;
    end
  end
  always @(negedge clk) orr <= bp_on ? ($urandom_range(0, 2) == 0) : 1'b1;

  task automatic run(input int nblk, input int kind, input bit gaps, input bit bp, input string name);
    wordq_t w, p;
    bp_on = bp; got = {}; t_first = -1;
    for (int i = 0; i < nblk * N; i++)
      case (kind)
        0: w.push_back($urandom_range(0, 255));
        1: w.push_back((i * 37) & 255);
        default: w.push_back(i[0] ? 8'h00 : 8'hff);
      endcase
    for (int b = 0; b < nblk; b++) begin
      wordq_t blk;
      for (int j = 0; j < N; j++) blk.push_back(w[b*N+j]);
      p = planes(blk, M, N);
      @(negedge clk);
      while (gaps && $urandom_range(0, 2) == 0) begin iv = 0; @(negedge clk); end
      iv = 1; ib = M'(blk[0]);
      for (int i = 0; i < NPL; i++) ip[i*P +: P] = P'(p[i]);
      #1; while (!ir) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); iv = 0;
    repeat (100) @(posedge clk);
    check(got == w, $sformatf("%s: %0d words, expected %0d, or content differs", name, got.size(), w.size()));
    if (!gaps && !bp)
      check(t_last - t_first + 1 == N * nblk, $sformatf("%s: %0d words in %0d cycles", name, N * nblk, t_last - t_first + 1));
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(40, 0, 0, 0, "random");
    run(40, 1, 0, 0, "ramp");
    run(40, 2, 0, 0, "swing");
    run(40, 0, 1, 1, "random-gaps-bp");
    run(40, 1, 1, 0, "ramp-gaps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
