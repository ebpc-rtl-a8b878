// tb_ebpc_dbp_buffer: self-checking test of the DBP block buffer.
//
// Sequences of base word + 9 bit-planes (most significant plane first, as the
// symbol decoder emits them) are pushed with random gaps; every block taken
// from the output must hold the base and plane i at bits [7*i +: 7]. The
// output is back-pressured at random in some runs. Rate: with a ready sink
// the buffer must accept the items of consecutive blocks every cycle (10
// cycles per block), i.e. it assembles the next block while the previous one
// waits in its depth-1 FIFO.
module tb_ebpc_dbp_buffer;
  import ebpc_ref_pkg::*;
  localparam int M = 8, N = 8, NPL = M + 1, P = N - 1;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, isb = 0, ov, orr = 1;
  logic [M-1:0] ib = '0, ob;
  logic [P-1:0] ip = '0;
  logic [NPL*P-1:0] op;
  int checks = 0, failures = 0, ncyc = 0;
  bit bp_on;
  always #5 clk = ~clk;

  ebpc_dbp_buffer #(.WORD_W(M), .BLOCK_N(N)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_is_base_i (isb), .in_base_i (ib), .in_dbp_i (ip),
    .out_valid_o (ov), .out_ready_i (orr), .out_base_o (ob), .out_dbp_o (op));

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { int unsigned base; logic [NPL*P-1:0] p; } blk_t;
  blk_t got[$];
  always @(posedge clk) begin
    ncyc++;
    if (ov && orr) begin
      blk_t b;
      b.base = ob; b.p = op;
      got.push_back(b);
    end
  end
  always @(negedge clk) orr <= bp_on ? ($urandom_range(0, 3) == 0) : 1'b1;

  task automatic run(input int nblk, input bit gaps, input bit bp, input string name);
    blk_t exp_q[$];
    int t0, t1;
    bp_on = bp; got = {};
    for (int b = 0; b < nblk; b++) begin
      blk_t e;
      e.base = $urandom_range(0, 255);
      for (int i = 0; i < NPL; i++) e.p[i*P +: P] = P'($urandom());
      exp_q.push_back(e);
    end
    t0 = -1; t1 = 0;
    foreach (exp_q[b]) begin
      for (int k = 0; k <= NPL; k++) begin
        @(negedge clk);
        while (gaps && $urandom_range(0, 3) == 0) begin iv = 0; @(negedge clk); end
        iv = 1; isb = (k == 0); ib = (k == 0) ? M'(exp_q[b].base) : '0;
        ip = (k == 0) ? '0 : exp_q[b].p[(NPL-k)*P +: P];
        #1; while (!ir) begin @(negedge clk); #1; end
        @(posedge clk);
        if (t0 < 0) t0 = ncyc;
        t1 = ncyc;
      end
    end
    @(negedge clk); iv = 0;
    repeat (60) @(posedge clk);
    check(got.size() == nblk, $sformatf("%s: %0d blocks out of %0d", name, got.size(), nblk));
    for (int b = 0; b < nblk && b < got.size(); b++)
      check(got[b].base == exp_q[b].base && got[b].p == exp_q[b].p, $sformatf("%s: block %0d content", name, b));
    if (!gaps && !bp)
      check(t1 - t0 + 1 == (NPL + 1) * nblk, $sformatf("%s: %0d items took %0d cycles", name, (NPL + 1) * nblk, t1 - t0 + 1));
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(30, 0, 0, "full-rate");
    run(30, 1, 0, "gaps");
    run(30, 1, 1, "gaps-bp");
    run(30, 0, 1, "bp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
