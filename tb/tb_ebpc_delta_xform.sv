// tb_ebpc_delta_xform: self-checking test of the delta transform.
//
// Streams of non-zero words (with interleaved word-less events) are fed; each
// block taken from the output must hold the block's first word as base and
// the two's complement differences of neighbouring words, as computed by the
// reference model. Streams end mid-block (zero-delta padding must follow),
// exactly on a block boundary, and with a bare end event after a complete
// block (an empty marker must follow). The output is back-pressured at
// random. With a ready sink a block of 8 words must be accepted in 8 cycles.
module tb_ebpc_delta_xform;
  import ebpc_ref_pkg::*;
  localparam int M = 8, N = 8;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, iw = 0, il = 0, ov, orr = 1, ol, oe;
  logic [M-1:0] id = '0, ob;
  logic [(N-1)*(M+1)-1:0] odl;
  int checks = 0, failures = 0;
  bit bp_on;
  always #5 clk = ~clk;

  ebpc_delta_xform #(.WORD_W(M), .BLOCK_N(N)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_word_i (iw), .in_data_i (id), .in_last_i (il),
    .out_valid_o (ov), .out_ready_i (orr), .out_base_o (ob), .out_delta_o (odl),
    .out_last_o (ol), .out_empty_o (oe));

  typedef struct { int unsigned base; int unsigned d[N-1]; bit last; bit empty; } blk_t;
  blk_t got[$];
  always @(posedge clk) if (ov && orr) begin
    blk_t b;
    b.base = ob; b.last = ol; b.empty = oe;
    for (int j = 0; j < N - 1; j++) b.d[j] = odl[j*(M+1) +: M+1];
    got.push_back(b);
  end
  always @(negedge clk) orr <= bp_on ? ($urandom_range(0, 3) == 0) : 1'b1;

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // nwords non-zero words; bare: end with a word-less last event.
  task automatic run(input int nwords, input bit bare, input string name);
    wordq_t w, nz;
    int nblk, cyc;
    got = {}; cyc = 0;
    for (int i = 0; i < nwords; i++) w.push_back($urandom_range(1, 255));
    for (int i = 0; i < nwords + bare; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 4) == 0 && i < nwords) begin   // a word-less event
        iv = 1; iw = 0; il = 0;
        #1; while (!ir) begin @(negedge clk); #1; end
        @(posedge clk); @(negedge clk);
      end
      iv = 1; iw = (i < nwords); id = (i < nwords) ? M'(w[i]) : '0;
      il = (i == nwords + bare - 1);
      #1; while (!ir) begin @(negedge clk); cyc++; #1; end
      @(posedge clk); cyc++;
    end
    @(negedge clk); iv = 0; il = 0; iw = 0;
    repeat (60) @(posedge clk);
    nz = nonzero_padded(w, N);
    nblk = nz.size() / N;
    check(got.size() == nblk + ((bare && nwords % N == 0) ? 1 : 0), $sformatf("%s: %0d blocks", name, got.size()));
    for (int b = 0; b < nblk && b < got.size(); b++) begin
      bit ok = (got[b].base == nz[b*N]);
      for (int j = 0; j < N - 1; j++) ok &= (got[b].d[j] == delta(nz[b*N+j], nz[b*N+j+1], M));
      ok &= (got[b].empty == 0) && (got[b].last == (b == got.size() - 1));
      check(ok, $sformatf("%s: block %0d content or flags", name, b));
    end
    if (bare && nwords % N == 0)
      check(got.size() > 0 && got[got.size()-1].empty && got[got.size()-1].last, $sformatf("%s: empty marker", name));
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    bp_on = 0;
    run(5 * N, 0, "aligned");
    run(3 * N + 3, 0, "partial");
    run(2 * N, 1, "bare-after-block");
    run(N + 1, 1, "bare-partial");
    bp_on = 1;
    run(7 * N + 5, 0, "partial-bp");
    run(4 * N, 1, "bare-bp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
