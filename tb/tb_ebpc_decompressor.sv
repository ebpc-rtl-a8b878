// tb_ebpc_decompressor: self-checking test of the complete EBPC decompressor.
//
// Compressed streams are produced by the reference model (ebpc_ref_pkg) for
// sparse smooth data, dense random data, all-zero data and short streams,
// fed into the two input ports with random gaps, and the output words are
// compared with the original words (the first len words; padding may add a
// surplus zero). The output is taken with random back-pressure in some runs.
// Rate check: a stream without zeros must come out at 10 cycles per block of
// 8 words, set by the symbol decoder (1 base + 9 planes per block).
module tb_ebpc_decompressor;
  import ebpc_pkg::*;
  import ebpc_ref_pkg::*;

  localparam int M = 8, N = 8, MAXB = 16;

  logic clk = 0, rst_n = 0, clear = 0;
  logic zv = 0, zr, bv = 0, br, ov, orr, sym_fire;
  logic [7:0] zd = '0, bd = '0;
  logic [M-1:0] od;
  sym_kind_e sym_kind;
  int checks = 0, failures = 0;
  int cycle = 0;
  bit bp_on = 0, gaps = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  ebpc_decompressor #(.WORD_W(M), .BLOCK_N(N), .MAX_ZBURST(MAXB), .BUS_W(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (clear),
    .zrle_valid_i (zv), .zrle_ready_o (zr), .zrle_data_i (zd),
    .bpc_valid_i (bv), .bpc_ready_o (br), .bpc_data_i (bd),
    .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od),
    .bpc_sym_fire_o (sym_fire), .bpc_sym_kind_o (sym_kind)
  );

  wordq_t outq;
  int first_out, last_out;
  always @(posedge clk) begin
    if (ov && orr) begin
      outq.push_back(od);
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
    end
  end
  always @(negedge clk) orr <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  byteq_t zsrc, bsrc;
  logic zr_q = 0, br_q = 0;
  // Feed the two byte streams independently.
  initial begin
    forever begin
      @(negedge clk);
      if (zv && zr_q) void'(zsrc.pop_front());
      zv = (zsrc.size() > 0) && !(gaps && $urandom_range(0, 4) == 0);
      if (zsrc.size() > 0) zd = zsrc[0];
    end
  end
  initial begin
    forever begin
      @(negedge clk);
      if (bv && br_q) void'(bsrc.pop_front());
      bv = (bsrc.size() > 0) && !(gaps && $urandom_range(0, 4) == 0);
      if (bsrc.size() > 0) bd = bsrc[0];
    end
  end
  // Handshake seen at the rising edge.
  always @(posedge clk) begin
    zr_q <= zr && zv;
    br_q <= br && bv;
  end

  task automatic run_stream(input wordq_t w, input string name, output int cyc);
    bit ok;
    outq = {}; first_out = -1; last_out = -1;
    zsrc = pack_bytes(zrle_bits(w, MAXB));
    bsrc = pack_bytes(bpc_bits(w, M, N));
    fork
      begin
        while (outq.size() < w.size()) @(posedge clk);
      end
      begin
        repeat (20 * w.size() + 200) @(posedge clk);
      end
    join_any
    disable fork;
    repeat (30) @(posedge clk);
    ok = (outq.size() >= w.size());
    for (int i = 0; i < w.size() && ok; i++) ok = (outq[i] == w[i]);
    check(ok, $sformatf("%s: %0d words out of %0d, content mismatch or missing", name, outq.size(), w.size()));
    check(outq.size() <= w.size() + 1, $sformatf("%s: %0d surplus words", name, outq.size() - w.size()));
    cyc = last_out - first_out + 1;
    @(negedge clk); clear = 1; zsrc = {}; bsrc = {}; @(negedge clk); clear = 0;
  endtask

  initial begin
    wordq_t w;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      bp_on = s[0]; gaps = s[1];
      w = feature_map(300 + 41 * s, 55, 3, M);
      run_stream(w, $sformatf("fmap%0d", s), cyc);
    end
    bp_on = 0; gaps = 0;
    w = {};
    for (int i = 0; i < 64 * N; i++) w.push_back($urandom_range(1, 255));
    run_stream(w, "dense", cyc);
    $display("dense: %0d words in %0d cycles", w.size(), cyc);
    check(cyc <= 10 * 64 + 12 && cyc >= 10 * 63 - 8, $sformatf("dense rate: %0d cycles for 64 blocks", cyc));
    w = {};
    for (int i = 0; i < 250; i++) w.push_back(0);
    run_stream(w, "zeros", cyc);
    check(cyc <= 252, $sformatf("zero rate: %0d cycles for 250 words", cyc));
    bp_on = 1; gaps = 1;
    w = {};
    for (int i = 0; i < 600; i++) w.push_back(($urandom_range(0, 2) == 0) ? 0 : $urandom_range(0, 255));
    run_stream(w, "random", cyc);
    w = {}; w.push_back(200);
    run_stream(w, "single", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
