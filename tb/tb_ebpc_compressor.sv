// tb_ebpc_compressor: self-checking test of the complete EBPC compressor.
//
// Streams of different character (sparse smooth feature-map data, dense
// random data, all zeros, short and oddly terminated streams) are compressed
// with and without back-pressure on the two output ports. Both byte streams
// are compared bit for bit with the reference model in ebpc_ref_pkg, the last
// flags are checked, and two rates are measured: a stream without zeros must
// pass at 10 cycles per block of 8 words (0.8 words/cycle), a stream of zeros
// at one word per cycle.
module tb_ebpc_compressor;
  import ebpc_pkg::*;
  import ebpc_ref_pkg::*;

  localparam int M = 8, N = 8, MAXB = 16;

  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [M-1:0] in_data = '0;
  logic zv, zr, zl, bv, br, bl, sym_fire;
  logic [7:0] zd, bd;
  sym_kind_e sym_kind;
  int checks = 0, failures = 0;
  int cycle = 0;
  bit bp_on = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  ebpc_compressor #(.WORD_W(M), .BLOCK_N(N), .MAX_ZBURST(MAXB), .BUS_W(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (clear),
    .in_valid_i (in_valid), .in_ready_o (in_ready), .in_data_i (in_data), .in_last_i (in_last),
    .zrle_valid_o (zv), .zrle_ready_i (zr), .zrle_data_o (zd), .zrle_last_o (zl),
    .bpc_valid_o (bv), .bpc_ready_i (br), .bpc_data_o (bd), .bpc_last_o (bl),
    .bpc_sym_fire_o (sym_fire), .bpc_sym_kind_o (sym_kind)
  );

  byteq_t zq, bq;
  int zlast_at, blast_at;
  always @(posedge clk) begin
    if (zv && zr) begin zq.push_back(zd); if (zl) zlast_at = zq.size(); end
    if (bv && br) begin bq.push_back(bd); if (bl) blast_at = bq.size(); end
  end
  always @(negedge clk) begin
    zr <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;
    br <= bp_on ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Drive one stream; returns the cycles from first to last accepted word.
  task automatic run_stream(input wordq_t w, input bit gaps, input string name, output int cyc);
    int t0;
    byteq_t ez, eb;
    zq = {}; bq = {}; zlast_at = -1; blast_at = -1;
    t0 = -1;
    foreach (w[i]) begin
      @(negedge clk);
      while (gaps && $urandom_range(0, 3) == 0) begin
        in_valid = 0; @(negedge clk);
      end
      in_valid = 1; in_data = M'(w[i]); in_last = (i == w.size() - 1);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      if (t0 < 0) t0 = cycle;
      cyc = cycle - t0 + 1;
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (200) @(posedge clk);
    ez = pack_bytes(zrle_bits(w, MAXB));
    eb = pack_bytes(bpc_bits(w, M, N));
    check(zq == ez, $sformatf("%s: ZRLE stream (%0d bytes, expected %0d)", name, zq.size(), ez.size()));
    check(bq == eb, $sformatf("%s: BPC stream (%0d bytes, expected %0d)", name, bq.size(), eb.size()));
    check(zlast_at == zq.size(), $sformatf("%s: ZRLE last flag at %0d of %0d", name, zlast_at, zq.size()));
    check(blast_at == bq.size() || blast_at == -1, $sformatf("%s: BPC last flag at %0d of %0d", name, blast_at, bq.size()));
    // Pulse clear between streams.
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
  endtask

  initial begin
    wordq_t w;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Sparse, smooth data.
    for (int s = 0; s < 6; s++) begin
      bp_on = s[0];
      w = feature_map(300 + 37 * s, 50, 3, M);
      run_stream(w, s[1], $sformatf("fmap%0d", s), cyc);
    end

    // Dense random words, no zeros: 0.8 words/cycle.
    bp_on = 0;
    w = {};
    for (int i = 0; i < 64 * N; i++) w.push_back($urandom_range(1, 255));
    run_stream(w, 0, "dense", cyc);
    $display("dense: %0d words in %0d cycles", w.size(), cyc);
    check(cyc <= 10 * 64 + 12 && cyc >= 10 * 63, $sformatf("dense rate: %0d cycles for 64 blocks", cyc));

    // All zeros: one word per cycle, bursts cut at MAX_ZBURST.
    w = {};
    for (int i = 0; i < 250; i++) w.push_back(0);
    run_stream(w, 0, "zeros", cyc);
    check(cyc <= 252, $sformatf("zero rate: %0d cycles for 250 words", cyc));

    // Mixed random with back-pressure, including negative-looking values.
    bp_on = 1;
    w = {};
    for (int i = 0; i < 500; i++) w.push_back(($urandom_range(0, 2) == 0) ? 0 : $urandom_range(0, 255));
    run_stream(w, 1, "random", cyc);

    // Stream ending exactly on a block boundary followed by a zero.
    bp_on = 0;
    w = {};
    for (int i = 0; i < N; i++) w.push_back(10 + i);
    w.push_back(0);
    run_stream(w, 0, "boundary+zero", cyc);
    // Single non-zero word and single zero word streams.
    w = {}; w.push_back(77);
    run_stream(w, 0, "single", cyc);
    w = {}; w.push_back(0);
    run_stream(w, 0, "single-zero", cyc);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
