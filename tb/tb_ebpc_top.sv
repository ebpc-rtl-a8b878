// tb_ebpc_top: end-to-end test of the EBPC compressor/decompressor pair at
// the default configuration (8-bit words, blocks of 8, zero bursts up to 16,
// 8-bit bus).
//
// Each stream is compressed by the compressor side; the two compressed byte
// streams are stored in queues standing in for memory, compared bit for bit
// with the reference model, and then fed back through the decompressor side,
// whose output must equal the original words. Streams cover smooth sparse
// feature-map-like data (the paper's use case), dense random data, long zero
// bursts and the corner cases of stream termination. Back-pressure is applied
// on all outputs in half of the runs.
//
// Mechanism coverage: every bit-plane symbol class on both sides, the split
// of a zero burst longer than 16, an input stall of the compressor, output
// back-pressure on each side, the padding of a partial last block, a bare
// end-of-stream marker and clear between streams. A mechanism that never
// happened counts as a failure. The compression ratio of the feature-map
// streams is printed.
module tb_ebpc_top;
  import ebpc_pkg::*;
  import ebpc_ref_pkg::*;

  localparam int M = 8, N = 8, MAXB = 16;

  logic clk = 0, rst_n = 0, c_clear = 0, d_clear = 0;
  logic c_in_valid = 0, c_in_ready, c_in_last = 0;
  logic [7:0] c_in_data = '0;
  logic c_zv, c_zr, c_zl, c_bv, c_br, c_bl, c_sf, d_sf;
  logic [7:0] c_zd, c_bd;
  sym_kind_e c_sk, d_sk;
  logic d_zv = 0, d_zr, d_bv = 0, d_br, d_ov, d_or;
  logic [7:0] d_zd = '0, d_bd = '0, d_od;
  int checks = 0, failures = 0;
  bit bp_on = 0;

  // Mechanism counters.
  int c_kind[9], d_kind[9];
  int n_in_stall = 0, n_c_bp = 0, n_d_bp = 0, n_split = 0, n_pad = 0, n_marker = 0, n_clear = 0;

  always #5 clk = ~clk;

  ebpc_top dut (
    .clk_i (clk), .rst_ni (rst_n),
    .c_clear_i (c_clear), .c_in_valid_i (c_in_valid), .c_in_ready_o (c_in_ready),
    .c_in_data_i (c_in_data), .c_in_last_i (c_in_last),
    .c_zrle_valid_o (c_zv), .c_zrle_ready_i (c_zr), .c_zrle_data_o (c_zd), .c_zrle_last_o (c_zl),
    .c_bpc_valid_o (c_bv), .c_bpc_ready_i (c_br), .c_bpc_data_o (c_bd), .c_bpc_last_o (c_bl),
    .c_sym_fire_o (c_sf), .c_sym_kind_o (c_sk),
    .d_clear_i (d_clear),
    .d_zrle_valid_i (d_zv), .d_zrle_ready_o (d_zr), .d_zrle_data_i (d_zd),
    .d_bpc_valid_i (d_bv), .d_bpc_ready_o (d_br), .d_bpc_data_i (d_bd),
    .d_out_valid_o (d_ov), .d_out_ready_i (d_or), .d_out_data_o (d_od),
    .d_sym_fire_o (d_sf), .d_sym_kind_o (d_sk)
  );

  byteq_t mem_z, mem_b, src_z, src_b;
  wordq_t outq;
  logic zr_q = 0, br_q = 0;

  always @(posedge clk) begin
    if (c_zv && c_zr) mem_z.push_back(c_zd);
    if (c_bv && c_br) mem_b.push_back(c_bd);
    if (d_ov && d_or) outq.push_back(d_od);
    if (c_sf && rst_n) c_kind[c_sk]++;
    if (d_sf && rst_n) d_kind[d_sk]++;
    if (c_in_valid && !c_in_ready) n_in_stall++;
    if ((c_zv && !c_zr) || (c_bv && !c_br)) n_c_bp++;
    if (d_ov && !d_or) n_d_bp++;
    zr_q <= d_zv && d_zr;
    br_q <= d_bv && d_br;
  end
  always @(negedge clk) begin
    c_zr <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;
    c_br <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;
    d_or <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
  // Memory read side: feed the stored streams into the decompressor.
  always @(negedge clk) begin
    if (d_zv && zr_q) void'(src_z.pop_front());
    if (d_bv && br_q) void'(src_b.pop_front());
    d_zv = (src_z.size() > 0) && !(bp_on && $urandom_range(0, 4) == 0);
    d_bv = (src_b.size() > 0) && !(bp_on && $urandom_range(0, 4) == 0);
    if (src_z.size() > 0) d_zd = src_z[0];
    if (src_b.size() > 0) d_bd = src_b[0];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int longest_zero_burst(wordq_t w);
    int best = 0, cur = 0;
    foreach (w[i]) begin
      cur = (w[i] == 0) ? cur + 1 : 0;
      if (cur > best) best = cur;
    end
    return best;
  endfunction

  // Compress, check against the reference, decompress, check the words.
  task automatic roundtrip(input wordq_t w, input string name, output int comp_bits);
    int nz = 0;
    bit ok;
    byteq_t ez, eb;
    mem_z = {}; mem_b = {}; outq = {};
    foreach (w[i]) if (w[i] != 0) nz++;
    if (nz % N != 0) n_pad++;
    if (w[w.size()-1] == 0 && nz % N == 0 && nz > 0) n_marker++;
    if (longest_zero_burst(w) > MAXB) n_split++;
    foreach (w[i]) begin
      @(negedge clk);
      c_in_valid = 1; c_in_data = 8'(w[i]); c_in_last = (i == w.size() - 1);
      #1;
      while (!c_in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); c_in_valid = 0; c_in_last = 0;
    repeat (100) @(posedge clk);
    ez = pack_bytes(zrle_bits(w, MAXB));
    eb = pack_bytes(bpc_bits(w, M, N));
    check(mem_z == ez, $sformatf("%s: ZRLE stream differs from reference", name));
    check(mem_b == eb, $sformatf("%s: BPC stream differs from reference", name));
    comp_bits = 8 * (mem_z.size() + mem_b.size());
    // Read back through the decompressor.
    src_z = mem_z; src_b = mem_b;
    fork
      while (outq.size() < w.size()) @(posedge clk);
      repeat (30 * w.size() + 300) @(posedge clk);
    join_any
    disable fork;
    repeat (20) @(posedge clk);
    ok = (outq.size() >= w.size());
    for (int i = 0; i < w.size() && ok; i++) ok = (outq[i] == w[i]);
    check(ok, $sformatf("%s: decompressed words differ (%0d of %0d)", name, outq.size(), w.size()));
    @(negedge clk); c_clear = 1; d_clear = 1; src_z = {}; src_b = {};
    @(negedge clk); c_clear = 0; d_clear = 0; n_clear++;
  endtask

  initial begin
    wordq_t w;
    int bits, tot_in, tot_out;
    string kn[9] = '{"none", "base", "multi-all-0", "all-0 DBX", "all-1 DBX",
                     "all-0 DBP", "2 consec. 1s", "single 1", "uncompressed"};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Feature-map-like streams (the paper's workload type).
    tot_in = 0; tot_out = 0;
    for (int s = 0; s < 8; s++) begin
      bp_on = s[0];
      w = feature_map(1024, 40 + 5 * s, 1 + s % 3, M);
      roundtrip(w, $sformatf("fmap%0d", s), bits);
      tot_in += 8 * w.size(); tot_out += bits;
    end
    $display("info: feature-map streams: %0d bits -> %0d bits, ratio %0.2f",
             tot_in, tot_out, real'(tot_in) / real'(tot_out));

    // Dense random data with runs of equal and complementary values, which
    // exercises every symbol class.
    bp_on = 1;
    w = {};
    for (int i = 0; i < 800; i++) begin
      case ($urandom_range(0, 5))
        0: w.push_back(0);
        1: w.push_back(8'h7f);
        2: w.push_back(8'h80);
        3: w.push_back(i > 0 ? ((w[i-1] == 0) ? 1 : w[i-1]) : 1);
        default: w.push_back($urandom_range(0, 255));
      endcase
    end
    roundtrip(w, "mixed", bits);
    // Alternating values give all-one DBX planes.
    w = {};
    for (int i = 0; i < 64; i++) w.push_back(i[0] ? 8'h01 : 8'hfe);
    roundtrip(w, "alternate", bits);
    // Long zero bursts with a partial last block.
    bp_on = 0;
    w = {};
    for (int i = 0; i < 40; i++) w.push_back(0);
    for (int i = 0; i < 5; i++) w.push_back(3 + i);
    for (int i = 0; i < 70; i++) w.push_back(0);
    w.push_back(9);
    roundtrip(w, "bursts", bits);
    // Block boundary followed by a trailing zero (bare end marker).
    w = {};
    for (int i = 0; i < 2 * N; i++) w.push_back(50 + 2 * i);
    w.push_back(0);
    roundtrip(w, "marker", bits);

    for (int k = 1; k < 9; k++) begin
      $display("info: symbol %-13s compressor %0d decompressor %0d", kn[k], c_kind[k], d_kind[k]);
      check(c_kind[k] > 0, $sformatf("compressor never emitted %s", kn[k]));
      check(d_kind[k] > 0, $sformatf("decompressor never decoded %s", kn[k]));
    end
    $display("info: input stalls %0d, comp. back-pressure %0d, decomp. back-pressure %0d",
             n_in_stall, n_c_bp, n_d_bp);
    $display("info: burst splits %0d, padded blocks %0d, bare markers %0d, clears %0d",
             n_split, n_pad, n_marker, n_clear);
    check(n_in_stall > 0, "no compressor input stall");
    check(n_c_bp > 0, "no compressor output back-pressure");
    check(n_d_bp > 0, "no decompressor output back-pressure");
    check(n_split > 0, "no zero burst longer than MAX_ZBURST");
    check(n_pad > 0, "no padded last block");
    check(n_marker > 0, "no bare end-of-stream marker");
    check(n_clear > 0, "no clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
