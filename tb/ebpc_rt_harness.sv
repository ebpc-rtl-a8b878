// ebpc_rt_harness: round-trip test harness for one EBPC configuration.
//
// Instantiates ebpc_top with the given word width and block size, compresses
// a few synthetic feature-map streams and one random stream, compares both
// compressed byte streams with the reference model (ebpc_ref_pkg) and feeds
// them back through the decompressor, whose output must equal the input
// words. Used by tb_ebpc_params to run several configurations side by side;
// it reports through its checks/failures outputs and raises done_o at the end.
// The compression ratio of the feature-map streams is printed, to show how
// the gain of the bit-plane stage shrinks as the word width grows.
module ebpc_rt_harness #(
  parameter int unsigned WORD_W  = 16,
  parameter int unsigned BLOCK_N = 8
) (
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  import ebpc_ref_pkg::*;
  localparam int MAXB = 16;

  logic clk = 0, rst_n = 0;
  logic c_iv = 0, c_ir, c_il = 0, zv, bv, zl, bl, c_sf, d_sf;
  logic [WORD_W-1:0] c_id = '0, d_od;
  logic [7:0] zd, bd;
  logic d_zv = 0, d_zr, d_bv = 0, d_br, d_ov;
  logic [7:0] d_zd = '0, d_bd = '0;
  ebpc_pkg::sym_kind_e c_sk, d_sk;
  always #5 clk = ~clk;

  ebpc_top #(.WORD_W(WORD_W), .BLOCK_N(BLOCK_N)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .c_clear_i (1'b0), .c_in_valid_i (c_iv), .c_in_ready_o (c_ir),
    .c_in_data_i (c_id), .c_in_last_i (c_il),
    .c_zrle_valid_o (zv), .c_zrle_ready_i (1'b1), .c_zrle_data_o (zd), .c_zrle_last_o (zl),
    .c_bpc_valid_o (bv), .c_bpc_ready_i (1'b1), .c_bpc_data_o (bd), .c_bpc_last_o (bl),
    .c_sym_fire_o (c_sf), .c_sym_kind_o (c_sk),
    .d_clear_i (!rst_n),
    .d_zrle_valid_i (d_zv), .d_zrle_ready_o (d_zr), .d_zrle_data_i (d_zd),
    .d_bpc_valid_i (d_bv), .d_bpc_ready_o (d_br), .d_bpc_data_i (d_bd),
    .d_out_valid_o (d_ov), .d_out_ready_i (1'b1), .d_out_data_o (d_od),
    .d_sym_fire_o (d_sf), .d_sym_kind_o (d_sk)
  );

  byteq_t mz, mb, sz, sb;
  wordq_t outq;
  logic zr_q = 0, br_q = 0;
  always @(posedge clk) begin
    if (zv) mz.push_back(zd);
    if (bv) mb.push_back(bd);
    if (d_ov) outq.push_back(d_od);
    zr_q <= d_zv && d_zr;
    br_q <= d_bv && d_br;
  end
  always @(negedge clk) begin
    if (d_zv && zr_q) void'(sz.pop_front());
    if (d_bv && br_q) void'(sb.pop_front());
    d_zv = sz.size() > 0;
    d_bv = sb.size() > 0;
    if (sz.size() > 0) d_zd = sz[0];
    if (sb.size() > 0) d_bd = sb[0];
  end

  task automatic check(input bit ok, input string what);
    checks_o++;
    if (!ok) begin
      failures_o++;
      $display("FAIL: WORD_W=%0d BLOCK_N=%0d: %s", WORD_W, BLOCK_N, what);
    end
  endtask

  task automatic roundtrip(input wordq_t w, input string name, output int bits);
    bit ok;
    mz = {}; mb = {}; outq = {};
    foreach (w[i]) begin
      @(negedge clk);
      c_iv = 1; c_id = WORD_W'(w[i]); c_il = (i == w.size() - 1);
      #1; while (!c_ir) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); c_iv = 0; c_il = 0;
    repeat (100) @(posedge clk);
    check(mz == pack_bytes(zrle_bits(w, MAXB)), $sformatf("%s: ZRLE stream", name));
    check(mb == pack_bytes(bpc_bits(w, WORD_W, BLOCK_N)), $sformatf("%s: BPC stream", name));
    bits = 8 * (mz.size() + mb.size());
    sz = mz; sb = mb;
    repeat (30 * w.size() + 200) begin
      if (outq.size() >= w.size()) break;
      @(posedge clk);
    end
    repeat (20) @(posedge clk);
    ok = outq.size() >= w.size();
    for (int i = 0; i < w.size() && ok; i++) ok = (outq[i] == w[i]);
    check(ok, $sformatf("%s: decompressed words", name));
    // Reset both sides between streams (drops padding bits and partial blocks).
    @(negedge clk); rst_n = 0; sz = {}; sb = {};
    @(negedge clk); rst_n = 1;
  endtask

  initial begin
    wordq_t w;
    int bits, tin, tout;
    done_o = 0; checks_o = 0; failures_o = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    tin = 0; tout = 0;
    for (int s = 0; s < 3; s++) begin
      w = feature_map(600, 50, 1 << (WORD_W - 6), WORD_W);
      roundtrip(w, $sformatf("fmap%0d", s), bits);
      tin += WORD_W * w.size(); tout += bits;
    end
    $display("info: WORD_W=%0d BLOCK_N=%0d feature-map ratio %0.2f", WORD_W, BLOCK_N, real'(tin) / real'(tout));
    w = {};
    for (int i = 0; i < 300; i++)
      w.push_back(($urandom_range(0, 3) == 0) ? 0 : ($urandom() & ((1 << WORD_W) - 1)));
    roundtrip(w, "random", bits);
    done_o = 1;
  end
endmodule
