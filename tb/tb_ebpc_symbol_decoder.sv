// tb_ebpc_symbol_decoder: self-checking test of the bit-plane symbol decoder.
//
// The decoder is tested together with an ebpc_unpacker that supplies its bit
// window (the decoder's input is that window, so the pair is the smallest
// sensible unit). Bit-plane streams of many block kinds are made by the
// reference model and fed in as bytes; the decoder output sequence must be
// base word, then the 9 delta bit-planes (DBP) from the most significant one
// down, per block, equal to the reference planes. Symbol classes reported on
// out_kind_o are counted against the reference counts. Rate: with a gap-free
// source and a ready sink a block takes 10 cycles (1 base + 9 planes).
module tb_ebpc_symbol_decoder;
  import ebpc_pkg::*;
  import ebpc_ref_pkg::*;
  localparam int M = 8, N = 8, NPL = M + 1, SYM = 8, BUF = SYM - 1 + 8;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, cons, ov, orr = 1, is_base;
  logic [7:0] id = '0, base;
  logic [SYM-1:0] win;
  logic [3:0] cnt, clen;
  logic [N-2:0] dbp;
  sym_kind_e kind;
  int checks = 0, failures = 0, ncyc = 0;
  bit gaps, bp_on;
  always #5 clk = ~clk;

  ebpc_unpacker #(.WIN_W(SYM), .LEN_W(4), .BUS_W(8), .BUF_W(BUF)) i_unpack (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id),
    .win_o (win), .count_o (cnt), .consume_i (cons), .consume_len_i (clen));
  ebpc_symbol_decoder #(.WORD_W(M), .BLOCK_N(N), .BUS_W(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .win_i (win), .count_i (cnt), .consume_o (cons), .consume_len_o (clen),
    .out_valid_o (ov), .out_ready_i (orr), .out_is_base_o (is_base),
    .out_base_o (base), .out_dbp_o (dbp), .out_kind_o (kind));

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  byteq_t src;
  logic acc_q = 0;
  always @(negedge clk) begin
    if (iv && acc_q) void'(src.pop_front());
    iv = (src.size() > 0) && !(gaps && $urandom_range(0, 3) == 0);
    if (src.size() > 0) id = src[0];
    orr <= bp_on ? ($urandom_range(0, 2) != 0) : 1'b1;
  end
  // Output record: base words marked with bit 31.
  wordq_t got;
  int kinds[9], t_first, t_last;
  always @(posedge clk) begin
    acc_q <= iv && ir;
    ncyc++;
    if (ov && orr) begin
      got.push_back(is_base ? (32'h8000_0000 | base) : dbp);
      kinds[kind]++;
      if (t_first < 0) t_first = ncyc;
      t_last = ncyc;
    end
  end

  task automatic run(input wordq_t w, input bit g, input bit bp, input string name);
    wordq_t nz, expq, p;
    int nb;
    gaps = g; bp_on = bp; got = {}; t_first = -1;
    clear_counts(); foreach (kinds[k]) kinds[k] = 0;
    nz = nonzero_padded(w, N);
    for (int b = 0; b < nz.size(); b += N) begin
      wordq_t blk;
      for (int j = 0; j < N; j++) blk.push_back(nz[b+j]);
      p = planes(blk, M, N);
      expq.push_back(32'h8000_0000 | blk[0]);
      for (int i = M; i >= 0; i--) expq.push_back(p[i]);
    end
    nb = nz.size() / N;
    @(negedge clk);
    src = pack_bytes(bpc_bits(w, M, N));
    while (got.size() < expq.size() && ncyc < 40 * expq.size() + 1000 + t_first) @(posedge clk);
    repeat (10) @(posedge clk);
    check(got.size() >= expq.size(), $sformatf("%s: %0d outputs, expected %0d", name, got.size(), expq.size()));
    for (int i = 0; i < expq.size() && i < got.size(); i += NPL + 1) begin
      bit ok = 1;
      for (int k = i; k < i + NPL + 1; k++) ok &= (got[k] == expq[k]);
      check(ok, $sformatf("%s: block %0d decoded wrongly", name, i / (NPL + 1)));
    end
    check(got.size() <= expq.size() + 1, $sformatf("%s: %0d surplus outputs", name, got.size() - expq.size()));
    for (int k = 1; k < 8; k++)
      check(kinds[k] >= kind_cnt[k], $sformatf("%s: class %0d decoded %0d, sent %0d", name, k, kinds[k], kind_cnt[k]));
    check(kinds[8] >= kind_cnt[8], $sformatf("%s: raw class count", name));
    if (!g && !bp)
      check(t_last - t_first + 1 <= 10 * nb + 2, $sformatf("%s: %0d blocks in %0d cycles", name, nb, t_last - t_first + 1));
    // Flush: reset between streams drops the zero padding bits.
    @(negedge clk); rst_n = 0; src = {}; @(negedge clk); rst_n = 1;
  endtask

  initial begin
    wordq_t w;
    int v;
    repeat (3) @(posedge clk); rst_n = 1;
    w = {};
    for (int i = 0; i < 64 * N; i++) w.push_back($urandom_range(1, 255));
    run(w, 0, 0, "dense");
    w = feature_map(800, 0, 2, M);
    run(w, 0, 0, "smooth");
    w = {};
    for (int i = 0; i < 40 * N; i++) begin
      case ($urandom_range(0, 4))
        0: w.push_back(8'h7f);
        1: w.push_back(8'h80);
        2: w.push_back(i[0] ? 8'h01 : 8'hfe);
        3: w.push_back(i > 0 ? w[i-1] : 5);
        default: w.push_back($urandom_range(1, 255));
      endcase
    end
    run(w, 1, 1, "mixed-gaps-bp");
    w = feature_map(600, 0, 1, M);
    run(w, 1, 0, "smooth-gaps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
