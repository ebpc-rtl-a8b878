// tb_ebpc_zrle_dec: self-checking test of the Zero-RLE decoder and merger.
//
// Word streams with zero bursts of all lengths (including bursts longer than
// the 16-word maximum, which the encoder splits) are turned into the Zero-RLE
// byte stream by the reference model; their non-zero words are offered on
// the nz port as the bit-plane path would deliver them. The merged output
// must reproduce the original stream. Both inputs get random gaps and the
// output random back-pressure in some runs. Rate: zeros and non-zero words
// must come out at one word per cycle when both inputs are always available.
module tb_ebpc_zrle_dec;
  import ebpc_ref_pkg::*;
  localparam int M = 8, MAXB = 16;
  logic clk = 0, rst_n = 0;
  logic zv = 0, zr, nv = 0, nr, ov, orr = 1;
  logic [7:0] zd = '0, nd = '0, od;
  int checks = 0, failures = 0, ncyc = 0, t_first, t_last;
  bit gaps, bp_on;
  always #5 clk = ~clk;

  ebpc_zrle_dec #(.WORD_W(M), .MAX_ZBURST(MAXB), .BUS_W(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .zin_valid_i (zv), .zin_ready_o (zr), .zin_data_i (zd),
    .nz_valid_i (nv), .nz_ready_o (nr), .nz_data_i (nd),
    .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od));

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  byteq_t zsrc;
  wordq_t nsrc, got;
  logic zacc_q = 0, nacc_q = 0;
  always @(negedge clk) begin
    if (zv && zacc_q) void'(zsrc.pop_front());
    if (nv && nacc_q) void'(nsrc.pop_front());
    zv = (zsrc.size() > 0) && !(gaps && $urandom_range(0, 3) == 0);
    nv = (nsrc.size() > 0) && !(gaps && $urandom_range(0, 3) == 0);
    if (zsrc.size() > 0) zd = zsrc[0];
    if (nsrc.size() > 0) nd = 8'(nsrc[0]);
    orr <= bp_on ? ($urandom_range(0, 2) != 0) : 1'b1;
  end
  always @(posedge clk) begin
    ncyc++;
    zacc_q <= zv && zr;
    nacc_q <= nv && nr;
    if (ov && orr) begin
      got.push_back(od);
      if (t_first < 0) t_first = ncyc;
      t_last = ncyc;
    end
  end

  task automatic run(input wordq_t w, input bit g, input bit bp, input string name);
    gaps = g; bp_on = bp; got = {}; t_first = -1;
    @(negedge clk);
    nsrc = {};
    foreach (w[i]) if (w[i] != 0) nsrc.push_back(w[i]);
    zsrc = pack_bytes(zrle_bits(w, MAXB));
    while (got.size() < w.size() && ncyc < 100000) @(posedge clk);
    repeat (20) @(posedge clk);
    check(got.size() >= w.size(), $sformatf("%s: %0d words out of %0d", name, got.size(), w.size()));
    for (int i = 0; i < w.size() && i < got.size(); i += 16) begin
      bit ok = 1;
      for (int k = i; k < i + 16 && k < w.size(); k++) ok &= (got[k] == w[k]);
      check(ok, $sformatf("%s: words %0d..%0d differ", name, i, i + 15));
    end
    if (!g && !bp)
      check(t_last - t_first + 1 <= w.size() + 2, $sformatf("%s: %0d words in %0d cycles", name, w.size(), t_last - t_first + 1));
    // Drop padding bits of the last byte before the next stream.
    @(negedge clk); rst_n = 0; zsrc = {}; nsrc = {}; @(negedge clk); rst_n = 1;
  endtask

  initial begin
    wordq_t w;
    repeat (3) @(posedge clk); rst_n = 1;
    // Every burst length 1..40, separated by one non-zero word.
    w = {};
    for (int l = 1; l <= 40; l++) begin
      for (int k = 0; k < l; k++) w.push_back(0);
      w.push_back(l);
    end
    run(w, 0, 0, "all-lengths");
    w = {};
    for (int i = 0; i < 300; i++) w.push_back(i % 255 + 1);
    run(w, 0, 0, "no-zeros");
    w = feature_map(1000, 60, 3, M);
    run(w, 1, 1, "fmap-gaps-bp");
    w = {};
    for (int i = 0; i < 500; i++) w.push_back(($urandom_range(0, 1) == 0) ? 0 : $urandom_range(1, 255));
    run(w, 1, 0, "random-gaps");
    w = {};
    for (int i = 0; i < 77; i++) w.push_back(0);
    run(w, 0, 1, "zeros-only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
