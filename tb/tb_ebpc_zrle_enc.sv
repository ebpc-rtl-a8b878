// tb_ebpc_zrle_enc: self-checking test of the Zero-RLE encoder.
//
// Words with zero bursts of every length from 1 to 40 (so bursts longer than
// the maximum of 16 are split) and isolated non-zero words are fed with random
// symbol back-pressure. The concatenated symbol bits must equal the reference
// Zero-RLE bit stream, the final symbol must carry sym_last_o, and the cycle
// count must be one per word plus one per non-zero word that ends a burst
// not yet emitted.
module tb_ebpc_zrle_enc;
  import ebpc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, il = 0, sv, sr = 1, sl;
  logic [7:0] id = '0;
  logic [4:0] sd;
  logic [2:0] slen;
  int checks = 0, failures = 0;
  bit bp_on;
  always #5 clk = ~clk;

  ebpc_zrle_enc #(.WORD_W(8), .MAX_ZBURST(16)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id), .in_last_i (il),
    .sym_valid_o (sv), .sym_ready_i (sr), .sym_data_o (sd), .sym_len_o (slen), .sym_last_o (sl));

  bitq_t got; int nsym, last_sym;
  always @(posedge clk) if (sv && sr) begin
    for (int i = 0; i < int'(slen); i++) got.push_back(sd[i]);
    nsym++; if (sl) last_sym = nsym;
  end
  always @(negedge clk) sr <= bp_on ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wordq_t w;
    int cyc, expect_cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      bp_on = s[0];
      w = {};
      for (int b = 1; b <= 40; b++) begin
        for (int i = 0; i < b; i++) w.push_back(0);
        repeat ($urandom_range(1, 3)) w.push_back($urandom_range(1, 255));
      end
      if (s >= 2) for (int i = 0; i < 17; i++) w.push_back(0);   // ends in a burst
      got = {}; nsym = 0; last_sym = -1; cyc = 0; expect_cyc = 0;
      foreach (w[i]) begin
        int run;
        run = 0;
        // A burst already emitted at its 16th zero needs no extra cycle.
        for (int k = i - 1; k >= 0 && w[k] == 0; k--) run++;
        expect_cyc += (w[i] != 0 && run % 16 != 0) ? 2 : 1;
        @(negedge clk);
        iv = 1; id = 8'(w[i]); il = (i == w.size() - 1);
        #1; while (!ir) begin @(negedge clk); cyc++; #1; end
        @(posedge clk); cyc++;
      end
      @(negedge clk); iv = 0; il = 0;
      repeat (5) @(posedge clk);
      check(got == zrle_bits(w, 16), $sformatf("run %0d: %0d bits, expected %0d", s, got.size(), zrle_bits(w, 16).size()));
      check(last_sym == nsym, $sformatf("run %0d: last flag on symbol %0d of %0d", s, last_sym, nsym));
      if (!bp_on) check(cyc == expect_cyc, $sformatf("run %0d: %0d cycles, expected %0d", s, cyc, expect_cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
