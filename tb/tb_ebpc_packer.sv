// tb_ebpc_packer: self-checking test of the symbol packer.
//
// Random symbols of random length (0..8 bits, first stream bit in bit 0,
// junk above the length) are packed with random gaps on the input and random
// back-pressure on the output; a flush is requested on the final symbol of
// each of several streams. The bytes must equal the reference bit stream
// packed first-bit-into-bit-0 with zero padding, the last byte of each stream
// must carry out_last_o, and with a ready sink one symbol per cycle must be
// accepted (rate check).
module tb_ebpc_packer;
  import ebpc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sv = 0, sr, sl = 0, ov, orr = 1, ol;
  logic [7:0] sd = '0, od;
  logic [3:0] slen = '0;
  int checks = 0, failures = 0;
  bit bp_on, gaps;
  always #5 clk = ~clk;

  ebpc_packer #(.SYM_W(8), .LEN_W(4), .BUS_W(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .sym_valid_i (sv), .sym_ready_o (sr), .sym_data_i (sd), .sym_len_i (slen), .sym_last_i (sl),
    .out_valid_o (ov), .out_ready_i (orr), .out_data_o (od), .out_last_o (ol));

  byteq_t got; int last_at;
  always @(posedge clk) if (ov && orr) begin got.push_back(od); if (ol) last_at = got.size(); end
  always @(negedge clk) orr <= bp_on ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bitq_t ref_bits;
    int cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      int nsym;
      nsym = 50 + 13 * s;
      bp_on = s[0]; gaps = s[1];
      ref_bits = {}; got = {}; last_at = -1; cyc = 0;
      for (int k = 0; k < nsym; k++) begin
        int l;
        logic [7:0] d;
        l = $urandom_range(0, 8);
        d = 8'($urandom);
        for (int i = 0; i < l; i++) ref_bits.push_back(d[i]);
        @(negedge clk);
        while (gaps && $urandom_range(0, 3) == 0) begin sv = 0; @(negedge clk); end
        sv = 1; sd = d; slen = 4'(l); sl = (k == nsym - 1);
        #1; while (!sr) begin @(negedge clk); cyc++; #1; end
        @(posedge clk); cyc++;
      end
      @(negedge clk); sv = 0; sl = 0;
      repeat (30) @(posedge clk);
      check(got == pack_bytes(ref_bits), $sformatf("stream %0d: %0d bytes, expected %0d", s, got.size(), pack_bytes(ref_bits).size()));
      if (ref_bits.size() > 0) check(last_at == got.size(), $sformatf("stream %0d: last flag at %0d", s, last_at));
      if (!bp_on && !gaps) check(cyc == nsym, $sformatf("stream %0d: %0d cycles for %0d symbols", s, cyc, nsym));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
