// tb_ebpc_bp_encoder: self-checking test of the DBP/DBX bit-plane encoder.
//
// Blocks of several kinds (random, smooth, constant, alternating, sparse
// deltas, medium deltas) are given to the encoder as base and deltas; the symbol bits of each
// block must equal the reference bit-plane code, and the class of every
// symbol is counted against the reference counts. Timing: with a ready sink
// a block must take exactly one cycle per symbol (10 for a block without
// zero-plane runs: base + 9 planes); a constant block (all deltas zero) takes
// 2 (base + one multi-all-0 symbol).
// Also checked: the empty marker gives one zero-length symbol with
// sym_last_o, and the last symbol of a block marked last carries sym_last_o.
module tb_ebpc_bp_encoder;
  import ebpc_pkg::*;
  import ebpc_ref_pkg::*;
  localparam int M = 8, N = 8;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, il = 0, ie = 0, sv, sr = 1, sl;
  logic [M-1:0] ib = '0;
  logic [(N-1)*(M+1)-1:0] idl = '0;
  logic [7:0] sd;
  logic [3:0] slen;
  sym_kind_e sk;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ebpc_bp_encoder #(.WORD_W(M), .BLOCK_N(N)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_base_i (ib), .in_delta_i (idl),
    .in_last_i (il), .in_empty_i (ie),
    .sym_valid_o (sv), .sym_ready_i (sr), .sym_data_o (sd), .sym_len_o (slen),
    .sym_last_o (sl), .sym_kind_o (sk));

  bitq_t got; int nsym, nlast, kinds[9];
  always @(posedge clk) if (sv && sr) begin
    for (int i = 0; i < int'(slen); i++) got.push_back(sd[i]);
    nsym++; if (sl) nlast++; kinds[sk]++;
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input wordq_t blk, input bit last, output int cyc);
    bitq_t ref_bits;
    int nprev, nref;
    got = {}; nsym = 0; nlast = 0; cyc = 0;
    @(negedge clk);
    iv = 1; il = last; ie = 0; ib = M'(blk[0]);
    for (int j = 0; j < N - 1; j++) idl[j*(M+1) +: M+1] = (M+1)'(delta(blk[j], blk[j+1], M));
    #1; while (!ir) begin @(negedge clk); cyc++; #1; end
    @(posedge clk); cyc++;
    @(negedge clk); iv = 0;
    nprev = 0; foreach (kind_cnt[k]) nprev += kind_cnt[k];
    encode_block(ref_bits, blk, M, N);
    nref = -nprev; foreach (kind_cnt[k]) nref += kind_cnt[k];
    check(cyc == nref && nsym == nref, $sformatf("block took %0d cycles for %0d symbols (expected %0d)", cyc, nsym, nref));
    check(got == ref_bits, $sformatf("block %p: %0d bits, expected %0d", blk, got.size(), ref_bits.size()));
    check(nlast == (last ? 1 : 0), "last flag count");
  endtask

  initial begin
    wordq_t blk;
    int cyc, v;
    repeat (3) @(posedge clk); rst_n = 1;
    clear_counts();
    foreach (kinds[k]) kinds[k] = 0;
    for (int t = 0; t < 360; t++) begin
      blk = {};
      v = $urandom_range(1, 255);
      for (int j = 0; j < N; j++) begin
        case (t % 6)
          0: blk.push_back($urandom_range(1, 255));
          1: begin v = (v + $urandom_range(0, 6) - 3) & 255; blk.push_back(v == 0 ? 1 : v); end
          2: blk.push_back(v);
          3: blk.push_back(j[0] ? 8'h01 : 8'hfe);
          4: blk.push_back(j == 3 ? 8'd40 : 8'd20);
          // Deltas within +-60: planes 8..6 equal, a run of two zero DBX.
          default: begin
            v = v + $urandom_range(0, 120) - 60;
            v = (v < 1) ? 1 : (v > 127) ? 127 : v;
            blk.push_back(v);
          end
        endcase
      end
      send(blk, t % 7 == 0, cyc);
      if (t % 6 == 2) check(cyc == 2, $sformatf("constant block took %0d cycles", cyc));
    end
    for (int k = 1; k < 9; k++)
      check(kinds[k] == kind_cnt[k], $sformatf("symbol class %0d: %0d, expected %0d", k, kinds[k], kind_cnt[k]));
    // Empty marker.
    nsym = 0; nlast = 0; got = {};
    @(negedge clk); iv = 1; ie = 1; il = 1;
    #1; while (!ir) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); iv = 0; ie = 0; il = 0;
    check(nsym == 1 && nlast == 1 && got.size() == 0, "empty marker");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
