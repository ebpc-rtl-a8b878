// tb_ebpc_params: round trips at non-default sizes.
//
// The paper reports hardware for 8, 16 and 32-bit words and evaluates block
// sizes other than 8. This bench runs ebpc_rt_harness (compress, compare
// with the reference model, decompress, compare) at WORD_W=16/BLOCK_N=8,
// WORD_W=12/BLOCK_N=8 and WORD_W=8/BLOCK_N=16, and sums their results. It
// checks that the parameters really scale the design; 32-bit words are left
// out because the reference model computes in 32-bit integers.
module tb_ebpc_params;
  logic d16, d12, dn16;
  int c16, f16, c12, f12, cn16, fn16;
  int checks, failures;

  ebpc_rt_harness #(.WORD_W(16), .BLOCK_N(8))  i_w16 (.done_o (d16),  .checks_o (c16),  .failures_o (f16));
  ebpc_rt_harness #(.WORD_W(12), .BLOCK_N(8))  i_w12 (.done_o (d12),  .checks_o (c12),  .failures_o (f12));
  ebpc_rt_harness #(.WORD_W(8),  .BLOCK_N(16)) i_n16 (.done_o (dn16), .checks_o (cn16), .failures_o (fn16));

  initial begin
    #1;
    wait (d16 && d12 && dn16);
    checks = c16 + c12 + cn16;
    failures = f16 + f12 + fn16;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    checks = c16 + c12 + cn16;
    failures = f16 + f12 + fn16 + 1;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
