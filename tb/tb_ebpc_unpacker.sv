// tb_ebpc_unpacker: self-checking test of the bit-stream unpacker.
//
// A random bit stream is packed into bytes (first bit in bit 0) and fed with
// random gaps. A consumer model takes a random number of bits (0..WIN_W) each
// cycle whenever that many are available, and checks that the window always
// shows the next unconsumed stream bits (window bit 0 = next bit) and that
// the fill count never exceeds the register size. With a gap-free source and
// a consumer taking 8 bits per cycle the unpacker must sustain one byte per
// cycle.
module tb_ebpc_unpacker;
  import ebpc_ref_pkg::*;
  localparam int WIN = 8, BUS = 8, BUF = WIN - 1 + BUS;
  logic clk = 0, rst_n = 0;
  logic iv = 0, ir, cons = 0;
  logic [7:0] id = '0;
  logic [WIN-1:0] win;
  logic [3:0] cnt;
  logic [3:0] clen = '0;
  int checks = 0, failures = 0;
  bit gaps, fixed8;
  always #5 clk = ~clk;

  ebpc_unpacker #(.WIN_W(WIN), .LEN_W(4), .BUS_W(BUS)) dut (
    .clk_i (clk), .rst_ni (rst_n), .clear_i (1'b0),
    .in_valid_i (iv), .in_ready_o (ir), .in_data_i (id),
    .win_o (win), .count_o (cnt), .consume_i (cons), .consume_len_i (clen));

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bitq_t bits;
  byteq_t src;
  int pos, win_err, cnt_err, nacc, ncyc, t_first, t_last;
  logic acc_q = 0;
  // Source.
  always @(negedge clk) begin
    if (iv && acc_q) void'(src.pop_front());
    iv = (src.size() > 0) && !(gaps && $urandom_range(0, 3) == 0);
    if (src.size() > 0) id = src[0];
  end
  always @(posedge clk) acc_q <= iv && ir;
  // Consumer: decide at negedge, check window against the stream.
  always @(negedge clk) begin
    int l, avail;
    #2;
    avail = int'(cnt);
    if (avail > BUF) cnt_err++;
    for (int k = 0; k < WIN && k < avail; k++)
      if (pos + k < bits.size() && win[k] != bits[pos+k]) win_err++;
    l = fixed8 ? 8 : $urandom_range(0, WIN);
    cons = (l <= avail) && (l > 0);
    clen = 4'(l);
  end
  always @(posedge clk) begin
    if (cons) pos <= pos + int'(clen);
    ncyc++;
    if (iv && ir) begin
      nacc++;
      if (t_first < 0) t_first = ncyc;
      t_last = ncyc;
    end
  end

  task automatic run(input int nbits, input bit g, input bit f8, input string name);
    bits = {};
    for (int i = 0; i < nbits; i++) bits.push_back($urandom_range(0, 1));
    gaps = g; fixed8 = f8; win_err = 0; cnt_err = 0; nacc = 0; t_first = -1;
    @(negedge clk); #3;
    src = pack_bytes(bits);
    while (src.size() > 0) @(posedge clk);
    repeat (40) @(posedge clk);
    check(win_err == 0, $sformatf("%s: %0d window mismatches", name, win_err));
    check(cnt_err == 0, $sformatf("%s: count above register size", name));
    check(pos + 8 > nbits && pos <= ((nbits + 7) / 8) * 8, $sformatf("%s: consumed %0d of %0d bits", name, pos, nbits));
  endtask

  initial begin
    pos = 0; ncyc = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(2000, 1, 0, "random-gaps");
    // Drain the remainder of the last byte before the next stream.
    @(negedge clk); #3; pos = 0;
    rst_n = 0; @(negedge clk); rst_n = 1;
    run(3000, 0, 0, "random");
    @(negedge clk); #3; pos = 0;
    rst_n = 0; @(negedge clk); rst_n = 1;
    run(8 * 400, 0, 1, "full-rate");
    $display("full rate: %0d bytes in %0d cycles", nacc, t_last - t_first + 1);
    check(nacc == 400 && t_last - t_first + 1 <= 402, "full-rate: one byte per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
