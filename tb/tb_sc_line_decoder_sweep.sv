// tb_sc_line_decoder_sweep: regression over code lengths and channel
// conditions. Six rate-1/2 decoders decode random codewords sent over
// BPSK/AWGN at Eb/N0 = 0 .. 4 dB, in parallel, 5500 codewords in all: n = 8,
// 16, 64 and 256 with Q = 5, and n = 256 again with Q = 4 and Q = 6, a shorter
// stand-in for the quantisation study at n = 1024. Every decided bit is
// compared with the reference SC decoder at the same Q. Frame error counts
// against the transmitted messages are printed per configuration and Eb/N0
// for information.
module tb_sc_line_decoder_sweep;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [6];
  int   chk [6];
  int   fail [6];

  tb_sc_sweep_unit #(.N(8),   .NCW(2000))
    u8   (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  tb_sc_sweep_unit #(.N(16),  .NCW(1500))
    u16  (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  tb_sc_sweep_unit #(.N(64),  .NCW(800))
    u64  (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  tb_sc_sweep_unit #(.N(256), .NCW(400))
    u256 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]));
  tb_sc_sweep_unit #(.N(256), .NCW(400), .Q(4))
    u256q4 (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fail[4]));
  tb_sc_sweep_unit #(.N(256), .NCW(400), .Q(6))
    u256q6 (.clk, .rst_n, .done(done[5]), .checks(chk[5]), .failures(fail[5]));

  int checks, failures;

  task automatic report();
    checks = 0;
    failures = 0;
    foreach (chk[k]) begin
      checks += chk[k];
      failures += fail[k];
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    repeat (2) @(negedge clk);
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
