// tb_sc_ctrl: controller at n = 8, checked against the paper's schedule table
// for n = 8 (14 cycles per codeword):
//   cycle : 1   2   3   4   5   6   7   8   9   10  11  12  13  14
//   stage : 2f  1f  0f  0g  1g  0f  0g  2g  1f  0f  0g  1g  0f  0g
//   bit   :         u0  u1      u2  u3          u4  u5      u6  u7
// Three codewords offered continuously, so that loading overlaps the second
// half of decoding (one codeword every 2n = 16 cycles), then a codeword with
// random gaps in llr_valid. Also checks that llr_ready stays low while the channel
// cells are still needed (bits 0 .. n/2-1) and that each decode is 2n-2 cycles.
module tb_sc_ctrl;
  import sc_pkg::*;
  localparam int unsigned N = 8, M = 3, LW = 2;

  logic          clk = 0, rst_n = 0;
  logic          llr_valid, llr_ready, shift_en, busy, dec, last;
  logic [LW-1:0] stage;
  pe_fn_e        fn;
  logic [M-1:0]  bit_idx;
  int checks = 0, failures = 0;

  sc_ctrl #(.N(N)) dut (.clk, .rst_n, .llr_valid, .llr_ready, .shift_en, .busy,
                        .stage, .fn, .bit_idx, .dec, .last);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Table I of the paper
  int unsigned exp_stage [14] = '{2, 1, 0, 0, 1, 0, 0, 2, 1, 0, 0, 1, 0, 0};
  bit          exp_g     [14] = '{0, 0, 0, 1, 1, 0, 1, 1, 0, 0, 1, 1, 0, 1};
  int          exp_bit   [14] = '{-1, -1, 0, 1, -1, 2, 3, -1, -1, 4, 5, -1, 6, 7};

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  int cyc_in_cw = 0;      // cycles of the current codeword
  int codewords = 0;
  int start_cycle [$];
  int cycle = 0;
  int accepted = 0;
  bit gaps = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // schedule monitor
  always @(negedge clk) if (rst_n) begin
    if (shift_en) accepted++;
    chk(!(busy && bit_idx < M'(N / 2) && llr_ready), "llr_ready while channel in use");
    if (busy) begin
      int k;
      k = cyc_in_cw;
      if (k == 0) start_cycle.push_back(cycle);
      chk(k < 14, "codeword longer than 2n-2 cycles");
      if (k < 14) begin
        chk(int'(stage) == exp_stage[k], $sformatf("cycle %0d stage %0d", k + 1, stage));
        chk((fn == PE_G) == exp_g[k], $sformatf("cycle %0d fn %s", k + 1, fn.name()));
        chk(dec == (exp_bit[k] >= 0), $sformatf("cycle %0d dec", k + 1));
        if (exp_bit[k] >= 0) chk(int'(bit_idx) == exp_bit[k], $sformatf("cycle %0d bit %0d", k + 1, bit_idx));
        chk(last == (k == 13), "last flag");
      end
      cyc_in_cw = last ? 0 : k + 1;
      if (last) codewords++;
    end
  end

  initial begin
    llr_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 3 codewords offered continuously
    while (accepted < 3 * N) begin
      llr_valid = 1;
      @(negedge clk);
    end
    llr_valid = 0;
    // one codeword with random gaps
    gaps = 1;
    while (accepted < 4 * N) begin
      llr_valid = 1'($urandom);
      @(negedge clk);
    end
    llr_valid = 0;
    wait (codewords == 4);
    repeat (4) @(negedge clk);
    chk(!busy, "idle after last codeword");
    chk(start_cycle.size() == 4, "four codewords started");
    if (start_cycle.size() >= 3) begin
      chk(start_cycle[1] - start_cycle[0] == 2 * N, $sformatf("period %0d", start_cycle[1] - start_cycle[0]));
      chk(start_cycle[2] - start_cycle[1] == 2 * N, $sformatf("period %0d", start_cycle[2] - start_cycle[1]));
    end
    $display("codewords=%0d starts=%p", codewords, start_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
