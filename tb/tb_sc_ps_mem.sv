// tb_sc_ps_mem: partial-sum memory at n = 16.
// Plays the decisions of several codewords of random bits, one per cycle.
// Before bit i is decided, for every stage l with bit l of i set (the stages
// whose g operation may run for this bit), PE p < 2^l must read bit p of the
// polar transform (x = u B F^(x)l, reference encoder) of the 2^l bits decided
// in the first half of the current 2^(l+1)-bit block. PEs p >= 2^l read 0.
module tb_sc_ps_mem;
  import tb_sc_ref_pkg::*;
  localparam int unsigned N = 16, M = 4, LW = 2;

  logic          clk = 0, rst_n = 0;
  logic          upd, u_hat;
  logic [M-1:0]  i;
  logic [LW-1:0] stage;
  logic          us [N/2];
  int checks = 0, failures = 0;

  sc_ps_mem #(.N(N)) dut (.clk, .rst_n, .upd, .i, .u_hat, .stage, .us);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit u [N];
    bit blk[], x[];
    upd = 0; u_hat = 0; i = '0; stage = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (6) begin
      for (int k = 0; k < N; k++) u[k] = 1'($urandom);
      for (int b = 0; b < N; b++) begin
        i = M'(b);
        upd = 0;
        for (int l = 0; l < M; l++) begin
          if (((b >> l) & 1) == 1) begin
            int unsigned start;
            start = (b >> (l + 1)) << (l + 1);
            blk = new[1 << l];
            for (int k = 0; k < (1 << l); k++) blk[k] = u[start + k];
            polar_encode(blk, x);
            stage = LW'(l);
            #1;
            for (int p = 0; p < N / 2; p++) begin
              bit e;
              e = (p < (1 << l)) ? x[p] : 1'b0;
              checks++;
              if (us[p] !== e) begin
                failures++;
                $display("MISMATCH i=%0d l=%0d p=%0d got=%0d exp=%0d", b, l, p, us[p], e);
              end
            end
          end
        end
        upd = 1; u_hat = u[b];
        @(negedge clk);
      end
      upd = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
