// tb_sc_pe: exhaustive test of the processing element at Q = 5.
// Every pair of 5-bit sign-magnitude inputs is applied with both values of
// the partial sum and both functions; the output must equal the integer
// min-sum reference (tb_sc_ref_pkg). Also counts saturated g results and
// subtraction ties so that those paths are known to be exercised.
module tb_sc_pe;
  import sc_pkg::*;
  import tb_sc_ref_pkg::*;

  localparam int unsigned Q = 5;

  logic [Q-1:0] la, lb, lo;
  logic         us;
  pe_fn_e       fn;
  int checks = 0, failures = 0;
  int ties = 0;
  int sats = 0;

  sc_pe #(.Q(Q)) dut (.la, .lb, .us, .fn, .lo);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llr_t exp_v;
    for (int a = 0; a < (1 << Q); a++) begin
      for (int b = 0; b < (1 << Q); b++) begin
        for (int k = 0; k < 4; k++) begin
          la = Q'(a);
          lb = Q'(b);
          us = k[0];
          fn = k[1] ? PE_G : PE_F;
          #1;
          if (fn == PE_F) exp_v = ref_f(llr_t'(a), llr_t'(b), Q);
          else begin
            bit sat;
            exp_v = ref_g_sat(llr_t'(a), llr_t'(b), us, Q, sat);
            sats += int'(sat);
          end
          if (fn == PE_G && (a % 16) == (b % 16) && ((a / 16) ^ us) != (b / 16)) ties++;
          checks++;
          if (lo !== exp_v[Q-1:0]) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH fn=%s la=%b lb=%b us=%0d got=%b exp=%b",
                       fn.name(), la, lb, us, lo, exp_v[Q-1:0]);
          end
        end
      end
    end
    checks++;
    if (sats == 0 || ties == 0) begin
      failures++;
      $display("saturation or tie path never exercised");
    end
    $display("g saturations=%0d ties=%0d", sats, ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
