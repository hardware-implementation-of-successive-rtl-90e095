// tb_sc_decision: exhaustive test of the hard-decision unit at Q = 5:
// a bit is 1 only for a negative-signed LLR of a non-frozen position.
module tb_sc_decision;
  localparam int unsigned Q = 5;
  logic [Q-1:0] llr;
  logic frozen, u_hat;
  int checks = 0, failures = 0;

  sc_decision #(.Q(Q)) dut (.llr, .frozen, .u_hat);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_u;
    for (int v = 0; v < (1 << Q); v++) begin
      for (int f = 0; f < 2; f++) begin
        llr = Q'(v);
        frozen = f[0];
        #1;
        exp_u = (v >= (1 << (Q - 1))) && (f == 0);
        checks++;
        if (u_hat !== exp_u) begin
          failures++;
          $display("MISMATCH llr=%b frozen=%0d got=%0d", llr, frozen, u_hat);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
