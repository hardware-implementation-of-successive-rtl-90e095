// tb_sc_llr_mux: memory-to-PE multiplexer network at n = 16, Q = 5.
// With random cell contents, for every stage l PE p must see
// La = MEM(2n - 2^(l+2) + 2p), Lb = MEM(2n - 2^(l+2) + 2p + 1) when p < 2^l and
// zero otherwise. Repeated for several random memory images.
module tb_sc_llr_mux;
  localparam int unsigned N = 16, Q = 5, M = 4, LW = 2;

  logic [Q-1:0]  cells [2*N-1];
  logic [LW-1:0] stage;
  logic [Q-1:0]  la [N/2];
  logic [Q-1:0]  lb [N/2];
  int checks = 0, failures = 0;

  sc_llr_mux #(.N(N), .Q(Q)) dut (.cells, .stage, .la, .lb);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [Q-1:0] ea, eb;
    repeat (8) begin
      for (int c = 0; c < 2 * N - 1; c++) cells[c] = Q'($urandom);
      for (int l = 0; l < M; l++) begin
        stage = LW'(l);
        #1;
        for (int p = 0; p < N / 2; p++) begin
          if (p < (1 << l)) begin
            ea = cells[2 * N - (4 << l) + 2 * p];
            eb = cells[2 * N - (4 << l) + 2 * p + 1];
          end else begin
            ea = '0;
            eb = '0;
          end
          checks += 2;
          if (la[p] !== ea || lb[p] !== eb) begin
            failures++;
            $display("MISMATCH l=%0d p=%0d la=%h/%h lb=%h/%h", l, p, la[p], ea, lb[p], eb);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
