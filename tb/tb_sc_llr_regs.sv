// tb_sc_llr_regs: LLR register bank at n = 16, Q = 5.
// 1. Shifts in 16 random LLRs and checks that the first one lands in cell 0
//    and the last in cell 15.
// 2. For every stage l, drives random PE outputs with wr_en and checks that
//    exactly cells 2n-2^(l+1)+p (p < 2^l) took PE p's value and all other
//    cells kept theirs; a cycle with wr_en low must change nothing.
module tb_sc_llr_regs;
  localparam int unsigned N = 16, Q = 5, M = 4, LW = 2;

  logic          clk = 0;
  logic          shift_en;
  logic [Q-1:0]  llr_in;
  logic          wr_en;
  logic [LW-1:0] stage;
  logic [Q-1:0]  pe_out [N/2];
  logic [Q-1:0]  cells  [2*N-1];
  logic [Q-1:0]  model  [2*N-1];
  int checks = 0, failures = 0;

  sc_llr_regs #(.N(N), .Q(Q)) dut (.clk, .shift_en, .llr_in, .wr_en, .stage, .pe_out, .cells);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    for (int c = 0; c < 2 * N - 1; c++) begin
      checks++;
      if (cells[c] !== model[c]) begin
        failures++;
        $display("MISMATCH %s cell %0d got=%h exp=%h", what, c, cells[c], model[c]);
      end
    end
  endtask

  initial begin
    logic [Q-1:0] chan [N];
    shift_en = 0; wr_en = 0; stage = '0; llr_in = '0;
    for (int p = 0; p < N / 2; p++) pe_out[p] = '0;
    // load the channel and give every tree cell a known value
    for (int k = 0; k < N; k++) chan[k] = Q'($urandom);
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      shift_en = 1; llr_in = chan[k];
      @(negedge clk);
    end
    shift_en = 0;
    for (int k = 0; k < N; k++) model[k] = chan[k];
    for (int l = 0; l < M; l++) begin
      for (int p = 0; p < N / 2; p++) pe_out[p] = Q'($urandom);
      wr_en = 1; stage = LW'(l);
      @(negedge clk);
      for (int p = 0; p < (1 << l); p++) model[2 * N - (2 << l) + p] = pe_out[p];
    end
    wr_en = 0;
    compare("load");
    repeat (3) begin
      for (int l = M - 1; l >= 0; l--) begin
        for (int p = 0; p < N / 2; p++) pe_out[p] = Q'($urandom);
        stage = LW'(l);
        wr_en = 0;
        @(negedge clk);
        compare("idle");
        wr_en = 1;
        @(negedge clk);
        for (int p = 0; p < (1 << l); p++) model[2 * N - (2 << l) + p] = pe_out[p];
        compare($sformatf("stage %0d", l));
      end
    end
    wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
