// sc_llr_mux: memory-to-PE multiplexer network of the line SC decoder.
//
// When stage l is active, PE p (p < 2^l) reads
//     La = MEM(2n - 2^(l+2) + 2p),   Lb = MEM(2n - 2^(l+2) + 2p + 1),
// i.e. stage l consumes the 2^(l+1) cells written by stage l+1 (the channel
// region for l = m-1). PE p can only be active in stages l with 2^l > p, so
// its input multiplexer has one leg per such stage: PE 0 sees m legs, PEs
// n/4 .. n/2-1 see only the channel. Inactive PEs receive zero.
//
// Purely combinational. The mapping is the paper's; building it as one small
// per-PE multiplexer (instead of a full crossbar) follows from it.
module sc_llr_mux
  import sc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned Q = 5,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned LW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [Q-1:0]  cells [2*N-1],
  input  logic [LW-1:0] stage,
  output logic [Q-1:0]  la    [N/2],
  output logic [Q-1:0]  lb    [N/2]
);

  for (genvar p = 0; p < N / 2; p++) begin : g_pe
    logic [Q-1:0] leg_a [M];
    logic [Q-1:0] leg_b [M];
    for (genvar s = 0; s < M; s++) begin : g_leg
      if (p < (1 << s)) begin : g_used
        assign leg_a[s] = cells[llr_in_base(N, s) + 2 * p];
        assign leg_b[s] = cells[llr_in_base(N, s) + 2 * p + 1];
      end else begin : g_unused
        assign leg_a[s] = '0;
        assign leg_b[s] = '0;
      end
    end
    always_comb begin
      la[p] = '0;
      lb[p] = '0;
      for (int unsigned s = 0; s < M; s++) begin
        if (stage == LW'(s)) begin
          la[p] = leg_a[s];
          lb[p] = leg_b[s];
        end
      end
    end
  end

endmodule
