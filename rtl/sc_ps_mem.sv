// sc_ps_mem: partial-sum memory of the line SC decoder.
//
// n-1 one-bit cells; stage l owns cells n - 2^(l+1) .. n - 2^(l+1) + 2^l - 1
// and PE p reads cell n - 2^(l+1) + p as its us input while stage l is active
// (the paper's read mapping). The region of stage l holds the encoding, by the
// size-2^l polar transform, of the bits already decided in the first half of
// the current 2^(l+1)-bit block; stage l's g operations consume it once bit
// l of i turns to 1.
//
// Update, on each decided bit u_i (upd = 1), for every stage l with i_l = 0:
// let r = i mod 2^l (position inside the half block) and
// z* = bitrev_l(p) (the transform column of cell p). Then
//     r = 0      : cell p <- u_i if p = 0, else 0 (start of a new block);
//     otherwise  : cell p <- cell p xor u_i if z* AND NOT r = 0.
// This is the paper's update rule (the node updates when i_l = 0 and
// not(i) and z* is zero) applied to the time-multiplexed n-1 cells; the
// explicit restart at r = 0, which replaces a per-codeword clear of the
// n/2 log n graph sums, is this design's formulation.
//
// Timing: updates at the rising edge of clk; us is combinational from the
// cells and the stage number. Synchronous active-low reset clears all cells.
module sc_ps_mem
  import sc_pkg::*;
#(
  parameter int unsigned N = 1024,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned LW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          upd,
  input  logic [M-1:0]  i,
  input  logic          u_hat,
  input  logic [LW-1:0] stage,
  output logic          us [N/2]
);

  logic cells [N-1];

  for (genvar s = 0; s < M; s++) begin : g_stage
    for (genvar p = 0; p < (1 << s); p++) begin : g_cell
      localparam int unsigned C  = ps_base(N, s) + p;
      localparam int unsigned ZS = bitrev(p, s);
      logic c_q;
      if (s == 0) begin : g_s0
        always_ff @(posedge clk) begin
          if (!rst_n)            c_q <= 1'b0;
          else if (upd && !i[0]) c_q <= u_hat;
        end
      end else begin : g_sn
        logic [s-1:0] r;
        assign r = i[s-1:0];
        always_ff @(posedge clk) begin
          if (!rst_n) c_q <= 1'b0;
          else if (upd && !i[s]) begin
            if (r == '0)                  c_q <= (p == 0) ? u_hat : 1'b0;
            else if ((s'(ZS) & ~r) == '0) c_q <= c_q ^ u_hat;
          end
        end
      end
      assign cells[C] = c_q;
    end
  end

  // read mapping onto the PE line
  for (genvar p = 0; p < N / 2; p++) begin : g_pe
    logic leg [M];
    for (genvar s = 0; s < M; s++) begin : g_leg
      if (p < (1 << s)) begin : g_used
        assign leg[s] = cells[ps_base(N, s) + p];
      end else begin : g_unused
        assign leg[s] = 1'b0;
      end
    end
    always_comb begin
      us[p] = 1'b0;
      for (int unsigned s = 0; s < M; s++) begin
        if (stage == LW'(s)) us[p] = leg[s];
      end
    end
  end

endmodule
