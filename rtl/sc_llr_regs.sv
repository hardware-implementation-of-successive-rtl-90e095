// sc_llr_regs: LLR register bank of the line SC decoder.
//
// Holds 2n-1 Q-bit sign-magnitude cells organised as a tree:
//   cells 0 .. n-1            channel LLRs (the "stage m" region);
//   cells 2n-2^(l+1) .. +2^l-1 results of stage l, for l = m-1 down to 0.
// The channel region is a shift register: each cycle with shift_en the cells
// move one place towards index 0 and llr_in enters at cell n-1, so after n
// shifts the first LLR presented sits in cell 0.
// The write side is the PE-to-memory demultiplexer: when wr_en is high and
// stage l is active, PE p writes cell 2n - 2^(l+1) + p (p < 2^l). Every cell
// has exactly one writer, so the demultiplexer reduces to write enables.
//
// Timing: writes and shifts take effect at the rising clock edge; reads (the
// cells output) are the register contents.
// The paper fixes the cell count, the per-stage organisation, the shift
// capability of the channel region and the output mapping. The shift
// direction and the absence of a reset on the cells (every tree cell is
// written before it is read within a codeword) are this design's choices.
module sc_llr_regs
  import sc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned Q = 5,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned LW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          shift_en,
  input  logic [Q-1:0]  llr_in,
  input  logic          wr_en,
  input  logic [LW-1:0] stage,
  input  logic [Q-1:0]  pe_out [N/2],
  output logic [Q-1:0]  cells  [2*N-1]
);

  // Each cell is a register of its own; the cells array only collects their
  // outputs.

  // channel shift register
  for (genvar k = 0; k < N; k++) begin : g_chan
    logic [Q-1:0] r;
    if (k == N - 1) begin : g_head
      always_ff @(posedge clk) if (shift_en) r <= llr_in;
    end else begin : g_body
      always_ff @(posedge clk) if (shift_en) r <= cells[k+1];
    end
    assign cells[k] = r;
  end

  // stage regions: one writer per cell
  for (genvar s = 0; s < M; s++) begin : g_stage
    for (genvar p = 0; p < (1 << s); p++) begin : g_cell
      logic [Q-1:0] r;
      always_ff @(posedge clk) begin
        if (wr_en && stage == LW'(s)) r <= pe_out[p];
      end
      assign cells[llr_out_base(N, s) + p] = r;
    end
  end

endmodule
