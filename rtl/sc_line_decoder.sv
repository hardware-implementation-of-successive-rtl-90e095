// sc_line_decoder: line-architecture successive-cancellation decoder for a
// polar code of length n = N, with Q-bit sign-magnitude LLRs.
//
// A line of n/2 identical processing elements (sc_pe) serves every stage of
// the decoding tree: stage l uses PEs 0 .. 2^l-1. Intermediate LLRs live in a
// register tree of 2n-1 cells (sc_llr_regs) reached through a per-PE input
// multiplexer (sc_llr_mux); partial sums live in n-1 one-bit cells
// (sc_ps_mem). The controller (sc_ctrl) activates one stage per clock cycle
// following the successive-cancellation schedule, so a codeword takes 2n-2
// cycles, and PE 0's stage-0 output is turned into a bit by the decision unit
// (sc_decision) with the frozen set from sc_frozen_rom (K information bits,
// constructed for a design Eb/N0 of DESIGN_EBN0_DB).
//
// Interface
//   llr_in/llr_valid/llr_ready : channel LLRs, one per cycle, lambda_0 first,
//                                transferred when valid and ready are high.
//   u_valid, u_hat, u_idx      : one decided bit per stage-0 cycle, in order
//                                u_0 .. u_{n-1}; u_last flags u_{n-1};
//                                u_frozen tells that the bit was frozen.
//   busy                       : a codeword is being decoded.
// Timing: the first stage runs in the cycle after the n-th LLR is accepted
// (or right after the previous codeword's last cycle); bit outputs are
// registered, one cycle after their stage-0 cycle. The channel for the next
// codeword may be loaded while the second half of the current one is
// decoded, giving one codeword every 2n cycles in a continuous stream.
//
// The architecture, counters, mappings and PE follow the paper; the load
// handshake, output registers and the frozen-set contents are this design's.
module sc_line_decoder
  import sc_pkg::*;
#(
  parameter int unsigned N              = 1024,
  parameter int unsigned Q              = 5,
  parameter int unsigned K              = N / 2,
  parameter real         DESIGN_EBN0_DB = 2.0,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned LW = (M > 1) ? $clog2(M) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [Q-1:0] llr_in,
  input  logic         llr_valid,
  output logic         llr_ready,
  output logic         u_valid,
  output logic         u_hat,
  output logic [M-1:0] u_idx,
  output logic         u_last,
  output logic         u_frozen,
  output logic         busy
);

  logic          shift_en, dec, last;
  logic [LW-1:0] stage;
  pe_fn_e        fn;
  logic [M-1:0]  bit_idx;
  logic          frozen, u_dec;

  logic [Q-1:0]  cells  [2*N-1];
  logic [Q-1:0]  la     [N/2];
  logic [Q-1:0]  lb     [N/2];
  logic          us     [N/2];
  logic [Q-1:0]  pe_out [N/2];

  sc_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .llr_valid, .llr_ready, .shift_en, .busy,
    .stage, .fn, .bit_idx, .dec, .last
  );

  sc_llr_regs #(.N(N), .Q(Q)) u_llr_regs (
    .clk, .shift_en, .llr_in, .wr_en(busy), .stage, .pe_out, .cells
  );

  sc_llr_mux #(.N(N), .Q(Q)) u_llr_mux (
    .cells, .stage, .la, .lb
  );

  sc_ps_mem #(.N(N)) u_ps_mem (
    .clk, .rst_n, .upd(dec), .i(bit_idx), .u_hat(u_dec), .stage, .us
  );

  for (genvar p = 0; p < N / 2; p++) begin : g_pe
    sc_pe #(.Q(Q)) u_pe (
      .la(la[p]), .lb(lb[p]), .us(us[p]), .fn, .lo(pe_out[p])
    );
  end

  sc_frozen_rom #(.N(N), .K(K), .DESIGN_EBN0_DB(DESIGN_EBN0_DB)) u_frozen_rom (
    .addr(bit_idx), .frozen
  );

  sc_decision #(.Q(Q)) u_decision (
    .llr(pe_out[0]), .frozen, .u_hat(u_dec)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u_valid  <= 1'b0;
      u_hat    <= 1'b0;
      u_idx    <= '0;
      u_last   <= 1'b0;
      u_frozen <= 1'b0;
    end else begin
      u_valid  <= dec;
      u_hat    <= u_dec;
      u_idx    <= bit_idx;
      u_last   <= last;
      u_frozen <= frozen;
    end
  end

endmodule
