// sc_ctrl: general control of the line SC decoder.
//
// Two counters drive the whole datapath:
//   i  - index of the bit being decoded, 0 .. n-1;
//   l  - active stage. It counts down to 0; after the decision at stage 0 it
//        is reloaded with ffs*(i+1), the position of the lowest set bit of
//        i+1 (m-1 when i+1 wraps to 0). Reusing the LLRs kept in the tree,
//        only stages ffs*(i+1) .. 0 must run for the next bit, so one codeword
//        takes exactly 2n-2 cycles (stage l runs 2^(m-l) times).
// The PE function is f when bit l of i is 0 and g when it is 1.
//
// Channel loading (this design's choice; the paper only says the channel
// region is a shift register): llr_ready is high while fewer than n LLRs are
// buffered and the channel cells are free, i.e. the decoder is idle or has
// passed bit n/2, after which stage m-1 (the only reader of the channel
// cells) has done its last g (that cycle included: the shift lands at the
// clock edge, after the read). A decode starts in the cycle after n LLRs are
// buffered and the decoder is idle. Loading thus overlaps the second half of
// decoding for n-1 of the n LLRs; in a continuous stream one codeword takes
// 2n cycles: 2n-2 decoding cycles, one cycle for the last LLR and one start
// cycle.
//
// Outputs are combinational from the counters; the counters change at the
// rising edge of clk. Synchronous active-low reset.
module sc_ctrl
  import sc_pkg::*;
#(
  parameter int unsigned N = 1024,
  localparam int unsigned M  = $clog2(N),
  localparam int unsigned LW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          llr_valid,
  output logic          llr_ready,
  output logic          shift_en,    // channel shift register advances
  output logic          busy,        // a stage is active this cycle
  output logic [LW-1:0] stage,
  output pe_fn_e        fn,
  output logic [M-1:0]  bit_idx,
  output logic          dec,         // stage 0 active: bit bit_idx is decided
  output logic          last         // decision on bit n-1
);

  logic [M:0]    cnt;      // LLRs buffered for the next codeword
  logic [M-1:0]  i_q;
  logic [LW-1:0] l_q;
  logic          busy_q;
  logic          full, start;
  logic [M-1:0]  i_inc;

  // ffs*(x): index of the lowest set bit of x, m-1 when x = 0
  function automatic logic [LW-1:0] ffs_star(input logic [M-1:0] x);
    ffs_star = LW'(M - 1);
    for (int k = int'(M) - 1; k >= 0; k--) begin
      if (x[k]) ffs_star = LW'(k);
    end
  endfunction

  always_comb begin
    full      = (cnt == (M+1)'(N));
    llr_ready = !full && (!busy_q || i_q[M-1]);
    shift_en  = llr_valid && llr_ready;
    busy      = busy_q;
    stage     = l_q;
    bit_idx   = i_q;
    fn        = i_q[l_q] ? PE_G : PE_F;
    dec       = busy_q && (l_q == '0);
    last      = dec && (i_q == M'(N - 1));
    start     = full && !busy_q;
    i_inc     = i_q + M'(1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt    <= '0;
      i_q    <= '0;
      l_q    <= LW'(M - 1);
      busy_q <= 1'b0;
    end else begin
      if (start)         cnt <= '0;
      else if (shift_en) cnt <= cnt + (M+1)'(1);

      if (start) begin
        busy_q <= 1'b1;
        i_q    <= '0;
        l_q    <= LW'(M - 1);
      end else if (busy_q) begin
        if (l_q == '0) begin
          if (last) busy_q <= 1'b0;
          i_q <= i_inc;
          l_q <= ffs_star(i_inc);
        end else begin
          l_q <= l_q - LW'(1);
        end
      end
    end
  end

  // the stage counter never leaves 0 .. m-1
  a_stage_range : assert property (@(posedge clk) disable iff (!rst_n) int'(l_q) < int'(M));
  // no channel LLR is accepted while stage m-1 may still read the channel cells
  a_no_shift_in_use : assert property (@(posedge clk) disable iff (!rst_n)
                                       busy_q && !i_q[M-1] |-> !shift_en);

endmodule
