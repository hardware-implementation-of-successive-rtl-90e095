// sc_frozen_rom: frozen-bit ROM of the line SC decoder.
//
// One bit per position of u: 1 marks a frozen bit (always decoded as 0),
// 0 an information bit. The read is combinational on the bit index.
// The ROM size depends only on n; its contents select the code rate and the
// design SNR, which is why the architecture keeps them in a ROM.
//
// The contents are computed at elaboration with the Bhattacharyya-parameter
// construction for BPSK over AWGN at a design Eb/N0 of DESIGN_EBN0_DB:
//     z0 = exp(-R Eb/N0), R = K/N;
//     for each index i, walk its m bits from the most significant one down:
//       bit 0 -> z = 2z - z^2,  bit 1 -> z = z^2;
//     the K indices with the smallest z carry information (on equal z the
//     lower index first), the rest are frozen.
// The K-th smallest z is located by bisection on a threshold, which keeps the
// elaboration-time work at about 60 n comparisons.
// The published architecture names the Tal-Vardy code construction but gives
// no frozen set, so this construction and the 2 dB design point are this
// design's choices. Any other frozen set can be used by changing FROZEN.
module sc_frozen_rom #(
  parameter int unsigned N              = 1024,
  parameter int unsigned K              = N / 2,
  parameter real         DESIGN_EBN0_DB = 2.0,
  localparam int unsigned M = $clog2(N)
) (
  input  logic [M-1:0] addr,
  output logic         frozen
);

  function automatic logic [N-1:0] construct();
    real          z [N];
    real          z0, lo, hi, mid;
    int unsigned  cnt, taken;
    logic [N-1:0] f;
    z0 = $exp(-(real'(K) / real'(N)) * (10.0 ** (DESIGN_EBN0_DB / 10.0)));
    for (int unsigned i = 0; i < N; i++) begin
      z[i] = z0;
      for (int b = int'(M) - 1; b >= 0; b--) begin
        if (((i >> b) & 1) == 1) z[i] = z[i] * z[i];
        else                     z[i] = 2.0 * z[i] - z[i] * z[i];
      end
    end
    // invariant: fewer than K values <= lo, at least K values <= hi
    lo = -1.0;
    hi = 1.0;
    for (int it = 0; it < 60; it++) begin
      mid = (lo + hi) / 2.0;
      cnt = 0;
      for (int unsigned i = 0; i < N; i++) if (z[i] <= mid) cnt++;
      if (cnt >= K) hi = mid;
      else          lo = mid;
    end
    taken = 0;
    for (int unsigned i = 0; i < N; i++) begin
      f[i] = !(z[i] <= lo);
      if (!f[i]) taken++;
    end
    for (int unsigned i = 0; i < N; i++) begin
      if (f[i] && z[i] <= hi && taken < K) begin
        f[i] = 1'b0;
        taken++;
      end
    end
    return f;
  endfunction

  localparam logic [N-1:0] FROZEN = construct();

  assign frozen = FROZEN[addr];

endmodule
