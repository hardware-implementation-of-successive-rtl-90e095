// sc_pe: processing element of the line SC decoder.
//
// Purely combinational. It computes, on sign-magnitude LLRs, either the
// min-sum check-node function
//     f(La, Lb) = sign(La) sign(Lb) min(|La|, |Lb|)
// or the variable-node function
//     g(La, Lb, us) = (-1)^us La + Lb.
// One magnitude comparator is shared by both: it picks min/max for f, and for g
// it chooses which input's sign survives a subtraction. g is done with one
// unsigned adder whose second operand is either the smaller magnitude or its
// two's complement, chosen by XOR of the effective signs (sign(La) xor us
// against sign(Lb)); the structure follows the paper's PE figure.
//
// Interface: la, lb, lo are Q-bit sign-magnitude words (sign in bit Q-1);
// us is the partial sum for g; fn selects f (PE_F) or g (PE_G).
//
// Design choices not fixed by the paper:
//  * the g sum is saturated to the largest magnitude 2^(Q-1)-1 instead of
//    wrapping (the paper keeps q bits everywhere but does not say how the
//    adder overflow is handled);
//  * comparator is "|La| > |Lb|"; on a tie the result of a subtraction is a
//    zero magnitude carrying sign(Lb).
module sc_pe
  import sc_pkg::*;
#(
  parameter int unsigned Q = 5
) (
  input  logic [Q-1:0] la,
  input  logic [Q-1:0] lb,
  input  logic         us,
  input  pe_fn_e       fn,
  output logic [Q-1:0] lo
);
  localparam int unsigned MW = Q - 1;  // magnitude width
  localparam logic [MW-1:0] MAG_MAX = '1;

  logic          sa, sb, sa_eff, a_gt_b, sub;
  logic [MW-1:0] ma, mb, mag_max, mag_min, addend, mag_g;
  logic [MW:0]   sum;
  logic          sf, sg;

  always_comb begin
    sa      = la[Q-1];
    sb      = lb[Q-1];
    ma      = la[MW-1:0];
    mb      = lb[MW-1:0];
    // shared comparator
    a_gt_b  = (ma > mb);
    mag_max = a_gt_b ? ma : mb;
    mag_min = a_gt_b ? mb : ma;
    // f: sign is the XOR of the input signs, magnitude is the minimum
    sf      = sa ^ sb;
    // g: La is negated when us = 1
    sa_eff  = sa ^ us;
    sub     = sa_eff ^ sb;
    addend  = sub ? (~mag_min + MW'(1)) : mag_min;
    sum     = {1'b0, mag_max} + {1'b0, addend};
    if (sub)         mag_g = sum[MW-1:0];   // |max| - |min|, carry discarded
    else if (sum[MW]) mag_g = MAG_MAX;      // saturate on overflow
    else             mag_g = sum[MW-1:0];
    sg      = a_gt_b ? sa_eff : sb;
    lo      = (fn == PE_G) ? {sg, mag_g} : {sf, mag_min};
  end

endmodule
