// tb_sc_sweep_unit: one configuration of the multi-length regression
// (tb_sc_line_decoder_sweep). Streams NCW noisy codewords through a decoder of
// length N and Q-bit LLRs, Eb/N0 stepping through 0 .. 4 dB from one codeword to the next,
// and compares every decided bit with the reference SC decoder. Raises done
// when the last bit has been checked; reports checks, mismatches and, per
// Eb/N0, frame errors against the transmitted message (information only, the
// decoder is not expected to correct every frame).
module tb_sc_sweep_unit
  import tb_sc_ref_pkg::*;
#(
  parameter int unsigned N   = 64,
  parameter int unsigned NCW = 100,
  parameter int unsigned Q   = 5
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned M = $clog2(N);

  logic [Q-1:0] llr_in;
  logic         llr_valid, llr_ready;
  logic         u_valid, u_hat, u_last, u_frozen, busy;
  logic [M-1:0] u_idx;

  sc_line_decoder #(.N(N), .Q(Q), .K(N / 2)) dut (
    .clk, .rst_n, .llr_in, .llr_valid, .llr_ready,
    .u_valid, .u_hat, .u_idx, .u_last, .u_frozen, .busy
  );

  bit   frz [];
  bit   exp_q [$];     // expected decoder output, bit by bit
  bit   msg_q [$];     // transmitted u
  int   fer [5];
  int   frames [5];
  int   out_bits = 0;
  bit   frame_err = 0;

  initial begin
    checks = 0;
    failures = 0;
    done = 0;
    llr_valid = 0;
    llr_in = '0;
    foreach (fer[d]) begin fer[d] = 0; frames[d] = 0; end
    ref_frozen(N, N / 2, 2.0, frz);
    wait (rst_n);
    for (int c = 0; c < NCW; c++) begin
      bit u[], x[], d[];
      llr_t llr[];
      int nsat;
      real sigma;
      u = new[N];
      llr = new[N];
      for (int k = 0; k < N; k++) u[k] = frz[k] ? 1'b0 : 1'($urandom);
      polar_encode(u, x);
      sigma = $sqrt(1.0 / (2.0 * 0.5 * (10.0 ** (real'(c % 5) / 10.0))));
      for (int k = 0; k < N; k++) llr[k] = channel_sample(x[k], sigma, Q);
      ref_decode(llr, frz, Q, d, nsat);
      for (int k = 0; k < N; k++) begin
        exp_q.push_back(d[k]);
        msg_q.push_back(u[k]);
      end
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        llr_in = llr[k][Q-1:0];
        llr_valid = 1;
        @(posedge clk);
        while (!llr_ready) @(posedge clk);
      end
      @(negedge clk);
      llr_valid = 0;
    end
  end

  always @(posedge clk) if (rst_n && u_valid) begin
    bit e, m;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
    end else begin
      e = exp_q.pop_front();
      m = msg_q.pop_front();
      if (u_hat !== e || int'(u_idx) != out_bits % N) begin
        failures++;
        if (failures < 10) $display("n=%0d q=%0d MISMATCH bit %0d got %0d ref %0d", N, Q, out_bits, u_hat, e);
      end
      if (u_hat != m) frame_err = 1;
    end
    out_bits++;
    if (out_bits % N == 0) begin
      int snr;
      snr = (out_bits / N - 1) % 5;
      frames[snr]++;
      fer[snr] += int'(frame_err);
      frame_err = 0;
      if (out_bits == NCW * N) begin
        for (int k = 0; k < 5; k++)
          $display("n=%0d q=%0d Eb/N0=%0d dB frames=%0d frame_errors=%0d", N, Q, k, frames[k], fer[k]);
        done <= 1;
      end
    end
  end
endmodule
