// tb_sc_line_decoder: end-to-end test of the line SC decoder at n = 64 (rate 1/2).
//
// Each codeword carries random information bits on the non-frozen positions
// (frozen set from the reference construction, rate 1/2, 2 dB), is polar
// encoded, sent as BPSK over AWGN at a rotating Eb/N0, clipped at +-3 sigma
// and quantised to Q-bit sign-magnitude LLRs. Every decoded bit is compared
// with a stand-alone successive-cancellation reference (tb_sc_ref_pkg), bit
// for bit, including the frozen flag, index and last marker.
// Timing checks: each codeword keeps the decoder busy exactly 2n-2 cycles and
// produces n bits; codewords offered without gaps start every 2n cycles.
// Mechanism coverage, each must occur at least once: f and g cycles, g
// saturation, a frozen bit whose LLR sign would have decided 1, input
// backpressure (llr_valid while llr_ready is low), channel loading
// overlapped with decoding, a start from idle after a pause in the input.
module tb_sc_line_decoder;
  import sc_pkg::*;
  import tb_sc_ref_pkg::*;

  localparam int unsigned N   = 64;
  localparam int unsigned Q   = 5;
  localparam int unsigned M   = $clog2(N);
  localparam int unsigned NCW = 12;

  logic         clk = 0, rst_n = 0;
  logic [Q-1:0] llr_in = '0;
  logic         llr_valid = 0, llr_ready;
  logic         u_valid, u_hat, u_last, u_frozen, busy;
  logic [M-1:0] u_idx;

  sc_line_decoder #(.N(N), .Q(Q), .K(N / 2)) dut (
    .clk, .rst_n, .llr_in, .llr_valid, .llr_ready,
    .u_valid, .u_hat, .u_idx, .u_last, .u_frozen, .busy
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  initial begin
    #(2000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit   frz [];
  llr_t cw_llr [NCW][];
  bit   cw_exp [NCW][];
  bit   cw_msg [NCW][];
  bit   cw_gaps [NCW];

  // mechanism counters
  int n_f = 0, n_g = 0, n_sat = 0, n_frozen_forced = 0, n_stall = 0;
  int n_overlap = 0, n_idle_start = 0, n_pause_start = 0;
  int cycle = 0;
  int starts [$];
  int busy_cycles = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // datapath/control observation
  always @(negedge clk) if (rst_n) begin
    if (busy) begin
      busy_cycles++;
      if (dut.fn == PE_G) n_g++; else n_f++;
      if (dut.dec && dut.frozen && dut.pe_out[0][Q-1]) n_frozen_forced++;
    end
    if (llr_valid && !llr_ready) n_stall++;
    if (dut.shift_en && busy) n_overlap++;
  end
  logic busy_d = 0;
  int   idle_run = 0;
  always @(posedge clk) begin
    busy_d <= busy;
    idle_run <= busy ? 0 : idle_run + 1;
    if (rst_n && busy && !busy_d) begin
      starts.push_back(cycle);
      n_idle_start++;
      // more idle cycles than the two of a continuous stream
      if (starts.size() > 1 && idle_run > 2) n_pause_start++;
    end
  end

  // output checker
  int out_cw = 0, out_bit = 0, msg_errs = 0, fr_errs = 0;
  always @(posedge clk) if (rst_n && u_valid) begin
    if (out_cw < NCW) begin
      chk(int'(u_idx) == out_bit, $sformatf("cw %0d index %0d expected %0d", out_cw, u_idx, out_bit));
      chk(u_hat == cw_exp[out_cw][out_bit],
          $sformatf("cw %0d bit %0d got %0d ref %0d", out_cw, out_bit, u_hat, cw_exp[out_cw][out_bit]));
      chk(u_frozen == frz[out_bit], $sformatf("cw %0d bit %0d frozen flag", out_cw, out_bit));
      chk(u_last == (out_bit == N - 1), $sformatf("cw %0d bit %0d last flag", out_cw, out_bit));
      if (!frz[out_bit] && u_hat != cw_msg[out_cw][out_bit]) msg_errs++;
    end else begin
      chk(0, "output beyond the last codeword");
    end
    if (out_bit == N - 1) begin
      out_cw++;
      out_bit = 0;
      if (msg_errs != 0) fr_errs++;
      msg_errs = 0;
    end else begin
      out_bit++;
    end
  end

  initial begin
    bit x[];
    int nsat;
    real ebn0_db, sigma;
    ref_frozen(N, N / 2, 2.0, frz);
    for (int c = 0; c < NCW; c++) begin
      bit u[];
      u = new[N];
      cw_msg[c] = new[N];
      for (int k = 0; k < N; k++) begin
        cw_msg[c][k] = frz[k] ? 1'b0 : 1'($urandom);
        u[k] = cw_msg[c][k];
      end
      polar_encode(u, x);
      ebn0_db = real'(c % 4);                    // 0, 1, 2, 3 dB
      sigma = $sqrt(1.0 / (2.0 * 0.5 * (10.0 ** (ebn0_db / 10.0))));
      cw_llr[c] = new[N];
      for (int k = 0; k < N; k++) cw_llr[c][k] = channel_sample(x[k], sigma, Q);
      ref_decode(cw_llr[c], frz, Q, cw_exp[c], nsat);
      n_sat += nsat;
      cw_gaps[c] = (c % 3 == 2);
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int c = 0; c < NCW; c++) begin
      if (c == NCW - 1 && NCW > 2) begin
        // let the decoder run dry once, so that a codeword starts from idle
        llr_valid = 0;
        wait (!busy);
        @(negedge clk);
      end
      for (int k = 0; k < N; k++) begin
        if (cw_gaps[c]) begin
          llr_valid = 0;
          while ($urandom_range(3) == 0) @(negedge clk);
        end
        llr_in = cw_llr[c][k][Q-1:0];
        llr_valid = 1;
        @(posedge clk);
        while (!llr_ready) @(posedge clk);
        @(negedge clk);
      end
      llr_valid = 0;
    end
    wait (out_cw == NCW);
    repeat (4) @(negedge clk);

    chk(!busy, "decoder idle at the end");
    chk(busy_cycles == NCW * (2 * N - 2), $sformatf("busy cycles %0d, expected %0d", busy_cycles, NCW * (2 * N - 2)));
    chk(starts.size() == NCW, $sformatf("%0d starts", starts.size()));
    // codewords 0 and 1 are both offered without gaps
    if (starts.size() >= 2)
      chk(starts[1] - starts[0] == 2 * N, $sformatf("period %0d, expected %0d", starts[1] - starts[0], 2 * N));
    chk(n_f > 0,             "no f cycle");
    chk(n_g > 0,             "no g cycle");
    chk(n_sat > 0,           "no g saturation");
    chk(n_frozen_forced > 0, "no frozen bit forced to 0");
    chk(n_stall > 0,         "no input backpressure");
    chk(n_overlap > 0,       "no loading overlapped with decoding");
    chk(n_pause_start > 0,   "no start after a pause in the input");
    $display("codewords=%0d frame_errors_vs_sent=%0d f=%0d g=%0d sat=%0d frozen_forced=%0d stall=%0d overlap=%0d starts=%0d after_pause=%0d",
             NCW, fr_errs, n_f, n_g, n_sat, n_frozen_forced, n_stall, n_overlap, n_idle_start, n_pause_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
