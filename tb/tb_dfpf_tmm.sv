// tb_dfpf_tmm: end-to-end test of the DFPF time-measurement datapath at its
// default size (512-point records, default word widths).
//
// Two Gaussian pulses with standard deviation 2 samples (50 ns at 40 MSPS,
// FWHM 118 ns), amplitude 20000 LSB of a 16-bit ADC, the second one delayed
// by tau, are streamed as records of 512 samples, back to back, into
// behavioural FFT models (174-cycle latency); the datapath's CORDIC port is
// closed by a behavioural CORDIC model (13-cycle latency).  Every record's
// tau result is compared with the true delay:
//   * noise-free records, tau from -1 us to +1 us: error < 0.002 Ts (50 ps);
//   * records with white noise at 64 dB SNR: error < 0.02 Ts (500 ps);
//   * a record with the threshold above every bin: res_err, 0 points.
// The cycle count from bin N/2-1 entering the datapath to the record's
// result must stay within the 141 cycles that the prototype's timing leaves
// after its FFT (20.675 us in all, less 12.8 us of samples and 4.350 us of
// FFT, at 40 MHz).  The test counts how often each mechanism
// happens and fails if one never does: bins selected and rejected by the
// threshold, phase unwrap steps, and error results.  It also reports how
// many cycles the fitting stage held entries back in the FIFO; with records
// closing at bin N/2-1 the division ends while the upper half of the
// spectrum streams by, so this stays 0 here (the phase_fit test covers it).
module tb_dfpf_tmm;
  import dfpf_pkg::*;
  localparam int N = N_SAMPLES, KW = $clog2(N), TAG_W = KW;
  localparam real PI = 3.14159265358979323846;
  localparam real SIGMA = 2.0, AMPL = 20000.0;
  localparam int POST_BUDGET = TOTAL_LAT_PAPER - N_SAMPLES - FFT_LAT_PAPER;   // 141 cycles

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;   // 40 MHz

  // ADC samples
  logic smp_valid = 0;
  logic signed [ADC_W-1:0] smp1 = '0, smp2 = '0;

  // FFT -> DUT
  logic spec_valid, spec_last;  // spec_last is not used by the datapath
  logic [KW-1:0] spec_k;
  logic signed [SPEC_W-1:0] x1_re, x1_im, x2_re, x2_im;
  // DUT <-> CORDIC
  logic cc_valid, cd_valid;
  logic [TAG_W-1:0] cc_tag, cd_tag;
  logic signed [CC_W-1:0] cc_re, cc_im;
  logic [AMP_W-1:0] cd_amp;
  logic signed [PH_W-1:0] cd_phase;
  // result
  logic [AMP_W-1:0] amp_threshold = '0;
  logic res_valid, res_err, fifo_overflow;
  logic signed [SLOPE_W-1:0] res_slope;
  logic signed [TAU_W-1:0] res_tau;
  logic [$clog2(N/2+1)-1:0] res_n;

  fft_model #(.N(N), .ADC_W(ADC_W), .SPEC_W(SPEC_W), .LAT(FFT_LAT_PAPER)) u_fft (
    .clk(clk), .rst_n(rst_n), .in_valid(smp_valid), .in_x1(smp1), .in_x2(smp2),
    .out_valid(spec_valid), .out_last(spec_last), .out_k(spec_k),
    .x1_re(x1_re), .x1_im(x1_im), .x2_re(x2_re), .x2_im(x2_im));

  dfpf_tmm dut (.*);

  cordic_model #(.CC_W(CC_W), .AMP_W(AMP_W), .PH_W(PH_W), .PH_F(PH_F), .TAG_W(TAG_W),
                 .LAT(CORDIC_LAT_PAPER)) u_cordic (
    .clk(clk), .rst_n(rst_n), .in_valid(cc_valid), .in_tag(cc_tag), .in_re(cc_re), .in_im(cc_im),
    .out_valid(cd_valid), .out_tag(cd_tag), .out_amp(cd_amp), .out_phase(cd_phase));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results, one per record, in order
  typedef struct { real tau; real tol; bit err; longint last_smp; } exp_t;
  exp_t expq[$];
  int n_results = 0;
  longint close_q[$];   // cycles at which bin N/2-1 of each record entered
  always @(posedge clk) if (rst_n && spec_valid && spec_k == KW'(N / 2 - 1)) close_q.push_back(cycle);
  // threshold per record, applied when that record's bins reach the selector
  real thr_q[$];

  // mechanism counters
  int n_sel = 0, n_rej = 0, n_wrap = 0, n_hold = 0, n_err = 0, worst_lat = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_coincide.in_valid && dut.u_coincide.in_k < N / 2) begin
      if (dut.u_coincide.in_amp >= amp_threshold) n_sel++; else n_rej++;
    end
    if (dut.u_unwrap.wrap_event) n_wrap++;
    if (!dut.fifo_empty && !dut.fit_ready) n_hold++;
    if (fifo_overflow) begin failures++; $display("FIFO overflow"); end
  end

  // the threshold of the next record is applied once the selector has seen
  // bin N-1 of the current one
  always @(posedge clk) if (rst_n && cd_valid && cd_tag == '1 && thr_q.size() > 1) begin
    void'(thr_q.pop_front());
    amp_threshold <= AMP_W'(longint'(thr_q[0]));
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    exp_t e;
    real got, err;
    int lat;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      e = expq.pop_front();
      lat = int'(cycle - close_q.pop_front()) - 1;
      if (lat > worst_lat) worst_lat = lat;
      got = real'(res_tau) / 65536.0;
      err = got - e.tau;
      if (res_err) n_err++;
      $display("record %0d: tau %9.5f Ts, measured %9.5f Ts (error %8.2f ps at 25 ns Ts), %0d bins, err=%b, %0d cycles after bin N/2-1, %0d after the last sample",
               n_results, e.tau, got, err * 25000.0, res_n, res_err, lat, cycle - e.last_smp - 1);
      if (res_err !== e.err) begin failures++; $display("  wrong error flag"); end
      else if (!e.err && (err > e.tol || err < -e.tol)) begin failures++; $display("  outside tolerance"); end
      checks++;
      if (lat > POST_BUDGET) begin failures++; $display("  latency above %0d cycles", POST_BUDGET); end
    end
    n_results++;
  end

  function automatic real gauss_noise();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000000.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic logic signed [ADC_W-1:0] quant(input real v);
    longint q;
    q = (v >= 0.0) ? longint'($rtoi(v + 0.5)) : -longint'($rtoi(-v + 0.5));
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return ADC_W'(q);
  endfunction

  // One record: pulse 1 at t0, pulse 2 at t0 + tau (both in samples).
  task automatic record(input real t0, input real tau, input real noise_rms,
                        input real tol, input real thr, input bit exp_err);
    exp_t e;
    e.tau = tau; e.tol = tol; e.err = exp_err;
    thr_q.push_back(thr);
    for (int n = 0; n < N; n++) begin
      real a1, a2;
      a1 = AMPL * $exp(-((n - t0) ** 2) / (2.0 * SIGMA * SIGMA));
      a2 = AMPL * $exp(-((n - t0 - tau) ** 2) / (2.0 * SIGMA * SIGMA));
      if (noise_rms > 0.0) begin
        a1 += noise_rms * gauss_noise();
        a2 += noise_rms * gauss_noise();
      end
      @(negedge clk);
      smp_valid = 1;
      smp1 = quant(a1);
      smp2 = quant(a2);
    end
    e.last_smp = cycle + 1;   // the edge after this negedge takes the last sample
    expq.push_back(e);
  endtask

  // |R(0)| = (AMPL * SIGMA * sqrt(2 pi))^2 / 2^(2*SPEC_W+1-CC_W); 5% of it
  localparam real PEAK = (AMPL * SIGMA * 2.5066282746) ** 2 / real'(longint'(1) << (2 * SPEC_W + 1 - CC_W));
  localparam real THR5 = 0.05 * PEAK;
  localparam real NOISE64 = AMPL / 1584.9;  // 64 dB SNR

  initial begin
    amp_threshold = AMP_W'(longint'(THR5));
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    record(200.3, 0.4, 0.0, 0.002, THR5, 0);     // 10 ns
    record(180.0, 0.0, 0.0, 0.002, THR5, 0);     // 0 ns
    record(150.7, 40.0, 0.0, 0.002, THR5, 0);    // 1 us
    record(230.2, -40.0, 0.0, 0.002, THR5, 0);   // -1 us
    record(210.0, 20.0, 0.0, 0.002, THR5, 0);    // 500 ns
    record(200.0, 0.4, 0.0, 0.0, 1.0e9, 1);      // threshold above every bin
    record(190.9, 0.4, NOISE64, 0.02, THR5, 0);  // 10 ns, 64 dB
    record(199.5, 13.37, NOISE64, 0.02, THR5, 0);
    @(negedge clk) smp_valid = 0;
    repeat (800) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("mechanisms: selected %0d, rejected %0d, unwrap steps %0d, FIFO held %0d cycles, error results %0d, worst latency %0d cycles",
             n_sel, n_rej, n_wrap, n_hold, n_err, worst_lat);
    checks += 4;
    if (n_sel == 0)  begin failures++; $display("no bin selected"); end
    if (n_rej == 0)  begin failures++; $display("no bin rejected"); end
    if (n_wrap == 0) begin failures++; $display("no unwrap step"); end
    if (n_err == 0)  begin failures++; $display("no error result"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
