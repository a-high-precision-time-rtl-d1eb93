// tb_dfpf_precision: timing precision of the DFPF datapath on noisy
// Gaussian pulses, at its default size (512-point records).
//
// For each of three pulse/sampling settings, RECS records are generated with
// the second pulse delayed by a fixed tau and white Gaussian noise at 64 dB
// SNR (peak amplitude 20000 LSB over noise RMS) added to both channels; the
// pulse position inside the record is varied at random.  The spread (RMS)
// of the measured tau is reported in picoseconds and must stay below twice
// the precision published for the prototype or its simulations at 64 dB:
//   FWHM 117.75 ns at 40 MSPS  (sigma = 2.0 samples):  44.6 ps measured
//   FWHM 10.127 ns at 100 MSPS (sigma = 0.43 samples): 18 ps measured
//   FWHM 2.826 ns at 500 MSPS  (sigma = 0.6 samples):  2.9 ps measured
// The mean error must be below that bound too.  The datapath itself works in
// units of the sample period, so the settings differ only in pulse width in
// samples and in the picoseconds per sample.
module tb_dfpf_precision;
  import dfpf_pkg::*;
  localparam int N = N_SAMPLES, KW = $clog2(N);
  localparam real PI = 3.14159265358979323846;
  localparam real AMPL = 20000.0;
  localparam real NOISE = AMPL / 1584.89;   // 64 dB
  localparam int RECS = 48;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  logic smp_valid = 0;
  logic signed [ADC_W-1:0] smp1 = '0, smp2 = '0;
  logic spec_valid, spec_last;   // spec_last is not used by the datapath
  logic [KW-1:0] spec_k;
  logic signed [SPEC_W-1:0] x1_re, x1_im, x2_re, x2_im;
  logic cc_valid, cd_valid;
  logic [KW-1:0] cc_tag, cd_tag;
  logic signed [CC_W-1:0] cc_re, cc_im;
  logic [AMP_W-1:0] cd_amp;
  logic signed [PH_W-1:0] cd_phase;
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

  cordic_model #(.CC_W(CC_W), .AMP_W(AMP_W), .PH_W(PH_W), .PH_F(PH_F), .TAG_W(KW),
                 .LAT(CORDIC_LAT_PAPER)) u_cordic (
    .clk(clk), .rst_n(rst_n), .in_valid(cc_valid), .in_tag(cc_tag), .in_re(cc_re), .in_im(cc_im),
    .out_valid(cd_valid), .out_tag(cd_tag), .out_amp(cd_amp), .out_phase(cd_phase));

  int checks = 0, failures = 0;
  int n_res = 0, n_err = 0;
  real sum_e = 0, sum_e2 = 0, tau_true = 0;

  always @(posedge clk) if (rst_n && res_valid) begin
    real e;
    n_res++;
    if (res_err) n_err++;
    else begin
      e = real'(res_tau) / 65536.0 - tau_true;
      sum_e += e;
      sum_e2 += e * e;
    end
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

  task automatic run(input string name, input real sigma, input real ts_ps, input real tau,
                     input real paper_ps);
    real peak, mean_ps, rms_ps, bound;
    n_res = 0; n_err = 0; sum_e = 0; sum_e2 = 0; tau_true = tau;
    peak = (AMPL * sigma * $sqrt(2.0 * PI)) ** 2 / real'(longint'(1) << (2 * SPEC_W + 1 - CC_W));
    amp_threshold = AMP_W'(longint'(0.05 * peak));
    for (int r = 0; r < RECS; r++) begin
      real t0;
      t0 = 180.0 + real'($urandom_range(0, 10000)) / 100.0;
      for (int n = 0; n < N; n++) begin
        real a1, a2;
        a1 = AMPL * $exp(-((n - t0) ** 2) / (2.0 * sigma * sigma)) + NOISE * gauss_noise();
        a2 = AMPL * $exp(-((n - t0 - tau) ** 2) / (2.0 * sigma * sigma)) + NOISE * gauss_noise();
        @(negedge clk);
        smp_valid = 1;
        smp1 = quant(a1);
        smp2 = quant(a2);
      end
    end
    @(negedge clk) smp_valid = 0;
    repeat (1200) @(posedge clk);
    mean_ps = sum_e / (n_res - n_err) * ts_ps;
    rms_ps = $sqrt(sum_e2 / (n_res - n_err) - (sum_e / (n_res - n_err)) ** 2) * ts_ps;
    bound = 2.0 * paper_ps;
    $display("%s: %0d records, %0d errors, mean error %7.2f ps, RMS %7.2f ps (published %0.1f ps)",
             name, n_res, n_err, mean_ps, rms_ps, paper_ps);
    checks += 3;
    if (n_res != RECS || n_err != 0) begin failures++; $display("  missing or failed results"); end
    if (rms_ps > bound) begin failures++; $display("  RMS above %0.1f ps", bound); end
    if (mean_ps > bound || mean_ps < -bound) begin failures++; $display("  bias above %0.1f ps", bound); end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run("118 ns FWHM, 40 MSPS ", 2.0, 25000.0, 0.4, 44.6);    // tau = 10 ns
    run("10 ns FWHM, 100 MSPS ", 0.43, 10000.0, 1.0, 18.0);   // tau = 10 ns
    run("3 ns FWHM, 500 MSPS  ", 0.6, 2000.0, 5.0, 2.9);      // tau = 10 ns
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * (RECS + 4) * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
