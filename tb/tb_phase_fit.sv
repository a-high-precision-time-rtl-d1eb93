// tb_phase_fit: self-checking test of the least-squares phase fitting stage.
// Each record is a set of bins with phases on a random straight line (slope
// of either sign, intercept, noise of a few LSB, unwrapped values beyond
// +-pi), with random gaps and random stalls on the input.  The expected slope
// and delay are the least-squares solution computed here in floating point
// from the same integer phases; the DUT must agree within 1 LSB of slope and
// 2 LSB of delay.  Records with 0 or 1 point must give res_err.  The result
// must appear exactly DW+4 = 74 cycles after the record's last entry (2 for
// an error record), within the 122-cycle divider budget of the prototype.
// Records follow each other without waiting, so the input must stall.
module tb_phase_fit;
  localparam int N = 512, PH_W = 24, PH_F = 13, QF = 16, KW = 9, CW = 9;
  localparam real PI = 3.14159265358979323846;
  localparam int LAT = 74, LAT_ERR = 2;
  initial if (LAT > 122) $fatal(1, "latency above the divider budget");

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_last = 0, in_sel = 0;
  logic [KW-1:0] in_k = '0;
  logic signed [PH_W-1:0] in_phase = '0;
  logic res_valid, res_err;
  logic signed [31:0] res_slope, res_tau;
  logic [CW-1:0] res_n;

  phase_fit #(.N(N)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, stalls = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expectations queued by the driver, one per record, with the cycle of
  // the record's last entry
  typedef struct { real slope; real tau; int n; bit err; int cyc; } exp_t;
  exp_t expq[$];

  always @(posedge clk) begin
    if (rst_n && in_valid && !in_ready) stalls++;
    if (rst_n && res_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        e = expq.pop_front();
        // cycles from the edge taking the last entry to the edge setting res_valid
        if (cycle - e.cyc - 1 != (e.err ? LAT_ERR : LAT)) begin
          failures++; $display("latency %0d", cycle - e.cyc - 1);
        end
        checks++;
        if (res_err !== e.err || res_n !== CW'(e.n)) begin
          failures++; $display("err/n: got %b %0d, exp %b %0d", res_err, res_n, e.err, e.n);
        end else if (!e.err) begin
          real ds, dt;
          ds = real'(res_slope) - e.slope;
          dt = real'(res_tau) - e.tau;
          if (ds > 1.0 || ds < -1.0 || dt > 2.0 || dt < -2.0) begin
            failures++;
            $display("slope %0d exp %f, tau %0d exp %f", res_slope, e.slope, res_tau, e.tau);
          end
        end
      end
    end
  end

  task automatic send(input bit last, input bit sel, input int k, input longint ph);
    @(negedge clk);
    in_valid = 1; in_last = last; in_sel = sel; in_k = KW'(k); in_phase = PH_W'(ph);
    do @(posedge clk); while (!in_ready);
    if (last) expq[expq.size() - 1].cyc = cycle;
    #1 in_valid = 0;
    if ($urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  task automatic record(input int npts, input real a_rad, input real b_rad, input int noise);
    real sk, skk, sp, skp, den;
    int k, cnt;
    sk = 0; skk = 0; sp = 0; skp = 0; cnt = 0;
    k = $urandom_range(0, 5);
    while (cnt < npts && k < N / 2) begin
      longint ph;
      ph = longint'($rtoi((a_rad + b_rad * k) * 8192.0)) + longint'($urandom_range(0, 2 * noise)) - noise;
      send(0, 1, k, ph);
      sk += k; skk += real'(k) * k; sp += real'(ph); skp += real'(k) * real'(ph);
      cnt++;
      // unselected entries do not count
      if ($urandom_range(0, 9) == 0) send(0, 0, k + 1, 12345);
      k += 1 + (($urandom_range(0, 9) == 0) ? 2 : 0);
    end
    den = cnt * skk - sk * sk;
    begin
      exp_t e;
      e.n = cnt;
      e.err = (cnt < 2);
      e.slope = 0; e.tau = 0; e.cyc = 0;
      if (!e.err) begin
        e.slope = (cnt * skp - sk * sp) / den * 65536.0;        // phase LSB/bin * 2^QF
        e.tau = e.slope / (2.0**(PH_F + QF)) * N / (2.0 * PI) * 65536.0;
      end
      expq.push_back(e);
    end
    send(1, 0, N - 1, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    record(50, 0.0, 0.0049, 0);       // 10 ns at 40 MSPS, N = 512
    record(40, 0.3, -0.02, 3);
    record(200, -1.0, 0.049, 2);      // 1 us: phase runs past +-pi, unwrapped
    record(0, 0.0, 0.0, 0);
    record(1, 0.0, 0.1, 0);
    record(2, 0.1, 0.2, 0);
    for (int i = 0; i < 20; i++) begin
      int ra, rb;
      ra = $urandom_range(0, 2000);
      rb = $urandom_range(0, 2000);
      record($urandom_range(2, 250), (ra - 1000) / 1000.0, (rb - 1000) / 10000.0,
             $urandom_range(0, 20));
    end
    repeat (200) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("input never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
