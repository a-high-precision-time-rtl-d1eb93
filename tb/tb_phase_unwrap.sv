// tb_phase_unwrap: self-checking test of the phase unwrapping stage.
// Records of selected entries follow random straight lines in phase (slopes
// up to +-2.4 rad per bin, with noise), folded into (-pi, pi] the way the
// CORDIC core delivers them, interleaved with unselected entries, with random
// back-pressure on the output.  Every accepted output must equal the true
// phase less the whole turns of the record's first point (exact integer
// comparison), pass k/sel/last through, and the number of wrap events must
// match the number of turn changes between consecutive selected points.
module tb_phase_unwrap;
  localparam int KW = 9, PH_W = 16, PH_F = 13, UPH_W = 24;
  localparam longint PI_Q = 25736, TWO_PI_Q = 51472;   // pi and 2 pi, 13 fractional bits

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_last = 0, in_sel = 0;
  logic [KW-1:0] in_k = '0;
  logic signed [PH_W-1:0] in_phase = '0;
  logic out_valid, out_ready = 0, out_last, out_sel, wrap_event;
  logic [KW-1:0] out_k;
  logic signed [UPH_W-1:0] out_phase;

  phase_unwrap #(.KW(KW), .PH_W(PH_W), .PH_F(PH_F), .UPH_W(UPH_W)) dut (.*);

  int checks = 0, failures = 0, wraps = 0, exp_wraps = 0;

  always @(posedge clk) if (rst_n && wrap_event) wraps++;
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  // fold a phase into (-pi, pi] and return the number of turns removed
  function automatic longint turns(input longint p);
    longint m;
    m = 0;
    while (p - m * TWO_PI_Q > PI_Q) m++;
    while (p - m * TWO_PI_Q <= -PI_Q) m--;
    return m;
  endfunction

  task automatic put(input bit last, input bit sel, input int k, input longint folded,
                     input longint expect_out);
    @(negedge clk);
    in_valid = 1; in_last = last; in_sel = sel; in_k = KW'(k); in_phase = PH_W'(folded);
    do begin
      @(posedge clk);
    end while (!out_ready);
    checks++;
    if (out_valid !== 1'b1 || out_k !== KW'(k) || out_sel !== sel || out_last !== last ||
        (sel && out_phase !== UPH_W'(expect_out))) begin
      failures++;
      $display("k %0d: got %0d, expected %0d", k, out_phase, expect_out);
    end
    #1 in_valid = 0;
  endtask

  longint m0, mprev, p, m;   // state of the record being sent

  task automatic record(input real a, input real b, input int npts);
    for (int i = 0; i < npts; i++) begin
      p = longint'($rtoi((a + b * i) * 8192.0)) + longint'($urandom_range(0, 200)) - 100;
      m = turns(p);
      if (i == 0) m0 = m;
      else if (m != mprev) exp_wraps += int'((m > mprev) ? m - mprev : mprev - m);
      mprev = m;
      put(0, 1, i, p - m * TWO_PI_Q, p - m0 * TWO_PI_Q);
      if ($urandom_range(0, 4) == 0) put(0, 0, i, longint'($urandom_range(0, 40000)) - 20000, 0);
    end
    put(1, 0, 255, 0, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    record(0.0, 0.0049, 60);     // 10 ns at 40 MSPS: no wrap
    record(-1.0, 0.49, 70);      // 1 us: many wraps
    record(3.0, -0.49, 70);      // -1 us
    for (int r = 0; r < 20; r++) begin
      int ra, rb;
      ra = $urandom_range(0, 6000);
      rb = $urandom_range(0, 4800);
      record((ra - 3000) / 1000.0, (rb - 2400) / 1000.0, $urandom_range(1, 120));
    end
    checks++;
    if (wraps != exp_wraps || wraps == 0) begin
      failures++;
      $display("wrap events %0d, expected %0d", wraps, exp_wraps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
