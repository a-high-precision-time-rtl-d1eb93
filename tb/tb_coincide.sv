// tb_coincide: self-checking test of the amplitude-threshold selector.
// Streams random bins (index, amplitude, phase, record end) against a
// threshold that changes between records, and checks the FIFO write port one
// cycle later: written exactly when the bin is in the lower half of the
// spectrum with amplitude >= threshold, or is bin N/2-1, which closes the
// record.
module tb_coincide;
  localparam int N = 512, AMP_W = 41, PH_W = 16, KW = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [AMP_W-1:0] threshold = '0;
  logic in_valid = 0;
  logic [KW-1:0] in_k = '0;
  logic [AMP_W-1:0] in_amp = '0;
  logic signed [PH_W-1:0] in_phase = '0;
  logic wr_en, wr_last, wr_sel;
  logic [KW-1:0] wr_k;
  logic signed [PH_W-1:0] wr_phase;

  coincide #(.N(N), .AMP_W(AMP_W), .PH_W(PH_W)) dut (.*);

  int checks = 0, failures = 0, n_sel = 0, n_rej = 0;
  bit e_en, e_last, e_sel; int e_k, e_ph;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rec = 0; rec < 6; rec++) begin
      threshold = AMP_W'($urandom_range(1000, 60000));
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 7) != 0) || (k == N / 2 - 1);
        in_k     = KW'(k);
        in_amp   = (k == 3) ? threshold : (k == 4) ? threshold - 1 :
                   AMP_W'($urandom_range(0, 70000));
        in_phase = PH_W'($urandom());
        e_sel  = in_valid && (k < N / 2) && (in_amp >= threshold);
        e_last = in_valid && (k == N / 2 - 1);
        e_en   = e_sel || e_last;
        e_k    = k;
        e_ph   = int'(in_phase);
        @(posedge clk); #1;
        checks++;
        if (wr_en !== e_en || wr_last !== e_last || wr_sel !== e_sel ||
            (e_en && (wr_k !== KW'(e_k) || wr_phase !== PH_W'(e_ph)))) begin
          failures++;
          $display("bin %0d: got en=%b last=%b sel=%b, exp %b %b %b", k, wr_en, wr_last, wr_sel,
                   e_en, e_last, e_sel);
        end
        if (e_sel) n_sel++; else if (in_valid) n_rej++;
      end
    end
    if (n_sel == 0 || n_rej == 0) failures++;
    $display("selected %0d rejected %0d", n_sel, n_rej);
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
