// fft_model: behavioural model (not synthesizable) of the pair of streaming
// FFT cores that feed the DFPF datapath.  It stands in for a vendor FFT core.
//
// Both channels stream in one real ADC sample per clock (in_valid).  After
// every N samples the model computes the two N-point DFTs in floating point,
// X(k) = sum_n x(n) exp(-j 2 pi k n / N), unscaled and rounded to integers,
// and LAT clocks after the last sample streams the N bins out in natural
// order, one per clock, both channels aligned, with out_last on bin N-1.
// Two spectrum buffers allow records to arrive back to back.  LAT defaults to
// 174 cycles, the 4.350 us FFT delay of the prototype at 40 MHz.
module fft_model #(
  parameter int N      = 512,
  parameter int ADC_W  = 16,
  parameter int SPEC_W = 26,
  parameter int LAT    = 174,
  localparam int KW    = $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ADC_W-1:0]  in_x1,
  input  logic signed [ADC_W-1:0]  in_x2,
  output logic                     out_valid,
  output logic                     out_last,
  output logic [KW-1:0]            out_k,
  output logic signed [SPEC_W-1:0] x1_re,
  output logic signed [SPEC_W-1:0] x1_im,
  output logic signed [SPEC_W-1:0] x2_re,
  output logic signed [SPEC_W-1:0] x2_im
);
  localparam real PI = 3.14159265358979323846;

  real cos_t[N], sin_t[N];
  real s1[N], s2[N];
  longint b_re1[2][N], b_im1[2][N], b_re2[2][N], b_im2[2][N];
  longint start_at[2];
  int nin = 0, wbuf = 0;
  longint cycle = 0;

  initial begin
    for (int i = 0; i < N; i++) begin
      cos_t[i] = $cos(2.0 * PI * i / N);
      sin_t[i] = $sin(2.0 * PI * i / N);
    end
    start_at[0] = -1;
    start_at[1] = -1;
  end

  function automatic longint rnd(input real v);
    return (v >= 0.0) ? longint'($rtoi(v + 0.5)) : -longint'($rtoi(-v + 0.5));
  endfunction

  task automatic transform(input int b);
    for (int k = 0; k < N; k++) begin
      real ar1, ai1, ar2, ai2;
      ar1 = 0; ai1 = 0; ar2 = 0; ai2 = 0;
      for (int n = 0; n < N; n++) begin
        int t;
        t = (k * n) % N;
        ar1 += s1[n] * cos_t[t]; ai1 -= s1[n] * sin_t[t];
        ar2 += s2[n] * cos_t[t]; ai2 -= s2[n] * sin_t[t];
      end
      b_re1[b][k] = rnd(ar1); b_im1[b][k] = rnd(ai1);
      b_re2[b][k] = rnd(ar2); b_im2[b][k] = rnd(ai2);
    end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      nin = 0;
    end else if (in_valid) begin
      s1[nin] = real'(in_x1);
      s2[nin] = real'(in_x2);
      nin++;
      if (nin == N) begin
        transform(wbuf);
        start_at[wbuf] = cycle + LAT;
        wbuf ^= 1;
        nin = 0;
      end
    end
  end

  // output streaming
  always @(posedge clk) begin
    out_valid <= 1'b0;
    out_last  <= 1'b0;
    for (int b = 0; b < 2; b++) begin
      if (start_at[b] >= 0 && cycle >= start_at[b] && cycle < start_at[b] + N) begin
        int k;
        k = int'(cycle - start_at[b]);
        out_valid <= 1'b1;
        out_last  <= (k == N - 1);
        out_k     <= KW'(k);
        x1_re <= SPEC_W'(b_re1[b][k]); x1_im <= SPEC_W'(b_im1[b][k]);
        x2_re <= SPEC_W'(b_re2[b][k]); x2_im <= SPEC_W'(b_im2[b][k]);
      end
    end
  end
endmodule
