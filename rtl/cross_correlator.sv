// cross_correlator: frequency-domain cross-correlation R(k) = X1(k) * conj(X2(k)).
//
// Each valid cycle takes one bin of both channels' spectra (real and
// imaginary parts from the two FFT cores) and produces one bin of the
// cross-correlation spectrum:
//   Re R = Re1*Re2 + Im1*Im2        Im R = Im1*Re2 - Re1*Im2
// With s2(t) = s1(t - tau) the phase of R(k) is +2*pi*k*tau/N, so the fitted
// slope is positive when channel 2 lags channel 1.  Which spectrum is
// conjugated follows the correlation equation R(k) = X1(k) X2*(k); the block
// diagram draws the conjugation on the channel-1 path, which only flips the
// sign of the measured delay.
//
// Timing: fully pipelined, one bin per clock, latency 2 cycles (products
// registered, then sums registered).  A tag (the bin index) travels with
// the data unchanged.
//
// The exact sum has 2*SPEC_W+1 bits; the output keeps its top CC_W bits
// (truncation, arithmetic right shift), the "truncated fixed-point
// arithmetic" of the prototype.  The shift amount is this design's choice.
module cross_correlator #(
  parameter int unsigned SPEC_W = 26,  // spectrum word width
  parameter int unsigned CC_W   = 40,  // output word width (<= 2*SPEC_W+1)
  parameter int unsigned TAG_W  = 9    // side-band tag width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic signed [SPEC_W-1:0] x1_re,
  input  logic signed [SPEC_W-1:0] x1_im,
  input  logic signed [SPEC_W-1:0] x2_re,
  input  logic signed [SPEC_W-1:0] x2_im,
  output logic                     out_valid,
  output logic [TAG_W-1:0]         out_tag,
  output logic signed [CC_W-1:0]   r_re,
  output logic signed [CC_W-1:0]   r_im
);

  localparam int unsigned PW    = 2 * SPEC_W;      // product width
  localparam int unsigned SW    = PW + 1;          // sum width
  localparam int unsigned SHIFT = SW - CC_W;       // LSBs dropped

  logic signed [PW-1:0] p_rr, p_ii, p_ir, p_ri;
  logic                 s1_valid;
  logic [TAG_W-1:0]     s1_tag;
  logic signed [SW-1:0] sum_re, sum_im;

  // Stage 1: the four partial products.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_tag   <= '0;
      p_rr     <= '0;
      p_ii     <= '0;
      p_ir     <= '0;
      p_ri     <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_tag   <= in_tag;
      p_rr     <= x1_re * x2_re;
      p_ii     <= x1_im * x2_im;
      p_ir     <= x1_im * x2_re;
      p_ri     <= x1_re * x2_im;
    end
  end

  always_comb begin
    sum_re = SW'(p_rr) + SW'(p_ii);
    sum_im = SW'(p_ir) - SW'(p_ri);
  end

  // Stage 2: sums, truncated to CC_W bits.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      r_re      <= '0;
      r_im      <= '0;
    end else begin
      out_valid <= s1_valid;
      out_tag   <= s1_tag;
      r_re      <= CC_W'(sum_re >>> SHIFT);
      r_im      <= CC_W'(sum_im >>> SHIFT);
    end
  end

endmodule
