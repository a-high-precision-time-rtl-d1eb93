// coincide: amplitude threshold that picks the in-band bins of the
// cross-correlation spectrum.
//
// The CORDIC core delivers, per bin k, the amplitude A(k) and phase P(k) of
// R(k).  Only bins where the pulses carry energy give a usable phase, so a
// bin is selected when A(k) >= threshold; the selected phases P(k_n) and
// their bin indices k_n are written to the FIFO.  The threshold is a run-time
// input.  Only the positive-frequency half (k < N/2) is considered, since the
// inputs are real and the upper half mirrors the lower one; this restriction
// and the ">=" comparison are this design's choices.
//
// Bins arrive in natural order.  Besides selected bins, bin N/2-1, the last
// one that can be selected, is always written with wr_last set and its
// select flag showing whether it also carries a phase: it closes the record
// for the fitting stage, which can then finish without waiting for the upper
// half of the spectrum.  Closing there is this design's choice.
//
// Timing: one bin per clock, output registered (latency 1).  wr_en/wr_* go
// straight to the FIFO write port.
module coincide #(
  parameter int unsigned N     = 512,  // FFT size
  parameter int unsigned AMP_W = 41,   // amplitude width
  parameter int unsigned PH_W  = 16,   // phase width
  localparam int unsigned KW   = $clog2(N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [AMP_W-1:0]       threshold,
  input  logic                   in_valid,
  input  logic [KW-1:0]          in_k,
  input  logic [AMP_W-1:0]       in_amp,
  input  logic signed [PH_W-1:0] in_phase,
  output logic                   wr_en,
  output logic                   wr_last,
  output logic                   wr_sel,
  output logic [KW-1:0]          wr_k,
  output logic signed [PH_W-1:0] wr_phase
);

  logic sel, last;

  always_comb begin
    sel  = in_valid && (in_k < KW'(N / 2)) && (in_amp >= threshold);
    last = in_valid && (in_k == KW'(N / 2 - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en    <= 1'b0;
      wr_last  <= 1'b0;
      wr_sel   <= 1'b0;
      wr_k     <= '0;
      wr_phase <= '0;
    end else begin
      wr_en    <= sel || last;
      wr_last  <= last;
      wr_sel   <= sel;
      wr_k     <= in_k;
      wr_phase <= in_phase;
    end
  end

endmodule
