// dfpf_tmm: two-channel time-interval measurement by digital
// frequency-domain phase fitting (DFPF).
//
// Two digitized pulses, s2(t) = s1(t - tau), are transformed by two FFT cores
// (outside this module).  This module multiplies one spectrum by the
// conjugate of the other to get the cross-correlation spectrum R(k), whose
// phase is 2*pi*k*tau/N.  R(k) leaves through the CORDIC port to a CORDIC core
// (outside this module) and returns as amplitude A(k) and phase P(k).  Bins
// whose amplitude reaches a threshold are selected, queued in a FIFO,
// unwrapped, and fitted with a least-squares straight line; the slope gives
// tau with a resolution far below one sample period.
//
//   FFT1,FFT2 -> cross_correlator -> [CORDIC core] -> coincide -> phase_fifo
//             -> phase_unwrap -> phase_fit (sums, products, seq_divider) -> tau
//
// Interfaces
//   spec_*  : one bin per cycle from the two FFT cores, in natural order
//             k = 0..N-1, both channels aligned, spec_k the bin index.
//   cc_*    : R(k) to the CORDIC core, with the bin index as a tag that the
//             core must return unchanged on cd_tag (a pass-through user
//             field).  A record ends with bin N/2-1; bins N/2..N-1 are
//             passed through but never selected.
//   cd_*    : A(k) and P(k) back from the CORDIC core; any latency.
//   res_*   : one result per record: slope (rad/bin, 29 fractional bits),
//             tau (sample periods, 16 fractional bits), number of fitted
//             bins, and an error flag when fewer than two bins were selected.
//   fifo_overflow pulses if a selected bin was lost (FIFO full).
//
// Timing: the pipeline takes one bin per clock with no stall towards the
// FFT cores.  After bin N/2-1 of a record, the result appears
// 2 (cross-correlation) + CORDIC latency + 1 (coincide) + 1 (FIFO)
// + 74 (fit and division) cycles later: 91 cycles with a 13-cycle CORDIC.  Records may follow each
// other back to back: bins of the next record wait in the FIFO while the
// divider works.  Record length 512 and the stage order follow the prototype;
// the tag scheme, the FIFO record marker, the phase unwrapping and all word
// widths are this design's choices.
module dfpf_tmm #(
  parameter int unsigned N        = dfpf_pkg::N_SAMPLES,
  parameter int unsigned SPEC_W   = dfpf_pkg::SPEC_W,
  parameter int unsigned CC_W     = dfpf_pkg::CC_W,
  parameter int unsigned AMP_W    = dfpf_pkg::AMP_W,
  parameter int unsigned PH_W     = dfpf_pkg::PH_W,
  parameter int unsigned PH_F     = dfpf_pkg::PH_F,
  parameter int unsigned UPH_W    = dfpf_pkg::UPH_W,
  parameter int unsigned QF       = dfpf_pkg::SLOPE_QF,
  parameter int unsigned SLOPE_W  = dfpf_pkg::SLOPE_W,
  parameter int unsigned TAU_W    = dfpf_pkg::TAU_W,
  parameter int unsigned TAU_F    = dfpf_pkg::TAU_F,
  parameter int unsigned FIFO_DEPTH = N,
  localparam int unsigned KW      = $clog2(N),
  localparam int unsigned CW      = $clog2(N / 2 + 1),
  localparam int unsigned TAG_W   = KW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // run-time setting
  input  logic [AMP_W-1:0]          amp_threshold,
  // spectra from the two FFT cores
  input  logic                      spec_valid,
  input  logic [KW-1:0]             spec_k,
  input  logic signed [SPEC_W-1:0]  x1_re,
  input  logic signed [SPEC_W-1:0]  x1_im,
  input  logic signed [SPEC_W-1:0]  x2_re,
  input  logic signed [SPEC_W-1:0]  x2_im,
  // cross-correlation to the CORDIC core
  output logic                      cc_valid,
  output logic [TAG_W-1:0]          cc_tag,
  output logic signed [CC_W-1:0]    cc_re,
  output logic signed [CC_W-1:0]    cc_im,
  // amplitude and phase from the CORDIC core
  input  logic                      cd_valid,
  input  logic [TAG_W-1:0]          cd_tag,
  input  logic [AMP_W-1:0]          cd_amp,
  input  logic signed [PH_W-1:0]    cd_phase,
  // result
  output logic                      res_valid,
  output logic                      res_err,
  output logic signed [SLOPE_W-1:0] res_slope,
  output logic signed [TAU_W-1:0]   res_tau,
  output logic [CW-1:0]             res_n,
  output logic                      fifo_overflow
);

  // FIFO word: record-end flag, select flag, bin index, folded phase.
  typedef struct packed {
    logic                   last;
    logic                   sel;
    logic [KW-1:0]          k;
    logic signed [PH_W-1:0] phase;
  } fifo_word_t;

  localparam int unsigned FW = $bits(fifo_word_t);

  // Cross-correlation: R(k) = X1(k) * conj(X2(k)).
  cross_correlator #(.SPEC_W(SPEC_W), .CC_W(CC_W), .TAG_W(TAG_W)) u_xcorr (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (spec_valid),
    .in_tag   (spec_k),
    .x1_re    (x1_re),
    .x1_im    (x1_im),
    .x2_re    (x2_re),
    .x2_im    (x2_im),
    .out_valid(cc_valid),
    .out_tag  (cc_tag),
    .r_re     (cc_re),
    .r_im     (cc_im)
  );

  // Amplitude threshold selects the in-band bins.
  fifo_word_t wr_word, rd_word;
  logic       wr_en;

  coincide #(.N(N), .AMP_W(AMP_W), .PH_W(PH_W)) u_coincide (
    .clk      (clk),
    .rst_n    (rst_n),
    .threshold(amp_threshold),
    .in_valid (cd_valid),
    .in_k     (cd_tag),
    .in_amp   (cd_amp),
    .in_phase (cd_phase),
    .wr_en    (wr_en),
    .wr_last  (wr_word.last),
    .wr_sel   (wr_word.sel),
    .wr_k     (wr_word.k),
    .wr_phase (wr_word.phase)
  );

  logic            fifo_empty, fifo_full, fifo_rd;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic [FW-1:0]   rd_bits;

  phase_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (wr_en),
    .wr_data (wr_word),
    .rd_en   (fifo_rd),
    .rd_data (rd_bits),
    .empty   (fifo_empty),
    .full    (fifo_full),
    .count   (fifo_count),
    .overflow(fifo_overflow)
  );

  assign rd_word = fifo_word_t'(rd_bits);

  // Unwrap, then fit.
  logic                    uw_ready, fit_valid, fit_ready, fit_last, fit_sel;
  logic [KW-1:0]           fit_k;
  logic signed [UPH_W-1:0] fit_phase;
  logic                    wrap_event;

  phase_unwrap #(.KW(KW), .PH_W(PH_W), .PH_F(PH_F), .UPH_W(UPH_W)) u_unwrap (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (!fifo_empty),
    .in_ready  (uw_ready),
    .in_last   (rd_word.last),
    .in_sel    (rd_word.sel),
    .in_k      (rd_word.k),
    .in_phase  (rd_word.phase),
    .out_valid (fit_valid),
    .out_ready (fit_ready),
    .out_last  (fit_last),
    .out_sel   (fit_sel),
    .out_k     (fit_k),
    .out_phase (fit_phase),
    .wrap_event(wrap_event)
  );

  assign fifo_rd = !fifo_empty && uw_ready;

  phase_fit #(
    .N(N), .PH_W(UPH_W), .PH_F(PH_F), .QF(QF),
    .SLOPE_W(SLOPE_W), .TAU_W(TAU_W), .TAU_F(TAU_F)
  ) u_fit (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (fit_valid),
    .in_ready (fit_ready),
    .in_last  (fit_last),
    .in_sel   (fit_sel),
    .in_k     (fit_k),
    .in_phase (fit_phase),
    .res_valid(res_valid),
    .res_err  (res_err),
    .res_slope(res_slope),
    .res_tau  (res_tau),
    .res_n    (res_n)
  );

endmodule
