// phase_fit: least-squares fit of a straight line to phase against bin index.
//
// The phase of the cross-correlation spectrum is phi(k) = 2*pi*k*tau/N plus a
// constant, so the delay is the slope of the line through the selected
// points (k_n, P(k_n)).  The stage follows the fitting diagram:
// four running sums are kept while the points stream in,
//   S1 = sum P(k_n), Sk = sum k_n, Skk = sum k_n^2, SkP = sum k_n*P(k_n),
// together with the point count n; when the record ends,
//   num = n*SkP - Sk*S1,   den = n*Skk - Sk^2,   slope = num / den.
// The bin index k stands for the frequency k*df; the slope is therefore in
// radians per bin.  It is then turned into the delay in sample periods,
// tau/Ts = slope * N / (2*pi), by one constant multiplication (a step of this
// design; the source stops at the slope).
//
// Fixed point: phases have PH_F fractional bits; the numerator is shifted up
// by QF bits before division so the slope carries PH_F+QF fractional bits and
// saturates to SLOPE_W bits.  tau carries TAU_F fractional bits.  All sums are
// exact (widths derived from N); results truncate toward minus infinity.
//
// Interface: valid/ready input stream, one point per clock.  An entry with
// in_sel adds a point; an entry with in_last closes the record.  in_ready is
// low from the end of a record until its result is out, so later entries
// wait in the FIFO.  res_valid rises DW+4 cycles after the edge that takes
// the record's last entry, DW being the dividend width (70 for N = 512, so
// 74 cycles: products, divider start, 70 division steps, scaling, output).
// Records with fewer than two points skip the division (2 cycles).  res_valid pulses
// once per record with slope, tau and n; res_err is set instead of a slope
// when fewer than two distinct bins were selected (den = 0).
module phase_fit #(
  parameter int unsigned N       = 512,  // FFT size
  parameter int unsigned PH_W    = 24,   // input (unwrapped) phase width
  parameter int unsigned PH_F    = 13,   // fractional bits of phase
  parameter int unsigned QF      = 16,   // extra fractional bits of slope
  parameter int unsigned SLOPE_W = 32,   // slope width
  parameter int unsigned TAU_W   = 32,   // delay width
  parameter int unsigned TAU_F   = 16,   // fractional bits of delay
  localparam int unsigned KW     = $clog2(N),
  localparam int unsigned CW     = $clog2(N / 2 + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_last,
  input  logic                      in_sel,
  input  logic [KW-1:0]             in_k,
  input  logic signed [PH_W-1:0]    in_phase,
  output logic                      res_valid,
  output logic                      res_err,
  output logic signed [SLOPE_W-1:0] res_slope,
  output logic signed [TAU_W-1:0]   res_tau,
  output logic [CW-1:0]             res_n
);

  // Sum widths: exact for up to N/2 points.
  localparam int unsigned SK_W   = KW + CW;
  localparam int unsigned SKK_W  = 2 * KW + CW;
  localparam int unsigned SP_W   = PH_W + CW;
  localparam int unsigned SKP_W  = PH_W + KW + 1 + CW;
  localparam int unsigned NUM_W  = SKP_W + CW + 2;
  localparam int unsigned DEN_W  = SKK_W + CW + 1;
  localparam int unsigned DVD_W  = NUM_W + QF;
  localparam int unsigned FRAC   = PH_F + QF;          // slope fractional bits
  localparam longint      TAU_C  = dfpf_pkg::tau_scale(N);  // N/(2 pi), 16 frac bits
  localparam int unsigned TAU_SH = FRAC + 16 - TAU_F;
  localparam int unsigned PROD_W = SLOPE_W + 33;

  typedef enum logic [1:0] {S_ACC, S_FINAL, S_DIV, S_OUT} state_t;
  state_t state;

  logic [CW-1:0]             n;
  logic [SK_W-1:0]           sk;
  logic [SKK_W-1:0]          skk;
  logic signed [SP_W-1:0]    sp;
  logic signed [SKP_W-1:0]   skp;

  logic signed [NUM_W-1:0]   num;
  logic signed [DEN_W-1:0]   den;
  logic                      num_neg;
  logic [NUM_W-1:0]          num_mag;

  logic                      div_start, div_busy, div_done, div_zero;
  logic [DVD_W-1:0]          div_q;
  logic [DEN_W-2:0]          div_r;

  logic signed [DVD_W:0]     q_signed;
  logic signed [SLOPE_W-1:0] slope_sat;
  logic signed [PROD_W-1:0]  tau_prod;

  always_comb begin
    in_ready = (state == S_ACC);
    // Final products from the registered sums.
    num = NUM_W'($signed({1'b0, n})) * NUM_W'(skp)
        - NUM_W'($signed({1'b0, sk})) * NUM_W'(sp);
    den = DEN_W'($signed({1'b0, n})) * DEN_W'($signed({1'b0, skk}))
        - DEN_W'($signed({1'b0, sk})) * DEN_W'($signed({1'b0, sk}));
  end

  // Running sums.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_ACC;
      n       <= '0;
      sk      <= '0;
      skk     <= '0;
      sp      <= '0;
      skp     <= '0;
      num_neg <= 1'b0;
      num_mag <= '0;
    end else begin
      case (state)
        S_ACC: if (in_valid) begin
          if (in_sel) begin
            n   <= n + 1'b1;
            sk  <= sk + SK_W'(in_k);
            skk <= skk + SKK_W'(in_k) * SKK_W'(in_k);
            sp  <= sp + SP_W'(in_phase);
            skp <= skp + SKP_W'(in_phase) * SKP_W'($signed({1'b0, in_k}));
          end
          if (in_last) state <= S_FINAL;
        end
        S_FINAL: begin
          num_neg <= num < 0;
          num_mag <= (num < 0) ? NUM_W'(-num) : NUM_W'(num);
          state   <= (den > 0) ? S_DIV : S_OUT;
        end
        S_DIV: if (div_done) state <= S_OUT;
        S_OUT: begin
          state <= S_ACC;
          n     <= '0;
          sk    <= '0;
          skk   <= '0;
          sp    <= '0;
          skp   <= '0;
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // The divider is started in the cycle after S_FINAL, from registered
  // operands; den is still valid then because the sums do not change.
  logic div_go;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_go <= 1'b0;
    else        div_go <= (state == S_FINAL) && (den > 0);
  end
  assign div_start = div_go;

  seq_divider #(.DW(DVD_W), .VW(DEN_W - 1)) u_div (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (div_start),
    .dividend   ({num_mag, QF'(0)}),
    .divisor    (den[DEN_W-2:0]),
    .busy       (div_busy),
    .done       (div_done),
    .quotient   (div_q),
    .remainder  (div_r),
    .div_by_zero(div_zero)
  );

  // Signed, saturated slope; floor rounding for negative slopes.
  localparam logic signed [DVD_W:0] S_MAX = (DVD_W+1)'({1'b0, {(SLOPE_W-1){1'b1}}});
  localparam logic signed [DVD_W:0] S_MIN = -S_MAX - 1;
  always_comb begin
    q_signed = $signed({1'b0, div_q});
    if (num_neg) q_signed = -q_signed - ((div_r != '0) ? 1 : 0);
    if (q_signed > S_MAX)      slope_sat = SLOPE_W'(S_MAX);
    else if (q_signed < S_MIN) slope_sat = SLOPE_W'(S_MIN);
    else                       slope_sat = SLOPE_W'(q_signed);
    tau_prod = PROD_W'(slope_sat) * PROD_W'(TAU_C);
  end

  // Result register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_err   <= 1'b0;
      res_slope <= '0;
      res_tau   <= '0;
      res_n     <= '0;
    end else begin
      res_valid <= (state == S_OUT);
      if (state == S_OUT) begin
        res_n <= n;
        if (den > 0) begin
          res_err   <= 1'b0;
          res_slope <= slope_sat;
          res_tau   <= TAU_W'(tau_prod >>> TAU_SH);
        end else begin
          res_err   <= 1'b1;
          res_slope <= '0;
          res_tau   <= '0;
        end
      end
    end
  end

  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               div_start |-> !div_busy)
    else $error("phase_fit: divider restarted while busy");

endmodule
