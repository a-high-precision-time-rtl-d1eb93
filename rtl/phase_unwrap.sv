// phase_unwrap: removes the 2*pi jumps from the selected phases of a record.
//
// The CORDIC core returns phases folded into (-pi, pi].  The cross-correlation
// phase grows by 2*pi*tau/(N*Ts) per bin, so for delays of a large fraction
// of the record (up to 1 us of a 12.8 us record) the in-band phase passes
// +-pi and must be unfolded before a straight line can be fitted.  This stage
// is an addition of this design; no unwrapping step is specified.  It
// assumes that two consecutive selected bins differ by less than pi, which
// holds for |tau| < N*Ts/(2*gap), gap being the bin distance between them.
//
// Rule: keep the previous folded phase and an offset (a multiple of 2*pi).
// For each selected entry, d = P - P_prev; if d > pi subtract 2*pi from the
// offset, if d < -pi add 2*pi; output P + offset.  The first selected entry
// of a record starts with offset 0; the entry flagged last ends the record.
//
// Interface: a valid/ready stream on both sides, combinational from input to
// output (no added latency); state advances when in_valid && out_ready.
// wrap_event pulses when an offset step is applied to an accepted entry.
// Only the phase is changed: out_k, out_sel, out_last, out_valid and
// in_ready are the corresponding inputs passed straight through.
module phase_unwrap #(
  parameter int unsigned KW    = 9,   // bin index width
  parameter int unsigned PH_W  = 16,  // folded phase width
  parameter int unsigned PH_F  = 13,  // fractional bits of phase
  parameter int unsigned UPH_W = 24   // unwrapped phase width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic                    in_last,
  input  logic                    in_sel,
  input  logic [KW-1:0]           in_k,
  input  logic signed [PH_W-1:0]  in_phase,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic                    out_last,
  output logic                    out_sel,
  output logic [KW-1:0]           out_k,
  output logic signed [UPH_W-1:0] out_phase,
  output logic                    wrap_event
);

  localparam logic signed [UPH_W-1:0] PI_Q     = UPH_W'(dfpf_pkg::phase_pi(PH_F));
  localparam logic signed [UPH_W-1:0] TWO_PI_Q = UPH_W'(2 * dfpf_pkg::phase_pi(PH_F));

  logic                    first;      // no selected entry yet in this record
  logic signed [PH_W-1:0]  prev;       // previous folded phase
  logic signed [UPH_W-1:0] offset;     // current multiple of 2*pi
  logic signed [UPH_W-1:0] d;
  logic signed [UPH_W-1:0] offset_nx;
  logic                    take;

  always_comb begin
    d         = UPH_W'(in_phase) - UPH_W'(prev);
    offset_nx = offset;
    wrap_event = 1'b0;
    if (in_valid && in_sel && !first) begin
      if (d > PI_Q) begin
        offset_nx  = offset - TWO_PI_Q;
        wrap_event = out_ready;
      end else if (d < -PI_Q) begin
        offset_nx  = offset + TWO_PI_Q;
        wrap_event = out_ready;
      end
    end
    in_ready  = out_ready;
    out_valid = in_valid;
    out_last  = in_last;
    out_sel   = in_sel;
    out_k     = in_k;
    out_phase = UPH_W'(in_phase) + (first ? UPH_W'(0) : offset_nx);
    take      = in_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first  <= 1'b1;
      prev   <= '0;
      offset <= '0;
    end else if (take) begin
      if (in_last) begin
        first  <= 1'b1;
        offset <= '0;
      end else if (in_sel) begin
        first  <= 1'b0;
        prev   <= in_phase;
        offset <= first ? UPH_W'(0) : offset_nx;
      end
    end
  end

endmodule
