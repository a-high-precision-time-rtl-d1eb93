// cordic_model: behavioural model (not synthesizable) of the CORDIC core that
// converts the cross-correlation spectrum R(k) to polar form.  It stands in
// for a vendor CORDIC core in vectoring mode.
//
// Each valid input (re, im, tag) yields, LAT clocks later, amp = |R| rounded
// to an integer and phase = atan2(im, re) in radians with PH_F fractional
// bits, rounded, in (-pi, pi]; the tag is returned unchanged.  rst_n low
// empties the pipeline.  LAT defaults
// to 13 cycles, the 0.325 us CORDIC delay of the prototype at 40 MHz.
module cordic_model #(
  parameter int CC_W  = 32,
  parameter int AMP_W = 33,
  parameter int PH_W  = 16,
  parameter int PH_F  = 13,
  parameter int TAG_W = 10,
  parameter int LAT   = 13
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [TAG_W-1:0]       in_tag,
  input  logic signed [CC_W-1:0] in_re,
  input  logic signed [CC_W-1:0] in_im,
  output logic                   out_valid,
  output logic [TAG_W-1:0]       out_tag,
  output logic [AMP_W-1:0]       out_amp,
  output logic signed [PH_W-1:0] out_phase
);
  logic                   v_pipe [LAT];
  logic [TAG_W-1:0]       t_pipe [LAT];
  logic [AMP_W-1:0]       a_pipe [LAT];
  logic signed [PH_W-1:0] p_pipe [LAT];

  always @(posedge clk) begin
    real re, im, a, p;
    re = real'(in_re);
    im = real'(in_im);
    a  = $sqrt(re * re + im * im);
    p  = $atan2(im, re) * real'(1 << PH_F);
    for (int i = LAT - 1; i > 0; i--) begin
      v_pipe[i] <= v_pipe[i-1]; t_pipe[i] <= t_pipe[i-1];
      a_pipe[i] <= a_pipe[i-1]; p_pipe[i] <= p_pipe[i-1];
    end
    v_pipe[0] <= in_valid && rst_n;
    if (!rst_n) for (int i = 1; i < LAT; i++) v_pipe[i] <= 1'b0;
    t_pipe[0] <= in_tag;
    a_pipe[0] <= AMP_W'(longint'($rtoi(a + 0.5)));
    p_pipe[0] <= PH_W'((p >= 0.0) ? longint'($rtoi(p + 0.5)) : -longint'($rtoi(-p + 0.5)));
  end

  always_comb begin
    out_valid = v_pipe[LAT-1];
    out_tag   = t_pipe[LAT-1];
    out_amp   = a_pipe[LAT-1];
    out_phase = p_pipe[LAT-1];
  end
endmodule
