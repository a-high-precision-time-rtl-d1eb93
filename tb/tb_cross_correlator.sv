// tb_cross_correlator: self-checking test of the cross-correlation multiplier.
// Drives random spectrum bins (plus full-scale corner values) one per clock,
// with gaps, and checks every output against X1*conj(X2) computed here with
// 64-bit integers and truncated the same way, and that each result appears
// exactly 2 cycles after its input.
module tb_cross_correlator;
  localparam int SPEC_W = 26, CC_W = 40, TAG_W = 9;
  localparam int SHIFT = 2 * SPEC_W + 1 - CC_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [TAG_W-1:0] in_tag = '0;
  logic signed [SPEC_W-1:0] x1_re = '0, x1_im = '0, x2_re = '0, x2_im = '0;
  logic out_valid;
  logic [TAG_W-1:0] out_tag;
  logic signed [CC_W-1:0] r_re, r_im;

  cross_correlator #(.SPEC_W(SPEC_W), .CC_W(CC_W), .TAG_W(TAG_W)) dut (.*);

  typedef struct { longint re; longint im; int tag; int cyc; } exp_t;
  exp_t q[$];
  int checks = 0, failures = 0, cycle = 0, sent = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic longint rnd(input bit corner);
    longint v;
    if (corner) v = ($urandom_range(0, 1) != 0) ? -(longint'(1) << (SPEC_W-1))
                                                 : (longint'(1) << (SPEC_W-1)) - 1;
    else v = longint'($signed(SPEC_W'($urandom())));
    return v;
  endfunction

  task automatic push(input longint a, b, c, d, input int tag);
    longint re, im;
    x1_re = SPEC_W'(a); x1_im = SPEC_W'(b); x2_re = SPEC_W'(c); x2_im = SPEC_W'(d);
    in_tag = TAG_W'(tag); in_valid = 1;
    re = a * c + b * d;
    im = b * c - a * d;
    q.push_back('{re >>> SHIFT, im >>> SHIFT, tag, cycle});
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        e = q.pop_front();
        if (r_re !== CC_W'(e.re) || r_im !== CC_W'(e.im) || out_tag !== TAG_W'(e.tag)
            || cycle - e.cyc != 2) begin
          failures++;
          $display("mismatch: got %0d %0d tag %0d, exp %0d %0d tag %0d, latency %0d",
                   r_re, r_im, out_tag, e.re, e.im, e.tag, cycle - e.cyc);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) in_valid = 0;
      else begin
        bit c = (i < 20);
        push(rnd(c), rnd(c), rnd(c), rnd(c), i);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    if (checks != sent) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
