// tb_seq_divider: self-checking test of the sequential divider at its default
// widths (70-bit dividend, 37-bit divisor).  Random and corner operands are
// checked against the language's own / and % operators, along with the
// fixed latency of DW+1 cycles from start to done and the busy flag.
module tb_seq_divider;
  localparam int DW = 70, VW = 37;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [DW-1:0] dividend = '0, quotient;
  logic [VW-1:0] divisor = '0, remainder;
  logic busy, done, div_by_zero;

  seq_divider #(.DW(DW), .VW(VW)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [DW-1:0] rnd_dvd();
    logic [DW-1:0] v;
    v = {$urandom(), $urandom(), $urandom()};
    return v >> $urandom_range(0, DW - 1);
  endfunction

  task automatic run(input logic [DW-1:0] a, input logic [VW-1:0] b);
    int lat;
    @(negedge clk);
    dividend = a; divisor = b; start = 1;
    @(negedge clk);
    start = 0;
    dividend = '1;   // operands must be captured at start
    divisor  = '1;
    lat = 1;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("busy low before done"); break; end
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != DW + 1) begin failures++; $display("latency %0d, expected %0d", lat, DW + 1); end
    checks++;
    if (b == 0) begin
      if (!div_by_zero) begin failures++; $display("zero divisor not flagged"); end
    end else if (quotient !== a / DW'(b) || remainder !== VW'(a % DW'(b)) || div_by_zero) begin
      failures++;
      $display("%0d / %0d: got %0d r %0d", a, b, quotient, remainder);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(DW'(100), VW'(7));
    run('1, VW'(1));
    run('1, '1);
    run(DW'(5), VW'(9));
    run(DW'(12345), VW'(0));
    for (int i = 0; i < 300; i++) begin
      logic [VW-1:0] b;
      b = VW'({$urandom(), $urandom()}) >> $urandom_range(0, VW - 1);
      run(rnd_dvd(), b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
