// tb_phase_fifo: self-checking test of the FIFO.  Random writes and reads
// against a queue model: data order, empty/full/count at every cycle, a
// write into a full FIFO dropped and flagged, and a fill to exactly DEPTH.
module tb_phase_fifo;
  localparam int WIDTH = 27, DEPTH = 16, AW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [AW:0] count;

  phase_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  logic [WIDTH-1:0] model[$];
  int checks = 0, failures = 0, n_ovf = 0, n_full = 0;

  task automatic step(input bit w, input bit r);
    bit exp_ovf;
    @(negedge clk);
    // state before the edge
    checks++;
    if (empty !== (model.size() == 0) || full !== (model.size() == DEPTH) ||
        count !== (AW+1)'(model.size()) ||
        (model.size() != 0 && rd_data !== model[0])) begin
      failures++;
      $display("state mismatch: size %0d empty %b full %b count %0d", model.size(), empty, full, count);
    end
    if (full) n_full++;
    wr_en = w;
    rd_en = r && (model.size() != 0);
    wr_data = WIDTH'($urandom());
    exp_ovf = w && (model.size() == DEPTH);
    @(posedge clk);
    if (rd_en) void'(model.pop_front());
    if (w && !exp_ovf) model.push_back(wr_data);
    #1;
    checks++;
    if (overflow !== exp_ovf) begin failures++; $display("overflow flag wrong"); end
    if (overflow) n_ovf++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int bias = (i / 200) % 2;   // phases that mostly fill, then mostly drain
      step($urandom_range(0, 9) < (bias ? 8 : 3), $urandom_range(0, 9) < (bias ? 2 : 7));
    end
    for (int i = 0; i < DEPTH + 3; i++) step(1, 0);
    for (int i = 0; i < DEPTH + 3; i++) step(0, 1);
    @(negedge clk) begin wr_en = 0; rd_en = 0; end
    if (n_ovf == 0 || n_full == 0) begin failures++; $display("full/overflow never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
