// phase_fifo: synchronous first-in first-out buffer between the coincidence
// stage and the phase fitting stage.
//
// It holds the selected (k_n, P(k_n)) entries of a record while the fitting
// stage is busy dividing the previous one.  Storage is a plain register array
// of DEPTH words of WIDTH bits (DEPTH a power of two); the read side is
// first-word-fall-through: rd_data shows the oldest entry whenever empty is
// low, and rd_en removes it.  A write into a full FIFO is dropped and flagged
// on overflow for one cycle.  Depth, width and the drop-on-full rule are this
// design's choices; the default depth holds one complete record.
//
// Timing: one write and one read per clock; a written word is readable the
// next cycle.
module phase_fifo #(
  parameter int unsigned WIDTH = 27,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count,
  output logic             overflow
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  always_comb begin
    empty   = (wr_ptr == rd_ptr);
    full    = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
    count   = wr_ptr - rd_ptr;
    do_wr   = wr_en && !full;
    do_rd   = rd_en && !empty;
    rd_data = mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      overflow <= wr_en && full;
    end
  end

  // Reading an empty FIFO is a protocol error of the reader.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("phase_fifo: read while empty");

endmodule
