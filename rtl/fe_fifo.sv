// fe_fifo: synchronous first-word-fall-through FIFO, used as the 2 kB cluster
// data FIFO of a Front-End FPGA.
//
// DEPTH words of WIDTH bits. With the defaults it holds 256 64-bit data
// words, i.e. 2 kB, plus one end-of-event flag bit per word (the flag is this
// implementation's framing choice). dout shows the oldest word whenever
// empty is low; rd pops it. wr is ignored when full and sets the sticky
// `overflow` output. count is the number of stored words.
module fe_fifo #(
  parameter int WIDTH = 65,
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr,
  input  logic [WIDTH-1:0]         din,
  input  logic                     rd,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr && full) overflow <= 1'b1;
    end
  end

  // a pop of an empty FIFO is a protocol error of the reader
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd && empty));

endmodule
