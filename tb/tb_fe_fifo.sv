// tb_fe_fifo: the 2 kB cluster FIFO. Random pushes and pops are compared with
// a queue; it must hold exactly 256 words of 65 bits (full/empty/count), show
// the oldest word without a pop, ignore a write when full and flag overflow.
module tb_fe_fifo;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr = 0, rd = 0, empty, full, overflow;
  logic [64:0] din = 0, dout;
  logic [8:0] count;
  logic [64:0] m [$];
  int checks = 0, failures = 0;

  fe_fifo dut (.clk, .rst, .wr, .din, .rd, .dout, .empty, .full, .count, .overflow);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 3000; i++) begin
      int ph = (i < 400) ? 90 : (i < 1200) ? 50 : 10;   // fill, mix, drain
      wr = ($urandom % 100) < ph && !full;
      rd = ($urandom % 100) < (100 - ph) && !empty;
      din = {1'($urandom), 32'($urandom), 32'($urandom)};
      chk(empty == (m.size() == 0) && full == (m.size() == 256) && int'(count) == m.size(), "flags and count");
      if (!empty) chk(dout == m[0], "oldest word shown");
      @(posedge clk);
      if (rd) void'(m.pop_front());
      if (wr) m.push_back(din);
      @(negedge clk);
    end
    chk(!overflow, "no overflow yet");
    while (!full) begin wr = 1; din = 65'($urandom); m.push_back(din); @(negedge clk); end
    wr = 1; din = '1; @(negedge clk); wr = 0;
    chk(overflow && int'(count) == 256, "overflow flagged, write ignored");
    while (!empty) begin chk(dout == m.pop_front(), "drain order"); rd = 1; @(negedge clk); rd = 0; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
