// tb_cm_median: two-bank frame store and median common mode.
// Frames of random signed values (some with outliers, some with many equal
// values) are written; for each the two medians must equal the 64th smallest
// value of each chip found by sorting, 11 cycles after frame_end (checked as
// a cycle count), the read port must return the stored values and the tag,
// and a second frame must be accepted while the first is processed.
module tb_cm_median;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_valid = 0, frame_end = 0, wr_free, cm_valid, release_bank = 0;
  logic [7:0] wr_strip = 0, rd_a = 0;
  logic signed [10:0] wr_val = 0, cm0, cm1, rd_a_val;
  logic [18:0] frame_tag = 0, cm_tag;
  int checks = 0, failures = 0;
  int vals [4][256];

  cm_median dut (.clk, .rst, .wr_valid, .wr_strip, .wr_val, .frame_end, .frame_tag, .wr_free,
                 .cm_valid, .cm0, .cm1, .cm_tag, .rd_a, .rd_a_val, .release_bank);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  task automatic write_frame(int k);
    for (int s = 0; s < 256; s++) begin
      int v;
      case (k)
        0: v = int'($urandom % 2048) - 1024;
        1: v = int'($urandom % 40) - 20 + ((s % 17 == 0) ? 700 : 0);
        2: v = (s % 3 == 0) ? -5 : 7;
        default: v = int'($urandom % 200) - 300;
      endcase
      vals[k][s] = v;
      @(negedge clk); wr_valid = 1; wr_strip = 8'(s); wr_val = 11'(v);
    end
    @(negedge clk); wr_valid = 0; frame_end = 1; frame_tag = 19'(k * 1000 + 7);
    @(negedge clk); frame_end = 0;
  endtask

  function automatic int med(int k, int a);
    int t [$];
    for (int s = 0; s < 128; s++) t.push_back(vals[k][a * 128 + s]);
    return fed_tb_pkg::kth_smallest(t, 63);
  endfunction

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int k = 0; k < 4; k += 2) begin
      int t0, n;
      write_frame(k);
      // the second frame goes into the other bank while the first is busy
      chk(wr_free, "second bank free");
      fork write_frame(k + 1); join_none
      n = 0;
      while (!cm_valid) begin @(negedge clk); n++; end
      chk(n == 12, $sformatf("median latency %0d cycles", n));
      for (int j = 0; j < 2; j++) begin
        if (j == 1) while (!cm_valid) @(negedge clk);
        chk(int'(cm0) == med(k + j, 0) && int'(cm1) == med(k + j, 1),
            $sformatf("medians frame %0d: %0d %0d exp %0d %0d", k + j, cm0, cm1, med(k + j, 0), med(k + j, 1)));
        chk(int'(cm_tag) == (k + j) * 1000 + 7, "tag");
        for (int s = 0; s < 256; s += 5) begin rd_a = 8'(s); #1; chk(int'(rd_a_val) == vals[k + j][s], "read port"); end
        if (j == 0) wait fork;
        @(negedge clk); release_bank = 1; @(negedge clk); release_bank = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
