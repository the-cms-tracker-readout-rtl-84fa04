// tb_ped_reorder: strip reordering and pedestal subtraction.
// Pedestals are loaded for all 256 strips, a frame of random samples is fed
// in arrival order, and each output (one cycle later) must carry the strip of
// the APV25 order and sample - pedestal; in raw mode the sample itself.
// Every strip must appear exactly once per frame.
module tb_ped_reorder;
  import fed_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic raw_mode = 0, ped_we = 0, in_valid = 0, out_valid;
  logic [7:0] ped_addr = 0, in_idx = 0, out_strip;
  logic [9:0] ped_wdata = 0, in_data = 0;
  logic signed [10:0] out_val;
  int checks = 0, failures = 0;
  int ped [256], smp [256], seen [256];

  ped_reorder dut (.clk, .rst, .raw_mode, .ped_we, .ped_addr, .ped_wdata, .in_valid, .in_idx,
                   .in_data, .out_valid, .out_strip, .out_val);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int s = 0; s < 256; s++) begin
      ped[s] = int'($urandom % 600);
      ped_we = 1; ped_addr = 8'(s); ped_wdata = 10'(ped[s]); @(negedge clk);
    end
    ped_we = 0;
    for (int m = 0; m < 2; m++) begin
      raw_mode = (m == 1);
      for (int s = 0; s < 256; s++) seen[s] = 0;
      for (int w = 0; w < 257; w++) begin
        if (w < 256) begin
          smp[w] = int'($urandom % 1024);
          in_valid = 1; in_idx = 8'(w); in_data = 10'(smp[w]);
        end else in_valid = 0;
        @(posedge clk); #1;
        if (w > 0 || 1) ;
        @(negedge clk);
        // output of the word fed this cycle
        chk(out_valid == (w < 256), "valid one cycle later");
        if (w < 256) begin
          int st;
          st = strip_of_word(w);
          chk(int'(out_strip) == st, $sformatf("strip of word %0d: %0d exp %0d", w, out_strip, st));
          chk(int'(out_val) == (raw_mode ? smp[w] : smp[w] - ped[st]), $sformatf("value word %0d", w));
          seen[out_strip]++;
        end
      end
      for (int s = 0; s < 256; s++) chk(seen[s] == 1, "each strip once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
