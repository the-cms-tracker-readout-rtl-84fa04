// tb_delay_fpga: programmable delay and data spy of a Delay FPGA.
// Random samples go into the 4 channels; each channel gets its own delay and
// its output must equal the input delay+1 cycles earlier. Then the spy is
// armed, a trigger is given, and the 512 spy words of each channel must equal
// the delayed stream starting one cycle after the trigger.
module tb_delay_fpga;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [9:0] adc_in [4], adc_out [4], spy_rd_data;
  logic dly_we = 0, l1a = 0, spy_arm = 0, spy_done;
  logic [1:0] dly_ch = 0, spy_rd_ch = 0;
  logic [3:0] dly_val = 0;
  logic [8:0] spy_rd_addr = 0;
  int checks = 0, failures = 0, cyc = 0;
  logic [9:0] hist [4][$];
  logic [9:0] outlog [4][$];
  int dl [4] = '{0, 3, 7, 15};
  int trig_cyc;

  delay_fpga dut (.clk, .rst, .adc_in, .adc_out, .dly_we, .dly_ch, .dly_val, .l1a, .spy_arm,
                  .spy_done, .spy_rd_ch, .spy_rd_addr, .spy_rd_data);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  always @(negedge clk) for (int c = 0; c < 4; c++) adc_in[c] = 10'($urandom);
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < 4; c++) begin
      hist[c].push_front(adc_in[c]);
      if (hist[c].size() > 40) void'(hist[c].pop_back());
    end
  end
  // compare at negedge: output now = input sampled delay+1 edges ago
  always @(negedge clk) if (!rst && cyc > 40 && cyc < 200)
    for (int c = 0; c < 4; c++) chk(adc_out[c] == hist[c][dl[c]], $sformatf("delay ch%0d", c));

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int c = 0; c < 4; c++) begin
      @(negedge clk); dly_we = 1; dly_ch = 2'(c); dly_val = 4'(dl[c]);
    end
    @(negedge clk); dly_we = 0;
    repeat (250) @(negedge clk);
    spy_arm = 1; @(negedge clk); spy_arm = 0;
    repeat (5) @(negedge clk);
    l1a = 1;
    // record outputs from the cycle after the trigger
    @(negedge clk); l1a = 0;
    for (int k = 0; k < 512; k++) begin
      for (int c = 0; c < 4; c++) outlog[c].push_back(adc_out[c]);
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    chk(spy_done, "spy done");
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < 512; a++) begin
        spy_rd_ch = 2'(c); spy_rd_addr = 9'(a); #1;
        chk(spy_rd_data == outlog[c][a], $sformatf("spy ch%0d a%0d", c, a));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
