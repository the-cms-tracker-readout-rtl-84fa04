// tb_apve: APV25 buffer emulation, status and pipeline address.
// A reference occupancy (triggers in, one event out every 280 cycles) is kept
// in the testbench; the design's occupancy and its READY / WARNING / BUSY /
// ERROR output must follow it, in deconvolution (10 events) and peak (31)
// mode. pipe_addr must be (cycle - latency) mod 192, and the global status
// must take the worse of the FMM input and the emulated status.
module tb_apve;
  import fed_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic l1a = 0, peak_mode = 0;
  logic [4:0] warn_level = 5'd6, occupancy;
  logic [7:0] latency = 8'd60, pipe_addr;
  logic [3:0] fmm_in = TCS_READY;
  tcs_e apv_tcs, tcs_out;
  int checks = 0, failures = 0, cyc = 0;
  int occ = 0, timer = 0, n_warn = 0, n_busy = 0, n_err = 0;
  bit ovf = 0;

  apve dut (.clk, .rst, .l1a, .peak_mode, .warn_level, .latency, .fmm_in, .apv_tcs, .tcs_out,
            .pipe_addr, .occupancy);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  // reference model, updated at each edge with the inputs of that edge
  always @(posedge clk) if (!rst) begin
    int depth;
    bit done;
    chk(int'(pipe_addr) == ((cyc - 60) % 192 + 192) % 192, "pipeline address");
    depth = peak_mode ? 31 : 10;
    done = (occ > 0) && (timer == 279);
    if (l1a && occ == depth && !done) ovf = 1;
    timer = done ? 0 : (occ > 0 ? timer + 1 : 0);
    occ = occ + ((l1a && (occ != depth || done)) ? 1 : 0) - (done ? 1 : 0);
    cyc++;
  end
  always @(negedge clk) if (!rst) begin
    chk(int'(occupancy) == occ, $sformatf("occupancy %0d exp %0d", occupancy, occ));
    if (apv_tcs == TCS_WARN) n_warn++;
    if (apv_tcs == TCS_BUSY) n_busy++;
    if (apv_tcs == TCS_ERROR) n_err++;
  end

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    repeat (2) @(negedge clk);
    for (int m = 0; m < 2; m++) begin
      peak_mode = (m == 1);
      for (int i = 0; i < 40; i++) begin
        l1a = (i < 34) && (dut.occupancy != (peak_mode ? 31 : 10)); @(negedge clk); l1a = 0;
        repeat (2) @(negedge clk);
        if (occ >= (peak_mode ? 31 : 10)) chk(apv_tcs == TCS_BUSY, "busy when full");
        else if (occ >= 6 && i > 0) chk(apv_tcs == TCS_WARN || apv_tcs == TCS_BUSY, "warning");
      end
      while (occ > 0) @(negedge clk);
      repeat (3) @(negedge clk);
      chk(apv_tcs == TCS_READY, "ready when empty");
    end
    fmm_in = TCS_BUSY; repeat (3) @(negedge clk);
    chk(tcs_out == TCS_BUSY, "FMM busy merged");
    fmm_in = TCS_READY; repeat (3) @(negedge clk);
    chk(tcs_out == TCS_READY, "merged ready");
    // overflow: triggers into a full buffer
    peak_mode = 0;
    for (int i = 0; i < 12; i++) begin l1a = 1; @(negedge clk); l1a = 0; @(negedge clk); end
    repeat (3) @(negedge clk);
    chk(ovf && apv_tcs == TCS_ERROR && tcs_out == TCS_ERROR, "error after overflow");
    chk(n_warn > 0 && n_busy > 0 && n_err > 0, "all states seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
