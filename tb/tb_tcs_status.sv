// tb_tcs_status: priority and stickiness of the 4-bit TCS status.
// Occupancy is swept across the warning and busy levels, the trigger queue
// flags are raised, then out-of-synch and error pulses are given; the
// registered code must be the highest-priority condition of the cycle before.
module tb_tcs_status;
  import fed_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [18:0] occupancy = 0;
  logic tq_near_full = 0, tq_full = 0, error_in = 0, oos_in = 0;
  tcs_e tcs;
  logic [31:0] busy_cycles, warn_cycles;
  int checks = 0, failures = 0;
  bit err_s = 0, oos_s = 0;

  tcs_status dut (.clk, .rst, .occupancy, .warn_level(19'd1000), .busy_level(19'd2000), .tq_near_full,
                  .tq_full, .error_in, .oos_in, .tcs, .busy_cycles, .warn_cycles);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  function automatic tcs_e expect_code();
    if (err_s || error_in) return TCS_ERROR;
    if (oos_s || oos_in) return TCS_OOS;
    if (occupancy >= 2000 || tq_full) return TCS_BUSY;
    if (occupancy >= 1000 || tq_near_full) return TCS_WARN;
    return TCS_READY;
  endfunction

  initial begin
    tcs_e e;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 600; i++) begin
      occupancy = 19'($urandom % 3000);
      tq_near_full = ($urandom % 10 == 0);
      tq_full = ($urandom % 20 == 0);
      if (i == 300) oos_in = 1;
      if (i == 301) oos_in = 0;
      if (i == 500) error_in = 1;
      if (i == 501) error_in = 0;
      e = expect_code();
      if (oos_in) oos_s = 1;
      if (error_in) err_s = 1;
      @(negedge clk);
      chk(tcs == e, $sformatf("cycle %0d code %b exp %b", i, tcs, e));
    end
    chk(busy_cycles > 0 && warn_cycles > 0, "state counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
