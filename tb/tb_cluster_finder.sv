// tb_cluster_finder: common-mode subtraction, two-threshold clustering and
// 8-bit compression of one fibre.
// Frames from the stimulus functions (several occupancies, raw mode once) are
// presented as a closed bank with their medians; the output records must
// equal the reference model byte by byte. Two frames are searched before the
// first record is read, to use both output buffers, and the search must take
// 257 cycles from start to ob_ready.
module tb_cluster_finder;
  import fed_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic raw_mode = 0, noise_we = 0, cm_valid = 0, release_bank, ob_ready, ob_release = 0;
  logic [7:0] noise_addr = 0, noise_wdata = 0, rd_strip, ob_rd_addr = 0;
  logic signed [10:0] cm0 = 0, cm1 = 0, rd_val;
  logic [18:0] cm_tag = 0, ob_tag;
  logic [9:0] ob_len;
  logic [15:0] ob_rd_data;
  int checks = 0, failures = 0;
  int vals [256];
  localparam int F = 7;

  cluster_finder dut (.clk, .rst, .raw_mode, .thr_lo(8'(THR_LO)), .thr_hi(8'(THR_HI)), .noise_we,
                      .noise_addr, .noise_wdata, .cm_valid, .cm0, .cm1, .cm_tag, .rd_strip, .rd_val,
                      .release_bank, .ob_ready, .ob_len, .ob_tag, .ob_rd_addr, .ob_rd_data, .ob_release);
  assign rd_val = 11'(vals[rd_strip]);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  task automatic present(int ev, int occ, bit raw);
    int q [$];
    for (int s = 0; s < 256; s++) vals[s] = raw ? sample_of(F, ev, s, occ) : sample_of(F, ev, s, occ) - ped_of(F, s);
    q.delete(); for (int s = 0; s < 128; s++) q.push_back(vals[s]);
    cm0 = 11'(kth_smallest(q, 63));
    q.delete(); for (int s = 128; s < 256; s++) q.push_back(vals[s]);
    cm1 = 11'(kth_smallest(q, 63));
    raw_mode = raw; cm_tag = 19'(ev);
    cm_valid = 1;
    while (!release_bank) @(negedge clk);
    cm_valid = 0;
    @(negedge clk);
  endtask

  task automatic read_check(int ev, int occ, bit raw);
    byte unsigned e [$];
    expected_bytes(F, ev, occ, raw, e);
    chk(ob_ready, "record ready");
    chk(int'(ob_len) == e.size(), $sformatf("len ev%0d %0d exp %0d", ev, ob_len, e.size()));
    chk(int'(ob_tag) == ev, "tag");
    for (int b = 0; b < e.size(); b += 2) begin
      ob_rd_addr = 8'(b / 2); #1;
      chk(ob_rd_data[15:8] == e[b], $sformatf("ev%0d byte %0d", ev, b));
      if (b + 1 < e.size()) chk(ob_rd_data[7:0] == e[b + 1], $sformatf("ev%0d byte %0d", ev, b + 1));
    end
    @(negedge clk); ob_release = 1; @(negedge clk); ob_release = 0;
  endtask

  int occs [6] = '{30, 80, 200, 5, 500, 30};
  initial begin
    int n;
    repeat (3) @(negedge clk); rst = 0;
    for (int s = 0; s < 256; s++) begin
      noise_we = 1; noise_addr = 8'(s); noise_wdata = 8'(noise_of(F, s)); @(negedge clk);
    end
    noise_we = 0;
    // timing: start to ready
    n = 0;
    fork
      present(0, occs[0], 0);
      begin @(negedge clk); while (!ob_ready) begin @(negedge clk); n++; end end
    join
    chk(n == 257, $sformatf("search takes %0d cycles", n));
    present(1, occs[1], 0);      // second buffer
    read_check(0, occs[0], 0);
    read_check(1, occs[1], 0);
    for (int ev = 2; ev < 6; ev++) begin present(ev, occs[ev], 0); read_check(ev, occs[ev], 0); end
    present(6, 30, 1); read_check(6, 30, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
