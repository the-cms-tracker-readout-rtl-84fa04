// fed_event_checker: testbench component that parses FED event records and
// compares every field with the reference model of fed_tb_pkg.
//
// Words are pushed with `push` (for example from S-LINK writes). At each
// trailer the complete record is checked: header (event number), every
// unit's header, each channel record (missing flag, pipeline addresses,
// mismatch flag, length, bytes) and the trailer (length, CRC-16). The per
// event information needed for the reference (occupancy, expected address)
// is written by the testbench into the arrays occ_of/addr_of.
module fed_event_checker #(
  parameter int NU  = 8,
  parameter int NCH = 12
) (
  input  logic        clk,
  input  logic        push,
  input  logic [63:0] data,
  input  logic        ctrl,
  input  int          bad_addr_ev,
  input  int          drop_ev
);
  import fed_tb_pkg::*;

  int occ_of  [int];
  int addr_of [int];
  int checks, failures;
  int n_events, n_raw, n_missing, n_mism, n_sat, n_single, n_clusters;
  logic [64:0] ev_q [$];

  initial begin
    checks = 0; failures = 0; n_events = 0; n_raw = 0; n_missing = 0;
    n_mism = 0; n_sat = 0; n_single = 0; n_clusters = 0;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("CHECK FAILED: %s", what);
    end
  endtask

  function automatic logic [15:0] hw(int i);   // i-th halfword of the payload
    logic [63:0] w;
    w = ev_q[1 + i / 4][63:0];
    return w[63 - 16 * (i % 4) -: 16];
  endfunction

  task automatic check_event();
    logic [63:0] h, t;
    logic [15:0] crc, x;
    int ev, p, len, f, npay, ea;
    bit raw;
    byte unsigned exp_q[$];
    h = ev_q[0][63:0];
    t = ev_q[ev_q.size() - 1][63:0];
    chk(ev_q[0][64] && h[63:60] == 4'h5, "header marker");
    ev  = int'(h[55:32]) - 1;
    raw = (h[59:56] == 4'd2);
    chk(occ_of.exists(ev), $sformatf("event number %0d known", ev + 1));
    if (!occ_of.exists(ev)) return;
    n_events++;
    if (raw) n_raw++;
    npay = (ev_q.size() - 2) * 4;
    p = 0;
    for (int u = 0; u < NU; u++) begin
      x = hw(p); p++;
      chk(x[15:12] == 4'hE && x[11:8] == 4'(u) && x[7:0] == 8'(ev),
          $sformatf("unit header u%0d ev%0d: %h", u, ev, x));
      for (int c = 0; c < NCH; c++) begin
        logic [15:0] c0, c1, c2;
        f = u * NCH + c;
        c0 = hw(p); c1 = hw(p + 1); c2 = hw(p + 2); p += 3;
        chk(c0[15:12] == 4'(c), $sformatf("channel id f%0d", f));
        if (ev == drop_ev && f == 0) begin
          chk(c0[11] == 1'b1 && c2[9:0] == 0, "missing frame record");
          if (c0[11]) n_missing++;
          continue;
        end
        ea = addr_of[ev];
        if (ev == bad_addr_ev && f == 0) begin
          ea = ea ^ 8'h5A;
          chk(c0[8] == 1'b1, "address mismatch flagged");
          if (c0[8]) n_mism++;
        end else begin
          chk(c0[8] == 1'b0, $sformatf("no mismatch f%0d ev%0d", f, ev));
        end
        chk(c0[11] == 1'b0 && c0[10:9] == 2'b00, $sformatf("flags f%0d ev%0d %h", f, ev, c0));
        chk(c0[7:0] == 8'(ea) && c1[7:0] == 8'(ea),
            $sformatf("pipeline address f%0d ev%0d: %h %h exp %h", f, ev, c0[7:0], c1[7:0], ea));
        expected_bytes(f, ev, occ_of[ev], raw, exp_q);
        len = int'(c2[9:0]);
        chk(len == exp_q.size(), $sformatf("length f%0d ev%0d: %0d exp %0d", f, ev, len, exp_q.size()));
        for (int b = 0; b < len && b < exp_q.size(); b++) begin
          x = hw(p + b / 2);
          chk((b % 2 ? x[7:0] : x[15:8]) == exp_q[b],
              $sformatf("byte %0d f%0d ev%0d: %h exp %h", b, f, ev, b % 2 ? x[7:0] : x[15:8], exp_q[b]));
        end
        if (!raw) begin
          int k = 0;
          while (k + 1 < exp_q.size()) begin
            n_clusters++;
            if (exp_q[k + 1] == 1) n_single++;
            for (int j = 0; j < exp_q[k + 1]; j++) if (exp_q[k + 2 + j] == 255) n_sat++;
            k += 2 + exp_q[k + 1];
          end
        end
        p += (len + 1) / 2;
      end
      p = (p + 3) / 4 * 4;
    end
    chk(p == npay, $sformatf("payload size ev%0d: %0d exp %0d", ev, npay, p));
    crc = 16'hFFFF;
    for (int i = 0; i < ev_q.size() - 1; i++) crc = crc16(crc, ev_q[i][63:0]);
    chk(ev_q[ev_q.size() - 1][64] && t[63:60] == 4'hA, "trailer marker");
    chk(int'(t[55:32]) == ev_q.size(), "trailer length");
    chk(t[31:16] == crc, $sformatf("CRC ev%0d %h exp %h", ev, t[31:16], crc));
  endtask

  always @(posedge clk) begin
    if (push) begin
      ev_q.push_back({ctrl, data});
      if (ctrl && data[63:60] == 4'hA) begin
        check_event();
        ev_q.delete();
      end
    end
  end
endmodule
