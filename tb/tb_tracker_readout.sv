// tb_tracker_readout: end-to-end test of the FED with the APV Emulator, at the
// design's full default size (96 fibres, 2 MB buffer).
//
// A model of the APV25 pairs sends frames on all 96 fibres for every trigger;
// the records that leave over S-LINK64 (or are read back over the register
// bus in VME mode) are checked word by word against the reference model.
// Triggers come at random with a mean spacing of 400 cycles (100 kHz at
// 40 MHz) and are held back while the global status is BUSY or ERROR. The
// test walks through: cluster mode with S-LINK backpressure, a missing frame,
// raw mode, VME readout, data spy with a channel delay, a trigger burst that
// fills the emulated APV25 buffer (WARNING then BUSY), low FED buffer levels
// with the link stalled (FED WARNING and BUSY), a merged FMM status, and at
// last a wrong pipeline address (OUT-OF-SYNCH). Each of these is counted and
// a mechanism that never happened counts as a failure.
module tb_tracker_readout;
  import fed_tb_pkg::*;
  import fed_pkg::*;

  localparam int NF  = 96;
  localparam int LAT = 100;   // APV25 trigger latency in the APVE

  logic clk = 0, rst = 1;
  always #12.5 clk = ~clk;

  logic [9:0]  adc [NF];
  logic        l1a = 0, bc0 = 0, cfg_we = 0, slink_lff = 0;
  logic [19:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0, cfg_rdata;
  logic        qdr_w_n, qdr_r_n, slink_wen, slink_ctrl;
  logic [17:0] qdr_wa, qdr_ra;
  logic [64:0] qdr_d, qdr_q;
  logic [63:0] slink_data;
  logic [3:0]  fed_tcs, apve_tcs, tracker_tcs, fmm_in;
  logic [4:0]  apve_occ;
  int occ = 30, bad_ev = -1, drop_ev = 5, frames_sent;

  apv_frame_gen #(.NF(NF)) u_gen (
    .clk, .rst, .l1a, .occ, .apv_lat(LAT), .bad_addr_ev(bad_ev), .drop_ev,
    .fibre_base(0), .adc, .frames_sent
  );

  tracker_readout dut (
    .clk, .rst, .adc, .l1a, .bc0, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .qdr_w_n, .qdr_wa, .qdr_d, .qdr_r_n, .qdr_ra, .qdr_q,
    .slink_wen, .slink_data, .slink_ctrl, .slink_lff, .fed_tcs,
    .apve_peak_mode(1'b0), .apve_warn_level(5'd6), .apve_latency(8'(LAT)),
    .fmm_in, .apve_tcs, .tracker_tcs, .apve_occupancy(apve_occ)
  );

  qdr_sram_model u_qdr (.clk, .w_n(qdr_w_n), .wa(qdr_wa), .d(qdr_d),
                        .r_n(qdr_r_n), .ra(qdr_ra), .q(qdr_q));

  logic        vme_push = 0;
  logic [63:0] vme_data = 0;
  logic        vme_ctrl = 0;
  fed_event_checker u_chk (
    .clk, .push(slink_wen || vme_push), .data(slink_wen ? slink_data : vme_data),
    .ctrl(slink_wen ? slink_ctrl : vme_ctrl), .bad_addr_ev(bad_ev), .drop_ev
  );

  int checks, failures, cyc, n_trig;
  int n_lff, n_fed_warn, n_fed_busy, n_apve_warn, n_apve_busy, n_oos, n_fmm, n_vme, n_spy;
  bit lff_random = 0;

  always @(posedge clk) begin
    if (rst) cyc <= 0; else cyc <= cyc + 1;
    if (lff_random) slink_lff <= ($urandom % 4 == 0);
    if (slink_lff && dut.u_fed.u_be.bo_valid) n_lff++;
    if (fed_tcs == TCS_WARN) n_fed_warn++;
    if (fed_tcs == TCS_BUSY) n_fed_busy++;
    if (apve_tcs == TCS_WARN) n_apve_warn++;
    if (apve_tcs == TCS_BUSY) n_apve_busy++;
    if (fed_tcs == TCS_OOS) n_oos++;
  end

  task automatic wr(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic rd(int a, output int d);
    @(negedge clk); cfg_addr = 20'(a); #1 d = int'(cfg_rdata);
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("CHECK FAILED: %s", what); end
  endtask

  // one trigger, recorded for the reference model
  task automatic trigger();
    @(negedge clk);
    u_chk.occ_of[n_trig]  = occ;
    u_chk.addr_of[n_trig] = ((cyc - LAT) % 192 + 192) % 192;
    l1a = 1;
    @(negedge clk); l1a = 0;
    n_trig++;
  endtask

  task automatic run_triggers(int n, int mean);
    for (int i = 0; i < n; i++) begin
      int gap = 3 + int'($urandom % (2 * mean));
      repeat (gap) @(negedge clk);
      while (tracker_tcs == TCS_BUSY || tracker_tcs == TCS_ERROR || apve_occ >= 5'd9)
        @(negedge clk);
      trigger();
    end
  endtask

  task automatic drain();
    int t = 0;
    while ((u_chk.n_events + n_vme) < n_trig && t < 400000) begin @(negedge clk); t++; end
    repeat (20) @(negedge clk);
  endtask

  initial begin
    int d, k0;
    checks = 0; failures = 0; n_trig = 0;
    n_lff = 0; n_fed_warn = 0; n_fed_busy = 0; n_apve_warn = 0; n_apve_busy = 0;
    n_oos = 0; n_fmm = 0; n_vme = 0; n_spy = 0;
    fmm_in = TCS_READY;
    repeat (5) @(negedge clk);
    rst = 0;
    // pedestals and noise of every strip
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int s = 0; s < 256; s++) begin
        cfg_we = 1; cfg_addr = {4'(f / 12), 4'(f % 12), 4'h0, 8'(s)}; cfg_wdata = 16'(ped_of(f, s));
        @(negedge clk);
        cfg_addr = {4'(f / 12), 4'(f % 12), 4'h1, 8'(s)}; cfg_wdata = 16'(noise_of(f, s));
        @(negedge clk);
      end
    cfg_we = 0;
    for (int u = 0; u < 8; u++) wr({u, 16'hF004}, TICK);
    // channel delay on fibre 1 (first Delay FPGA)
    wr({4'h0, 4'h1, 4'h2, 8'h00}, 3);

    // 1. cluster mode, random backpressure, one missing frame (event 5)
    lff_random = 1;
    run_triggers(20, 200);
    drain();
    lff_random = 0; slink_lff = 0;
    chk(u_chk.n_events == 20, $sformatf("20 cluster events, got %0d", u_chk.n_events));

    // 2. raw mode
    wr(20'h80000, 1);
    run_triggers(2, 3000);
    drain();
    wr(20'h80000, 0);
    chk(u_chk.n_raw == 2, "raw events");

    // 3. VME readout of one event
    wr(20'h80000, 2);
    trigger();
    begin
      int t = 0, v, w0, w1, w2, w3;
      bit done = 0;
      while (!done && t < 20000) begin
        rd(20'h80017, v);
        if (v[1]) begin
          rd(20'h80012, w0); rd(20'h80013, w1); rd(20'h80014, w2); rd(20'h80015, w3);
          @(negedge clk);
          vme_data = {16'(w0), 16'(w1), 16'(w2), 16'(w3)}; vme_ctrl = v[0]; vme_push = 1;
          @(negedge clk); vme_push = 0;
          if (v[0] && vme_data[63:60] == 4'hA) done = 1;
          wr(20'h80016, 0);
        end
        t++;
      end
      if (done) n_vme++;
    end
    wr(20'h80000, 0);
    n_vme = 0;   // the VME event is counted by the checker
    drain();

    $display("phase at cycle %0d, events %0d of %0d", cyc, u_chk.n_events, n_trig);
    // 4. data spy: arm, trigger, find the frame header of fibre 1 (delayed)
    wr(20'h80004, 0);
    trigger();
    repeat (600) @(negedge clk);
    rd(20'h80005, d);
    chk(d[0] == 1'b1, "spy done");
    begin
      int sp [512];
      int ev;
      ev = n_trig - 1;
      for (int a = 0; a < 512; a++) rd({4'h0, 4'h1, 3'b100, 9'(a)}, sp[a]);
      k0 = -1;
      for (int a = 0; a + 6 < 512 && k0 < 0; a++)
        if (sp[a] >= TICK && sp[a+1] >= TICK && sp[a+2] >= TICK && sp[a+3] >= TICK &&
            sp[a+4] >= TICK && sp[a+5] >= TICK) k0 = a;
      chk(k0 >= 0 && k0 + 24 + 256 <= 512, "spy sees a frame header");
      if (k0 >= 0 && k0 + 280 <= 512) begin
        for (int j = 0; j < 256; j++)
          chk(sp[k0 + 24 + j] == sample_of(1, ev, strip_of_word(j), occ),
              $sformatf("spy sample %0d: %0d exp %0d (header at %0d)", j, sp[k0 + 24 + j],
                        sample_of(1, ev, strip_of_word(j), occ), k0));
        n_spy++;
      end
    end
    drain();

    $display("phase at cycle %0d, events %0d of %0d", cyc, u_chk.n_events, n_trig);
    // 5. trigger burst into the emulated APV25 buffer
    for (int i = 0; i < 12; i++) begin
      repeat (3) @(negedge clk);   // lets the two-stage status catch up
      while (tracker_tcs == TCS_BUSY) @(negedge clk);
      trigger();
    end
    drain();

    $display("phase at cycle %0d, events %0d of %0d", cyc, u_chk.n_events, n_trig);
    // 6. FED buffer levels: stall the link, low warning and busy levels
    wr(20'h80002, 4); wr(20'h80003, 40);
    slink_lff = 1;
    run_triggers(4, 300);
    repeat (3000) @(negedge clk);
    slink_lff = 0;
    drain();
    wr(20'h80002, 16'h6000); wr(20'h80003, 16'h7800);

    $display("phase at cycle %0d, events %0d of %0d", cyc, u_chk.n_events, n_trig);
    // 7. merged FMM status
    fmm_in = TCS_WARN;
    repeat (4) @(negedge clk);
    if (tracker_tcs == TCS_WARN) n_fmm++;
    fmm_in = TCS_READY;
    repeat (4) @(negedge clk);

    $display("phase at cycle %0d, events %0d of %0d", cyc, u_chk.n_events, n_trig);
    // 8. out of synch: a wrong pipeline address on fibre 0
    bad_ev = n_trig;
    run_triggers(2, 200);
    drain();
    rd(20'h80010, d);
    chk(d[1] == 1'b1, "out-of-synch status bit");

    chk(n_trig == u_chk.n_events, $sformatf("all %0d events out (%0d)", n_trig, u_chk.n_events));
    chk(u_chk.n_missing > 0, "missing frame mechanism");
    chk(u_chk.n_mism > 0,    "address mismatch mechanism");
    chk(u_chk.n_raw > 0,     "raw mode mechanism");
    chk(u_chk.n_sat > 0,     "8-bit saturation");
    chk(u_chk.n_single > 0,  "isolated high strip");
    chk(u_chk.n_clusters > 0, "clusters found");
    chk(n_lff > 0,       "S-LINK backpressure");
    chk(n_fed_warn > 0,  "FED WARNING-OVERFLOW");
    chk(n_fed_busy > 0,  "FED BUSY");
    chk(n_apve_warn > 0, "APVE WARNING-OVERFLOW");
    chk(n_apve_busy > 0, "APVE BUSY");
    chk(n_oos > 0,       "FED OUT-OF-SYNCH");
    chk(n_fmm > 0,       "FMM merge");
    chk(n_spy > 0,       "data spy");
    $display("mechanisms: events=%0d raw=%0d missing=%0d mismatch=%0d clusters=%0d single=%0d sat=%0d lff=%0d fedwarn=%0d fedbusy=%0d apvewarn=%0d apvebusy=%0d oos=%0d fmm=%0d spy=%0d cycles=%0d",
             u_chk.n_events, u_chk.n_raw, u_chk.n_missing, u_chk.n_mism, u_chk.n_clusters,
             u_chk.n_single, u_chk.n_sat, n_lff, n_fed_warn, n_fed_busy, n_apve_warn,
             n_apve_busy, n_oos, n_fmm, n_spy, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures + 1);
    $finish;
  end
endmodule
