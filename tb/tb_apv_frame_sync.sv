// tb_apv_frame_sync: frame finding and time-window test for one fibre.
//
// The APV25 model sends frames for triggers that come singly and in bursts
// (queued frames back to back), and drops the frame of one trigger. The test
// checks that every trigger gives either a frame, with the right pipeline
// addresses, error bits and 256 samples in arrival order, or (for the dropped
// one) a `missed` pulse, and that frame_done comes 256 data words after the
// header, i.e. 280 words per frame.
module tb_apv_frame_sync;
  import fed_tb_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [9:0] adc [1];
  logic l1a = 0;
  int frames_sent, cyc;
  localparam int LAT = 50;
  localparam int DROP = 4;

  apv_frame_gen #(.NF(1)) u_gen (.clk, .rst, .l1a, .occ(50), .apv_lat(LAT), .bad_addr_ev(-1),
                                 .drop_ev(DROP), .fibre_base(0), .adc, .frames_sent);

  logic hdr_valid, data_valid, frame_done, missed, trig_overflow;
  fed_pkg::frame_tag_t hdr_tag;
  logic [7:0] data_idx;
  logic [9:0] data;

  apv_frame_sync dut (.clk, .rst, .sample(adc[0]), .l1a, .win_start(16'd0), .win_end(16'd64),
                      .min_period(16'd280), .tick_level(10'(TICK)), .hdr_valid, .hdr_tag,
                      .data_valid, .data_idx, .data, .frame_done, .missed, .trig_overflow);

  int checks = 0, failures = 0, n_frames = 0, n_missed = 0, n_trig = 0, ev = 0, widx = 0, hdr_cyc;
  int addr_of [int];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("CHECK FAILED: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst) cyc <= 0; else cyc <= cyc + 1;
    if (!rst) begin
      if (missed) begin
        chk(ev == DROP, $sformatf("miss only for the dropped event (ev %0d)", ev));
        n_missed++; ev++;
      end
      if (hdr_valid) begin
        chk(hdr_tag.addr0 == 8'(addr_of[ev]) && hdr_tag.addr1 == 8'(addr_of[ev]),
            $sformatf("address ev%0d %h exp %h", ev, hdr_tag.addr0, addr_of[ev]));
        chk(hdr_tag.err == 2'b00 && !hdr_tag.missing, "error bits");
        widx = 0; hdr_cyc = cyc;
      end
      if (data_valid) begin
        chk(int'(data_idx) == widx, "data index");
        chk(int'(data) == sample_of(0, ev, strip_of_word(widx), 50), "data word");
        widx++;
      end
      if (frame_done) begin
        chk(widx == 256 && cyc - hdr_cyc == 256, "frame length and timing");
        n_frames++; ev++;
      end
    end
  end

  task automatic trigger();
    @(negedge clk);
    addr_of[n_trig] = ((cyc - LAT) % 192 + 192) % 192;
    l1a = 1; @(negedge clk); l1a = 0;
    n_trig++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (10) @(negedge clk);
    trigger();
    repeat (600) @(negedge clk);
    for (int i = 0; i < 6; i++) begin trigger(); repeat (5) @(negedge clk); end
    repeat (3000) @(negedge clk);
    trigger();
    repeat (1000) @(negedge clk);
    chk(n_frames + n_missed == n_trig, $sformatf("one result per trigger %0d+%0d/%0d", n_frames, n_missed, n_trig));
    chk(n_missed == 1, "one missed frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
