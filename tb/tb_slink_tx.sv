// tb_slink_tx: S-LINK64 output with backpressure, and VME readout mode.
// A stream of numbered words is offered; with random link-full (LFF) cycles
// every word must leave exactly once and in order, one per cycle when LFF is
// low, none while it is high. In VME mode the word is held until vme_pop.
module tb_slink_tx;
  import fed_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic vme_mode = 0, in_valid = 0, in_ready, slink_wen, slink_ctrl, slink_lff = 0, vme_valid, vme_pop = 0;
  buf_word_t in_word = '0, vme_word;
  logic [63:0] slink_data;
  logic [31:0] words_sent, lff_cycles;
  int checks = 0, failures = 0, next_in = 0, next_out = 0, n_lff = 0;

  slink_tx dut (.clk, .rst, .vme_mode, .in_valid, .in_word, .in_ready, .slink_wen, .slink_data,
                .slink_ctrl, .slink_lff, .vme_valid, .vme_word, .vme_pop, .words_sent, .lff_cycles);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("CHECK FAILED: %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (slink_wen) begin
      chk(slink_data == 64'(next_out) && slink_ctrl == (next_out % 7 == 0), "word order");
      next_out++;
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 2000; i++) begin
      bit lff_prev;
      in_valid = ($urandom % 4 != 0);
      in_word = '{ctrl: (next_in % 7 == 0), data: 64'(next_in)};
      slink_lff = ($urandom % 3 == 0);
      if (slink_lff && in_valid) n_lff++;
      #1 chk(in_ready == !slink_lff, "ready follows LFF");
      @(posedge clk);
      if (in_valid && in_ready) next_in++;
      @(negedge clk);
      chk(slink_wen == (in_valid && !slink_lff), "one word per free cycle");
    end
    in_valid = 0; slink_lff = 0;
    repeat (3) @(negedge clk);
    chk(next_out == next_in && int'(words_sent) == next_in, "all words sent once");
    chk(int'(lff_cycles) == n_lff && n_lff > 0, "backpressure cycles counted");
    vme_mode = 1; in_valid = 1; in_word = '{ctrl: 1'b1, data: 64'hDEAD_BEEF_0123_4567};
    @(negedge clk);
    chk(vme_valid && vme_word.data == 64'hDEAD_BEEF_0123_4567 && !in_ready && !slink_wen, "VME holds word");
    vme_pop = 1; #1 chk(in_ready, "pop takes word"); @(negedge clk); vme_pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
