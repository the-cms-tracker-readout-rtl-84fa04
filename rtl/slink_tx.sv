// slink_tx: output of the event buffer to the S-LINK64 transmitter, or to the
// slower VME readout path.
//
// In S-LINK mode (vme_mode = 0) one 64-bit word per cycle is handed to the
// S-LINK64 mezzanine (slink_wen, slink_data, slink_ctrl marking header and
// trailer words) while the link-full flag slink_lff is low. When the link
// signals backpressure with slink_lff, the transfer stops until it drops, and
// the stall is counted in lff_cycles. In VME mode the next word is held in
// vme_word/vme_valid and is removed by a vme_pop pulse.
//
// Signals are active high here (the S-LINK64 interface uses active-low
// levels, left to the board). The output is registered: a word appears on
// slink_data the cycle after it is taken from the buffer.
module slink_tx (
  input  logic                clk,
  input  logic                rst,
  input  logic                vme_mode,
  input  logic                in_valid,
  input  fed_pkg::buf_word_t  in_word,
  output logic                in_ready,
  output logic                slink_wen,
  output logic [63:0]         slink_data,
  output logic                slink_ctrl,
  input  logic                slink_lff,
  output logic                vme_valid,
  output fed_pkg::buf_word_t  vme_word,
  input  logic                vme_pop,
  output logic [31:0]         words_sent,
  output logic [31:0]         lff_cycles
);
  import fed_pkg::*;

  assign in_ready  = vme_mode ? vme_pop : !slink_lff;
  assign vme_valid = vme_mode && in_valid;
  assign vme_word  = in_word;

  always_ff @(posedge clk) begin
    if (rst) begin
      slink_wen  <= 1'b0;
      slink_data <= '0;
      slink_ctrl <= 1'b0;
      words_sent <= '0;
      lff_cycles <= '0;
    end else begin
      slink_wen <= !vme_mode && in_valid && !slink_lff;
      if (!vme_mode && in_valid && !slink_lff) begin
        slink_data <= in_word.data;
        slink_ctrl <= in_word.ctrl;
        words_sent <= words_sent + 1'b1;
      end
      if (!vme_mode && in_valid && slink_lff) lff_cycles <= lff_cycles + 1'b1;
    end
  end

endmodule
