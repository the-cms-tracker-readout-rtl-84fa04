// qdr_buffer_ctrl: circular event buffer in the external QDR SRAM pair.
//
// The FED stores built events in 2 MB of QDR SRAM to ride out trigger-rate
// fluctuations. The pair is used here as one memory of 2^ADDR_W words of 65
// bits (64 data bits and the S-LINK control flag; 2^18 x 8 bytes = 2 MB),
// with separate write and read ports as QDR parts have. Words written on
// the in_* side are stored at a write pointer; a read pointer fetches them
// back in order into a small output queue, so that the out_* side is a
// valid/ready stream despite the RD_LAT-cycle read latency of the SRAM.
//
// occupancy counts words written but not yet read out and feeds the TCS
// status. in_ready is low when the memory is full; an attempt to write then
// sets the sticky `overflow` status bit.
//
// The single 65-bit memory view, the read latency and the output queue are
// this implementation's choices; the QDR chips themselves are outside the
// design (see the behavioural model used by the testbenches).
module qdr_buffer_ctrl #(
  parameter int ADDR_W = 18,
  parameter int RD_LAT = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  fed_pkg::buf_word_t   in_word,
  output logic                 in_ready,
  output logic                 out_valid,
  output fed_pkg::buf_word_t   out_word,
  input  logic                 out_ready,
  output logic [ADDR_W:0]      occupancy,
  output logic                 overflow,
  // QDR SRAM ports
  output logic                 qdr_w_n,
  output logic [ADDR_W-1:0]    qdr_wa,
  output logic [64:0]          qdr_d,
  output logic                 qdr_r_n,
  output logic [ADDR_W-1:0]    qdr_ra,
  input  logic [64:0]          qdr_q
);
  import fed_pkg::*;

  localparam int OQ = 4;   // output queue depth, > RD_LAT

  logic [ADDR_W-1:0] wp, rp;
  logic [ADDR_W:0]   stored;      // words in SRAM not yet fetched
  logic              do_wr, do_rd;
  logic [RD_LAT-1:0] inflight_sr;
  logic [2:0]        inflight, oq_cnt;
  buf_word_t         oq [OQ];
  logic [1:0]        oq_wp, oq_rp;
  logic              oq_push, oq_pop;

  assign in_ready = (occupancy != (ADDR_W+1)'(1 << ADDR_W));
  assign do_wr    = in_valid && in_ready;
  always_comb begin
    inflight = '0;
    for (int i = 0; i < RD_LAT; i++) inflight += 3'(inflight_sr[i]);
  end
  assign do_rd    = (stored != 0) && (3'(oq_cnt) + inflight < 3'(OQ));
  assign oq_push  = inflight_sr[RD_LAT-1];
  assign oq_pop   = out_valid && out_ready;
  assign out_valid = (oq_cnt != 0);
  assign out_word  = oq[oq_rp];

  assign qdr_w_n = !do_wr;
  assign qdr_wa  = wp;
  assign qdr_d   = in_word;
  assign qdr_r_n = !do_rd;
  assign qdr_ra  = rp;

  always_ff @(posedge clk) begin
    if (oq_push) oq[oq_wp] <= qdr_q;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp          <= '0;
      rp          <= '0;
      stored      <= '0;
      occupancy   <= '0;
      overflow    <= 1'b0;
      inflight_sr <= '0;
      oq_cnt      <= '0;
      oq_wp       <= '0;
      oq_rp       <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      stored    <= stored + (ADDR_W+1)'(do_wr) - (ADDR_W+1)'(do_rd);
      occupancy <= occupancy + (ADDR_W+1)'(do_wr) - (ADDR_W+1)'(oq_pop);
      if (in_valid && !in_ready) overflow <= 1'b1;
      inflight_sr <= {inflight_sr[RD_LAT-2:0], do_rd};
      if (oq_push) oq_wp <= oq_wp + 1'b1;
      if (oq_pop)  oq_rp <= oq_rp + 1'b1;
      oq_cnt <= oq_cnt + 3'(oq_push) - 3'(oq_pop);
    end
  end

  a_oq_no_overflow: assert property (@(posedge clk) disable iff (rst)
                                     !(oq_push && !oq_pop && oq_cnt == 3'(OQ)));

endmodule
