// apv_frame_gen: behavioural model of the APV25 pairs driving NF fibres
// (through optical link, receiver and ADC), for the testbenches.
//
// On every l1a the model queues one event. Frames leave back to back, each
// START_LAT cycles after its trigger at the earliest, with GAP baseline words
// between frames. A frame is the 24-word header (6 start words, 8 address
// bits per chip interleaved, 2 error bits = 1) and 256 data words from
// fed_tb_pkg. The pipeline address of a trigger at cycle t is
// (t - apv_lat) mod 192, counted from the end of reset. bad_addr_ev and
// drop_ev make one event carry a wrong address or no frame on fibre 0.
module apv_frame_gen #(
  parameter int NF        = 12,
  parameter int START_LAT = 40,
  parameter int GAP       = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        l1a,
  input  int          occ,
  input  int          apv_lat,
  input  int          bad_addr_ev,
  input  int          drop_ev,
  input  int          fibre_base,
  output logic [9:0]  adc [NF],
  output int          frames_sent
);
  import fed_tb_pkg::*;

  int cyc, ev_in, pos, cur_ev, cur_addr, busy_until;
  int q_ev[$], q_addr[$], q_t[$];
  bit active;

  always @(posedge clk) begin
    if (rst) begin
      cyc = 0; ev_in = 0; active = 0; pos = 0; frames_sent <= 0;
      q_ev.delete(); q_addr.delete(); q_t.delete();
      busy_until = 0;
      for (int f = 0; f < NF; f++) adc[f] <= 10'(LO_LEVEL);
    end else begin
      if (l1a) begin
        q_ev.push_back(ev_in);
        q_addr.push_back(((cyc - apv_lat) % 192 + 192) % 192);
        q_t.push_back(cyc);
        ev_in++;
      end
      if (!active && q_ev.size() > 0 && cyc >= q_t[0] + START_LAT && cyc >= busy_until) begin
        active = 1; pos = 0;
        cur_ev = q_ev.pop_front(); cur_addr = q_addr.pop_front(); void'(q_t.pop_front());
      end
      for (int f = 0; f < NF; f++) begin
        int a, w, fib;
        fib = fibre_base + f;
        w = LO_LEVEL;
        if (active) begin
          a = (cur_ev == bad_addr_ev && fib == 0) ? (cur_addr ^ 8'h5A) : cur_addr;
          if (pos < 6) w = HI_LEVEL;
          else if (pos < 22) w = ((a >> (7 - (pos - 6) / 2)) & 1) ? HI_LEVEL : LO_LEVEL;
          else if (pos < 24) w = HI_LEVEL;
          else w = sample_of(fib, cur_ev, strip_of_word(pos - 24), occ);
          if (cur_ev == drop_ev && fib == 0) w = LO_LEVEL;
        end
        adc[f] <= 10'(w);
      end
      if (active) begin
        pos++;
        if (pos == 280) begin
          active = 0;
          busy_until = cyc + 1 + GAP;
          frames_sent <= frames_sent + 1;
        end
      end
      cyc++;
    end
  end
endmodule
