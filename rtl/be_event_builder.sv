// be_event_builder: Back-End FPGA event building.
//
// Trigger side: l1a increments a 24-bit Level-1 event number; a 12-bit
// bunch-crossing counter runs from bc0 (0..3563). Each l1a pushes
// {event number, bunch crossing} into a trigger queue of TQ_DEPTH entries; a
// trigger arriving with the queue full pulses `trig_ovf`.
//
// Event side: for the oldest trigger the builder writes a header word, then
// copies the event of each of the N_UNITS Front-End FIFOs in turn (64-bit
// words up to the word flagged last), and ends with a trailer word:
//   header  {4'h5, type[3:0] (1 cluster, 2 raw), L1 number[23:0], BX[11:0],
//            fed_id[11:0], 8'h00}                                  ctrl = 1
//   trailer {4'hA, 4'h0, length in 64-bit words incl. header and
//            trailer[23:0], CRC-16[15:0], 16'h0000}                ctrl = 1
// The CRC-16-CCITT (init 0xFFFF, MSB first) covers every word before the
// trailer.
//
// The FED places the CRC among the header information; here it is put in the
// trailer so that it can be computed while the data stream through. The
// record layout is this implementation's choice, modelled on the CMS common
// data format. One word moves per cycle when out_ready is high.
module be_event_builder #(
  parameter int N_UNITS  = 8,
  parameter int TQ_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 l1a,
  input  logic                 bc0,
  input  logic                 raw_mode,
  input  logic [11:0]          fed_id,
  input  logic [63:0]          link_data  [N_UNITS],
  input  logic                 link_last  [N_UNITS],
  input  logic                 link_valid [N_UNITS],
  output logic                 link_rd    [N_UNITS],
  output logic                 out_valid,
  output fed_pkg::buf_word_t   out_word,
  input  logic                 out_ready,
  output logic                 trig_ovf,
  output logic [$clog2(TQ_DEPTH):0] tq_count,
  output logic [23:0]          events_built
);
  import fed_pkg::*;

  typedef struct packed {
    logic [23:0] evn;
    logic [11:0] bx;
  } trig_t;

  localparam int QAW = $clog2(TQ_DEPTH);
  localparam int UW  = (N_UNITS > 1) ? $clog2(N_UNITS) : 1;

  trig_t          tq [TQ_DEPTH];
  logic [QAW-1:0] tq_wp, tq_rp;
  logic [23:0]    evn;
  logic [11:0]    bx;
  logic           tq_pop, tq_push;
  trig_t          cur;

  assign tq_push = l1a && (tq_count != (QAW+1)'(TQ_DEPTH));
  assign cur     = tq[tq_rp];

  always_ff @(posedge clk) begin
    trig_ovf <= 1'b0;
    if (rst) begin
      evn      <= 24'd0;
      bx       <= 12'd0;
      tq_wp    <= '0;
      tq_rp    <= '0;
      tq_count <= '0;
    end else begin
      bx <= (bc0 || bx == 12'(ORBIT_BX - 1)) ? 12'd0 : bx + 1'b1;
      if (l1a) evn <= evn + 1'b1;
      if (tq_push) begin
        tq[tq_wp] <= '{evn: evn + 24'd1, bx: bx};
        tq_wp     <= tq_wp + 1'b1;
      end
      if (l1a && !tq_push) trig_ovf <= 1'b1;
      if (tq_pop) tq_rp <= tq_rp + 1'b1;
      tq_count <= tq_count + (QAW+1)'(tq_push) - (QAW+1)'(tq_pop);
    end
  end

  typedef enum logic [1:0] {E_IDLE, E_HDR, E_UNIT, E_TRL} est_e;
  est_e          st;
  logic [UW-1:0] unit;
  logic [15:0]   crc;
  logic [23:0]   nwords;
  logic          take;

  assign take = (st == E_UNIT) && link_valid[unit] && out_ready;

  always_comb begin
    for (int u = 0; u < N_UNITS; u++) link_rd[u] = take && (unit == UW'(u));
  end

  always_comb begin
    out_valid = 1'b0;
    out_word  = '0;
    unique case (st)
      E_HDR: begin
        out_valid = 1'b1;
        out_word  = '{ctrl: 1'b1,
                      data: {4'h5, raw_mode ? 4'd2 : 4'd1, cur.evn, cur.bx, fed_id, 8'h00}};
      end
      E_UNIT: begin
        out_valid = link_valid[unit];
        out_word  = '{ctrl: 1'b0, data: link_data[unit]};
      end
      E_TRL: begin
        out_valid = 1'b1;
        out_word  = '{ctrl: 1'b1, data: {4'hA, 4'h0, nwords + 24'd1, crc, 16'h0000}};
      end
      default: ;
    endcase
  end

  assign tq_pop = (st == E_TRL) && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      st     <= E_IDLE;
      unit   <= '0;
      crc    <= 16'hFFFF;
      nwords <= '0;
      events_built <= '0;
    end else begin
      unique case (st)
        E_IDLE: if (tq_count != 0) begin
          st     <= E_HDR;
          crc    <= 16'hFFFF;
          nwords <= '0;
        end
        E_HDR: if (out_ready) begin
          crc    <= crc16_word(crc, out_word.data);
          nwords <= nwords + 1'b1;
          st     <= E_UNIT;
          unit   <= '0;
        end
        E_UNIT: if (take) begin
          crc    <= crc16_word(crc, out_word.data);
          nwords <= nwords + 1'b1;
          if (link_last[unit]) begin
            if (unit == UW'(N_UNITS - 1)) st <= E_TRL;
            else unit <= unit + 1'b1;
          end
        end
        E_TRL: if (out_ready) begin
          st           <= E_IDLE;
          events_built <= events_built + 1'b1;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

endmodule
