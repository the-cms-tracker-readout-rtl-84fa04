// fe_unit: one Front-End FPGA, processing the 12 fibres of a front-end unit
// and assembling their records into the 2 kB cluster FIFO.
//
// Each fibre has its own fe_channel. When all 12 channels have a record for
// the next trigger, a sequencer copies them into the FIFO, one 16-bit word
// per cycle, as
//   unit header  {4'hE, UNIT_ID[3:0], event count[7:0]}
//   per channel  C0 {ch[3:0], missing, err[1:0], mismatch, addr0[7:0]}
//                C1 {8'h00, addr1[7:0]}
//                C2 {6'b0, length in bytes[9:0]}
//                then ceil(length/2) data words
// The 16-bit words are packed four to a 64-bit FIFO word (first word in bits
// 63:48, the event's last FIFO word padded with zeros and flagged as last).
// The sequencer waits while the FIFO is full. 256 x 64 bits is the 2 kB of
// the FED's cluster FIFO.
//
// Synchronisation check: every l1a queues the pipeline address sent by the
// APVE (apve_addr). In the record of each channel that has a frame, the two
// chips' addresses are compared with it; a difference sets the channel's
// mismatch bit and pulses oos. The record format, the packing and the place
// of the check are this implementation's choices.
//
// Register bus (word addresses within the unit, written with cfg_we):
//   0xC0SS / 0xC1SS : pedestal / noise of strip SS of channel C (0..11)
//   0xF000..0xF005  : thr_lo, thr_hi, win_start, win_end, tick_level,
//                     min_period
// The FIFO is read by the Back-End FPGA through link_* (first word fall
// through, link_rd pops). The FED's link is 4 bits wide at 160 MHz; here the
// Back-End reads up to one 64-bit word per 40 MHz cycle.
module fe_unit #(
  parameter int UNIT_ID    = 0,
  parameter int FIFO_DEPTH = 256,
  parameter int AQ_DEPTH   = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [fed_pkg::ADC_W-1:0]  adc [fed_pkg::CH_PER_UNIT],
  input  logic                       l1a,
  input  logic                       raw_mode,
  input  logic [7:0]                 apve_addr,
  input  logic                       cfg_we,
  input  logic [15:0]                cfg_addr,
  input  logic [15:0]                cfg_wdata,
  output logic [63:0]                link_data,
  output logic                       link_last,
  output logic                       link_valid,
  input  logic                       link_rd,
  output logic                       err_sticky,
  output logic                       oos,
  output logic [$clog2(FIFO_DEPTH):0] fifo_count
);
  import fed_pkg::*;
  localparam int NCH = CH_PER_UNIT;

  logic [7:0]  thr_lo, thr_hi;
  logic [15:0] win_start, win_end, min_period;
  logic [ADC_W-1:0] tick_level;

  always_ff @(posedge clk) begin
    if (rst) begin
      thr_lo     <= 8'd8;     // S/N > 2
      thr_hi     <= 8'd20;    // S/N > 5
      win_start  <= 16'd0;
      win_end    <= 16'd64;
      min_period <= 16'd280;
      tick_level <= 10'd768;
    end else if (cfg_we && cfg_addr[15:12] == 4'hF) begin
      case (cfg_addr[2:0])
        3'd0: thr_lo     <= cfg_wdata[7:0];
        3'd1: thr_hi     <= cfg_wdata[7:0];
        3'd2: win_start  <= cfg_wdata;
        3'd3: win_end    <= cfg_wdata;
        3'd4: tick_level <= cfg_wdata[ADC_W-1:0];
        3'd5: min_period <= cfg_wdata;
        default: ;
      endcase
    end
  end

  logic [NCH-1:0] ob_ready, ob_release, overrun, trig_ovf;
  logic [9:0]     ob_len  [NCH];
  frame_tag_t     ob_tag  [NCH];
  logic [15:0]    ob_data [NCH];
  logic [7:0]     ob_rd_addr;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    fe_channel u_ch (
      .clk, .rst, .sample(adc[c]), .l1a, .raw_mode, .win_start, .win_end, .min_period, .tick_level,
      .thr_lo, .thr_hi,
      .ped_we  (cfg_we && cfg_addr[15:12] == 4'(c) && cfg_addr[11:8] == 4'h0),
      .noise_we(cfg_we && cfg_addr[15:12] == 4'(c) && cfg_addr[11:8] == 4'h1),
      .cfg_addr(cfg_addr[7:0]), .cfg_wdata(cfg_wdata[ADC_W-1:0]),
      .ob_ready(ob_ready[c]), .ob_len(ob_len[c]), .ob_tag(ob_tag[c]),
      .ob_rd_addr, .ob_rd_data(ob_data[c]), .ob_release(ob_release[c]),
      .overrun(overrun[c]), .trig_overflow(trig_ovf[c])
    );
  end

  // ---------------------------------------------------------------- sequencer
  typedef enum logic [2:0] {Q_WAIT, Q_UHDR, Q_C0, Q_C1, Q_C2, Q_DATA} seq_e;
  seq_e        st;
  logic [3:0]  ch;
  logic [7:0]  evcnt;
  logic [8:0]  nwords;
  logic        wr, last, full, fifo_ovf;
  logic [15:0] wdata;
  frame_tag_t  tg;
  logic [9:0]  len;

  assign tg     = ob_tag[ch];
  assign len    = tg.missing ? 10'd0 : ob_len[ch];
  assign nwords = 9'((len + 10'd1) >> 1);
  assign wr     = (st != Q_WAIT) && !full;

  // expected pipeline addresses, one per trigger
  localparam int QW = $clog2(AQ_DEPTH);
  logic [7:0]  aq [AQ_DEPTH];
  logic [QW-1:0] aq_wp, aq_rp;
  logic [7:0]  exp_addr;
  logic        mism, ev_end;
  assign exp_addr = aq[aq_rp];
  assign mism     = !tg.missing && (tg.addr0 != exp_addr || tg.addr1 != exp_addr);
  assign ev_end   = wr && last;

  always_ff @(posedge clk) begin
    oos <= 1'b0;
    if (rst) begin
      aq_wp <= '0;
      aq_rp <= '0;
    end else begin
      if (l1a) begin
        aq[aq_wp] <= apve_addr;
        aq_wp     <= aq_wp + 1'b1;
      end
      if (ev_end) aq_rp <= aq_rp + 1'b1;
      if (wr && st == Q_C0 && mism) oos <= 1'b1;
    end
  end

  always_comb begin
    wdata = '0;
    last  = 1'b0;
    unique case (st)
      Q_UHDR: wdata = {4'hE, 4'(UNIT_ID), evcnt};
      Q_C0:   wdata = {ch, tg.missing, tg.err, mism, tg.addr0};
      Q_C1:   wdata = {8'h00, tg.addr1};
      Q_C2: begin
        wdata = {6'b0, len};
        last  = (ch == 4'(NCH - 1)) && (nwords == 0);
      end
      Q_DATA: begin
        wdata = ob_data[ch];
        last  = (ch == 4'(NCH - 1)) && (9'(ob_rd_addr) == nwords - 9'd1);
      end
      default: ;
    endcase
  end

  always_comb begin
    ob_release = '0;
    if (wr && ((st == Q_C2 && nwords == 0) || (st == Q_DATA && 9'(ob_rd_addr) == nwords - 9'd1)))
      ob_release[ch] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st         <= Q_WAIT;
      ch         <= '0;
      evcnt      <= '0;
      ob_rd_addr <= '0;
    end else begin
      unique case (st)
        Q_WAIT: if (&ob_ready) begin
          st <= Q_UHDR;
          ch <= '0;
        end
        Q_UHDR: if (wr) st <= Q_C0;
        Q_C0:   if (wr) st <= Q_C1;
        Q_C1:   if (wr) st <= Q_C2;
        Q_C2: if (wr) begin
          ob_rd_addr <= '0;
          if (nwords != 0) st <= Q_DATA;
          else if (ch == 4'(NCH - 1)) begin
            st    <= Q_WAIT;
            evcnt <= evcnt + 1'b1;
          end else begin
            st <= Q_C0;
            ch <= ch + 1'b1;
          end
        end
        Q_DATA: if (wr) begin
          ob_rd_addr <= ob_rd_addr + 1'b1;
          if (9'(ob_rd_addr) == nwords - 9'd1) begin
            if (ch == 4'(NCH - 1)) begin
              st    <= Q_WAIT;
              evcnt <= evcnt + 1'b1;
            end else begin
              st <= Q_C0;
              ch <= ch + 1'b1;
            end
          end
        end
        default: st <= Q_WAIT;
      endcase
    end
  end

  // 16 -> 64 bit packing
  logic [47:0] pk;
  logic [1:0]  npk;
  logic        fwr;
  logic [64:0] fdin, fifo_dout;
  logic        empty;

  assign fwr = wr && (npk == 2'd3 || last);
  always_comb begin
    unique case (npk)
      2'd0:    fdin = {last, wdata, 48'h0};
      2'd1:    fdin = {last, pk[15:0], wdata, 32'h0};
      2'd2:    fdin = {last, pk[31:0], wdata, 16'h0};
      default: fdin = {last, pk[47:0], wdata};
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pk  <= '0;
      npk <= '0;
    end else if (wr) begin
      pk  <= {pk[31:0], wdata};
      npk <= last ? 2'd0 : npk + 1'b1;
    end
  end

  fe_fifo #(.WIDTH(65), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr(fwr), .din(fdin), .rd(link_rd), .dout(fifo_dout),
    .empty, .full, .count(fifo_count), .overflow(fifo_ovf)
  );

  assign link_data  = fifo_dout[63:0];
  assign link_last  = fifo_dout[64];
  assign link_valid = !empty;

  always_ff @(posedge clk) begin
    if (rst) err_sticky <= 1'b0;
    else if (|overrun || |trig_ovf || fifo_ovf) err_sticky <= 1'b1;
  end

endmodule
