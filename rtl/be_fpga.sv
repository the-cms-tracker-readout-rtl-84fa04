// be_fpga: the Back-End FPGA of the FED.
//
// Collects the events of the eight Front-End FPGAs (be_event_builder), stores
// them in the QDR SRAM buffer (qdr_buffer_ctrl), sends them to the DAQ over
// S-LINK64 or leaves them for VME readout (slink_tx), and reports the buffer
// state to the Trigger Control System (tcs_status).
//
// Register bus (word addresses, 16-bit data):
//   0x00 W/R mode: bit 0 raw-data mode, bit 1 VME readout instead of S-LINK
//   0x01 W/R FED source id (12 bits)
//   0x02 W/R warning level, 0x03 busy level (buffer words / 8)
//   0x10 R   status {tcs[3:0], 8'b0, fe_error, trig_ovf, oos seen, buffer overflow}
//   0x11 R   events built (low 16 bits)
//   0x12..0x15 R  VME word, bits 63:48 .. 15:0; 0x17 R {vme_valid, ctrl}
//   0x16 W   pop the VME word
//   0x18/0x19 R   S-LINK words sent, low/high half; 0x1A R backpressure cycles
// All addresses, the reset values (warning at 75 %, busy at 94 % of the
// buffer) and bit positions are this implementation's choices.
module be_fpga #(
  parameter int N_UNITS = 8,
  parameter int ADDR_W  = 18,
  parameter int TQ_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 l1a,
  input  logic                 bc0,
  input  logic                 fe_oos,
  input  logic [63:0]          link_data  [N_UNITS],
  input  logic                 link_last  [N_UNITS],
  input  logic                 link_valid [N_UNITS],
  output logic                 link_rd    [N_UNITS],
  input  logic                 fe_error,
  output logic                 raw_mode,
  input  logic                 cfg_we,
  input  logic [7:0]           cfg_addr,
  input  logic [15:0]          cfg_wdata,
  output logic [15:0]          cfg_rdata,
  output logic                 qdr_w_n,
  output logic [ADDR_W-1:0]    qdr_wa,
  output logic [64:0]          qdr_d,
  output logic                 qdr_r_n,
  output logic [ADDR_W-1:0]    qdr_ra,
  input  logic [64:0]          qdr_q,
  output logic                 slink_wen,
  output logic [63:0]          slink_data,
  output logic                 slink_ctrl,
  input  logic                 slink_lff,
  output fed_pkg::tcs_e        tcs
);
  import fed_pkg::*;

  logic        vme_mode;
  logic [11:0] fed_id;
  logic [15:0] warn_reg, busy_reg;
  logic        vme_pop;

  always_ff @(posedge clk) begin
    if (rst) begin
      raw_mode <= 1'b0;
      vme_mode <= 1'b0;
      fed_id   <= 12'd0;
      warn_reg <= 16'(((1 << ADDR_W) / 8) * 3 / 4);
      busy_reg <= 16'(((1 << ADDR_W) / 8) * 15 / 16);
    end else if (cfg_we) begin
      case (cfg_addr)
        8'h00: {vme_mode, raw_mode} <= cfg_wdata[1:0];
        8'h01: fed_id   <= cfg_wdata[11:0];
        8'h02: warn_reg <= cfg_wdata;
        8'h03: busy_reg <= cfg_wdata;
        default: ;
      endcase
    end
  end
  assign vme_pop = cfg_we && cfg_addr == 8'h16;

  logic        eb_valid, eb_ready, trig_ovf, bo_valid, bo_ready;
  buf_word_t   eb_word, bo_word, vme_word;
  logic [$clog2(TQ_DEPTH):0] tq_count;
  logic [23:0] events_built;
  logic [ADDR_W:0] occupancy;
  logic        buf_ovf, vme_valid, oos_seen, tovf_seen;
  logic [31:0] words_sent, lff_cycles, busy_cycles, warn_cycles;

  be_event_builder #(.N_UNITS(N_UNITS), .TQ_DEPTH(TQ_DEPTH)) u_eb (
    .clk, .rst, .l1a, .bc0, .raw_mode, .fed_id,
    .link_data, .link_last, .link_valid, .link_rd,
    .out_valid(eb_valid), .out_word(eb_word), .out_ready(eb_ready),
    .trig_ovf, .tq_count, .events_built
  );

  qdr_buffer_ctrl #(.ADDR_W(ADDR_W)) u_buf (
    .clk, .rst, .in_valid(eb_valid), .in_word(eb_word), .in_ready(eb_ready),
    .out_valid(bo_valid), .out_word(bo_word), .out_ready(bo_ready),
    .occupancy, .overflow(buf_ovf),
    .qdr_w_n, .qdr_wa, .qdr_d, .qdr_r_n, .qdr_ra, .qdr_q
  );

  slink_tx u_slink (
    .clk, .rst, .vme_mode, .in_valid(bo_valid), .in_word(bo_word), .in_ready(bo_ready),
    .slink_wen, .slink_data, .slink_ctrl, .slink_lff,
    .vme_valid, .vme_word, .vme_pop, .words_sent, .lff_cycles
  );

  tcs_status #(.OCC_W(ADDR_W + 1)) u_tcs (
    .clk, .rst, .occupancy,
    .warn_level((ADDR_W+1)'({warn_reg, 3'b000})),
    .busy_level((ADDR_W+1)'({busy_reg, 3'b000})),
    .tq_near_full(tq_count >= ($clog2(TQ_DEPTH)+1)'(TQ_DEPTH - 4)),
    .tq_full(tq_count == ($clog2(TQ_DEPTH)+1)'(TQ_DEPTH)),
    .error_in(fe_error || trig_ovf), .oos_in(fe_oos),
    .tcs, .busy_cycles, .warn_cycles
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      oos_seen  <= 1'b0;
      tovf_seen <= 1'b0;
    end else begin
      if (fe_oos)    oos_seen  <= 1'b1;
      if (trig_ovf)  tovf_seen <= 1'b1;
    end
  end

  always_comb begin
    unique case (cfg_addr)
      8'h00: cfg_rdata = {14'b0, vme_mode, raw_mode};
      8'h01: cfg_rdata = {4'b0, fed_id};
      8'h02: cfg_rdata = warn_reg;
      8'h03: cfg_rdata = busy_reg;
      8'h10: cfg_rdata = {tcs, 8'b0, fe_error, tovf_seen, oos_seen, buf_ovf};
      8'h11: cfg_rdata = events_built[15:0];
      8'h12: cfg_rdata = vme_word.data[63:48];
      8'h13: cfg_rdata = vme_word.data[47:32];
      8'h14: cfg_rdata = vme_word.data[31:16];
      8'h15: cfg_rdata = vme_word.data[15:0];
      8'h17: cfg_rdata = {14'b0, vme_valid, vme_word.ctrl};
      8'h18: cfg_rdata = words_sent[15:0];
      8'h19: cfg_rdata = words_sent[31:16];
      8'h1A: cfg_rdata = lff_cycles[15:0];
      8'h1B: cfg_rdata = busy_cycles[15:0];
      8'h1C: cfg_rdata = warn_cycles[15:0];
      default: cfg_rdata = 16'h0000;
    endcase
  end

endmodule
