// fed: the Front End Driver card, the digital logic of its FPGAs.
//
// 96 fibres arrive as 10-bit ADC samples at 40 MHz (the optical receivers and
// ADCs are outside the logic). Each of the 8 front-end units has 3 Delay
// FPGAs (4 fibres each) feeding one Front-End FPGA (fe_unit) that turns the
// 12 fibres' frames into cluster records in its 2 kB FIFO. The Back-End FPGA
// (be_fpga) reads the 8 FIFOs, builds the event records, buffers them in the
// QDR SRAM and sends them over S-LINK64, and drives the 4-bit TCS status.
//
// Register bus (replacing the VME64x interface; 20-bit word address):
//   addr[19:16] = 0..7  front-end unit u; inside it addr[15:0] as in fe_unit,
//                      plus 0xC2xx W channel delay (cycles), 0xC8xx..0xC9xx R
//                      spy memory of channel C (512 samples)
//   addr[19:16] = 8     Back-End registers (be_fpga), plus 0x04 W arm the spy
// cfg_rdata is combinational in cfg_addr.
//
// All FPGAs run here on one 40 MHz clock, and the 4-bit 160 MHz Front-End to
// Back-End links are modelled as a 64-bit FIFO read port per unit, read by
// the Back-End one unit at a time. Both are simplifications of this
// implementation. The APVE pipeline address of each trigger (apve_addr) is
// taken by all Front-End FPGAs for the synchronisation check.
module fed #(
  parameter int ADDR_W     = 18,
  parameter int FIFO_DEPTH = 256,
  parameter int SPY_DEPTH  = 512
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [fed_pkg::ADC_W-1:0] adc [fed_pkg::N_FIBRES],
  input  logic                      l1a,
  input  logic                      bc0,
  input  logic [7:0]                apve_addr,
  input  logic                      cfg_we,
  input  logic [19:0]               cfg_addr,
  input  logic [15:0]               cfg_wdata,
  output logic [15:0]               cfg_rdata,
  output logic                      qdr_w_n,
  output logic [ADDR_W-1:0]         qdr_wa,
  output logic [64:0]               qdr_d,
  output logic                      qdr_r_n,
  output logic [ADDR_W-1:0]         qdr_ra,
  input  logic [64:0]               qdr_q,
  output logic                      slink_wen,
  output logic [63:0]               slink_data,
  output logic                      slink_ctrl,
  input  logic                      slink_lff,
  output logic [3:0]                tcs
);
  import fed_pkg::*;
  localparam int NU  = N_UNITS;
  localparam int NDF = NU * 3;     // Delay FPGAs

  logic [ADC_W-1:0] dly_out [N_FIBRES];
  logic [ADC_W-1:0] spy_data [NDF];
  logic [NDF-1:0]   spy_done;
  logic             spy_arm, raw_mode;
  logic [3:0]       cch;
  logic [4:0]       cdf;

  assign spy_arm = cfg_we && cfg_addr[19:16] == 4'h8 && cfg_addr[7:0] == 8'h04;
  assign cch     = cfg_addr[15:12];
  assign cdf     = 5'(cfg_addr[18:16] * 3 + 3'(cch >> 2));

  for (genvar d = 0; d < NDF; d++) begin : g_dly
    logic [ADC_W-1:0] din [4];
    logic [ADC_W-1:0] dout [4];
    for (genvar k = 0; k < 4; k++) begin : g_k
      assign din[k] = adc[d*4 + k];
      assign dly_out[d*4 + k] = dout[k];
    end
    delay_fpga #(.NCH(4), .SPY_DEPTH(SPY_DEPTH)) u_dly (
      .clk, .rst, .adc_in(din), .adc_out(dout),
      .dly_we(cfg_we && !cfg_addr[19] && cch < 4'd12 && cfg_addr[11:8] == 4'h2 && cdf == 5'(d)),
      .dly_ch(cch[1:0]), .dly_val(cfg_wdata[3:0]),
      .l1a, .spy_arm, .spy_done(spy_done[d]),
      .spy_rd_ch(cch[1:0]), .spy_rd_addr(cfg_addr[$clog2(SPY_DEPTH)-1:0]),
      .spy_rd_data(spy_data[d])
    );
  end

  logic [63:0] link_data  [NU];
  logic        link_last  [NU];
  logic        link_valid [NU];
  logic        link_rd    [NU];
  logic [NU-1:0] fe_err, fe_oos;

  for (genvar u = 0; u < NU; u++) begin : g_fe
    logic [ADC_W-1:0] a [CH_PER_UNIT];
    for (genvar c = 0; c < CH_PER_UNIT; c++) begin : g_c
      assign a[c] = dly_out[u*CH_PER_UNIT + c];
    end
    fe_unit #(.UNIT_ID(u), .FIFO_DEPTH(FIFO_DEPTH)) u_fe (
      .clk, .rst, .adc(a), .l1a, .raw_mode, .apve_addr,
      .cfg_we(cfg_we && cfg_addr[19:16] == 4'(u)), .cfg_addr(cfg_addr[15:0]), .cfg_wdata,
      .link_data(link_data[u]), .link_last(link_last[u]), .link_valid(link_valid[u]),
      .link_rd(link_rd[u]), .err_sticky(fe_err[u]), .oos(fe_oos[u]),
      .fifo_count()
    );
  end

  logic [15:0] be_rdata;
  tcs_e        be_tcs;

  be_fpga #(.N_UNITS(NU), .ADDR_W(ADDR_W)) u_be (
    .clk, .rst, .l1a, .bc0, .fe_oos(|fe_oos),
    .link_data, .link_last, .link_valid, .link_rd, .fe_error(|fe_err), .raw_mode,
    .cfg_we(cfg_we && cfg_addr[19:16] == 4'h8), .cfg_addr(cfg_addr[7:0]), .cfg_wdata,
    .cfg_rdata(be_rdata),
    .qdr_w_n, .qdr_wa, .qdr_d, .qdr_r_n, .qdr_ra, .qdr_q,
    .slink_wen, .slink_data, .slink_ctrl, .slink_lff, .tcs(be_tcs)
  );
  assign tcs = be_tcs;

  always_comb begin
    if (cfg_addr[19:16] == 4'h8)
      cfg_rdata = (cfg_addr[7:0] == 8'h05) ? 16'(&spy_done) : be_rdata;
    else if (!cfg_addr[19] && cch < 4'd12 && cfg_addr[11:9] == 3'b100)
      cfg_rdata = 16'(spy_data[cdf]);
    else
      cfg_rdata = 16'h0000;
  end

endmodule
