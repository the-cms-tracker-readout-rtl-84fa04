// tracker_readout: one FED together with the APV Emulator (APVE).
//
// The APVE follows the APV25 buffer occupancy for the trigger and supplies,
// with every trigger, the pipeline address that the FED compares with the
// addresses in the frame headers (in the experiment this address travels
// over the TTC system; here it is wired directly). The FED's 4-bit TCS
// status leaves on fed_tcs; the merged status of all FEDs (from the FMM
// cards, outside this design) returns on fmm_in and is combined by the APVE
// into the global status tracker_tcs sent to the trigger.
//
// Everything runs on the 40 MHz LHC clock. The register bus stands in for the
// VME64x interface of the FED; the APVE's settings are plain inputs.
module tracker_readout #(
  parameter int ADDR_W = 18
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [fed_pkg::ADC_W-1:0] adc [fed_pkg::N_FIBRES],
  input  logic                      l1a,
  input  logic                      bc0,
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
  output logic [3:0]                fed_tcs,
  input  logic                      apve_peak_mode,
  input  logic [4:0]                apve_warn_level,
  input  logic [7:0]                apve_latency,
  input  logic [3:0]                fmm_in,
  output logic [3:0]                apve_tcs,
  output logic [3:0]                tracker_tcs,
  output logic [4:0]                apve_occupancy
);
  import fed_pkg::*;

  logic [7:0] pipe_addr;
  tcs_e       a_tcs, t_tcs;

  apve u_apve (
    .clk, .rst, .l1a, .peak_mode(apve_peak_mode), .warn_level(apve_warn_level),
    .latency(apve_latency), .fmm_in, .apv_tcs(a_tcs), .tcs_out(t_tcs),
    .pipe_addr, .occupancy(apve_occupancy)
  );
  assign apve_tcs    = a_tcs;
  assign tracker_tcs = t_tcs;

  fed #(.ADDR_W(ADDR_W)) u_fed (
    .clk, .rst, .adc, .l1a, .bc0, .apve_addr(pipe_addr),
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .qdr_w_n, .qdr_wa, .qdr_d, .qdr_r_n, .qdr_ra, .qdr_q,
    .slink_wen, .slink_data, .slink_ctrl, .slink_lff, .tcs(fed_tcs)
  );

endmodule
