// tcs_status: the FED's 4-bit handshake word to the Trigger Control System.
//
// From the buffer state it reports, in falling priority,
//   ERROR          a sticky error (lost frame, FIFO or trigger-queue overflow)
//   OUT-OF-SYNCH   a sticky pipeline-address mismatch
//   BUSY           buffer occupancy >= busy_level or trigger queue full
//   WARNING-OVERFLOW occupancy >= warn_level or trigger queue near full
//   READY          otherwise
// The error and out-of-sync conditions stay until rst (the TCS answers them
// with a reset). The output is registered. The 4-bit codes follow the CMS
// fast-status convention (READY 1000, BUSY 0100, OUT-OF-SYNCH 0010,
// WARNING 0001, ERROR 1100); the levels and the priority order are this
// implementation's choices. Counters of the cycles spent in each state
// support the dead-time studies.
module tcs_status #(
  parameter int OCC_W = 19
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [OCC_W-1:0] occupancy,
  input  logic [OCC_W-1:0] warn_level,
  input  logic [OCC_W-1:0] busy_level,
  input  logic             tq_near_full,
  input  logic             tq_full,
  input  logic             error_in,
  input  logic             oos_in,
  output fed_pkg::tcs_e    tcs,
  output logic [31:0]      busy_cycles,
  output logic [31:0]      warn_cycles
);
  import fed_pkg::*;

  logic err_s, oos_s;

  always_ff @(posedge clk) begin
    if (rst) begin
      err_s <= 1'b0;
      oos_s <= 1'b0;
      tcs   <= TCS_READY;
      busy_cycles <= '0;
      warn_cycles <= '0;
    end else begin
      if (error_in) err_s <= 1'b1;
      if (oos_in)   oos_s <= 1'b1;
      if (err_s || error_in)                              tcs <= TCS_ERROR;
      else if (oos_s || oos_in)                           tcs <= TCS_OOS;
      else if (occupancy >= busy_level || tq_full)        tcs <= TCS_BUSY;
      else if (occupancy >= warn_level || tq_near_full)   tcs <= TCS_WARN;
      else                                                tcs <= TCS_READY;
      if (tcs == TCS_BUSY) busy_cycles <= busy_cycles + 1'b1;
      if (tcs == TCS_WARN) warn_cycles <= warn_cycles + 1'b1;
    end
  end

endmodule
