// apve: APV Emulator logic, the tracker's fast feedback to the trigger.
//
// The occupancy of an APV25 buffer depends only on the trigger sequence, so
// it can be followed near the trigger system instead of on the detector.
// Every l1a adds one event; an emulated readout removes one event every
// FRAME_CYCLES cycles (the length of an APV25 output frame) while the buffer
// is not empty. In deconvolution mode a trigger uses 3 of the chip's 31 FIFO
// cells, so DEPTH_DECON = 10 events fit; in peak mode DEPTH_PEAK = 31.
//   WARNING-OVERFLOW  occupancy >= warn_level (programmable)
//   BUSY              occupancy == depth (buffer full)
//   ERROR             a trigger arrived with the buffer full (sticky)
// apv_tcs is this emulated status. tcs_out is the global summary: the worse
// (by severity) of apv_tcs and the merged status of the FEDs (fmm_in).
//
// It also emulates the 192-cell pipeline write pointer; pipe_addr is the
// pipeline address the APV25 will report for a trigger in the current cycle
// (write pointer minus the programmable latency), which the FEDs compare with
// the address in the frame headers.
//
// The readout timing model (one frame per FRAME_CYCLES, starting at once),
// the warning rule on occupancy and the severity merge are this
// implementation's choices. Outputs are registered except pipe_addr.
module apve #(
  parameter int DEPTH_DECON  = 10,
  parameter int DEPTH_PEAK   = 31,
  parameter int FRAME_CYCLES = 280
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          l1a,
  input  logic          peak_mode,
  input  logic [4:0]    warn_level,
  input  logic [7:0]    latency,
  input  logic [3:0]    fmm_in,
  output fed_pkg::tcs_e apv_tcs,
  output fed_pkg::tcs_e tcs_out,
  output logic [7:0]    pipe_addr,
  output logic [4:0]    occupancy
);
  import fed_pkg::*;

  logic [7:0]  wptr;
  logic [4:0]  depth;
  logic [$clog2(FRAME_CYCLES)-1:0] rtimer;
  logic        reading, done, ovf, push;
  logic [8:0]  diff;

  assign depth = peak_mode ? 5'(DEPTH_PEAK) : 5'(DEPTH_DECON);
  assign diff  = {1'b0, wptr} + 9'(PIPE_CELLS) - {1'b0, latency};
  assign pipe_addr = (diff >= 9'(PIPE_CELLS)) ? 8'(diff - 9'(PIPE_CELLS)) : diff[7:0];
  assign done  = reading && rtimer == ($clog2(FRAME_CYCLES))'(FRAME_CYCLES - 1);
  assign push  = l1a && (occupancy != depth || done);

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr      <= '0;
      occupancy <= '0;
      rtimer    <= '0;
      reading   <= 1'b0;
      ovf       <= 1'b0;
      apv_tcs   <= TCS_READY;
      tcs_out   <= TCS_READY;
    end else begin
      wptr <= (wptr == 8'(PIPE_CELLS - 1)) ? 8'd0 : wptr + 1'b1;
      if (l1a && !push) ovf <= 1'b1;
      occupancy <= occupancy + 5'(push) - 5'(done);
      if (done) begin
        rtimer  <= '0;
        reading <= (occupancy + 5'(push) - 5'd1) != 0;
      end else if (reading) begin
        rtimer <= rtimer + 1'b1;
      end else if (occupancy != 0 || push) begin
        reading <= 1'b1;
        rtimer  <= '0;
      end
      if (ovf)                          apv_tcs <= TCS_ERROR;
      else if (occupancy >= depth)      apv_tcs <= TCS_BUSY;
      else if (occupancy >= warn_level) apv_tcs <= TCS_WARN;
      else                              apv_tcs <= TCS_READY;
      tcs_out <= (tcs_severity(fmm_in) > tcs_severity(apv_tcs)) ? tcs_e'(fmm_in) : apv_tcs;
    end
  end

endmodule
