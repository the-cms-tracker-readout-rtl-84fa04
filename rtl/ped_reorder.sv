// ped_reorder: puts the data words of a fibre frame into strip order and
// subtracts a programmable pedestal per strip.
//
// Data word idx of the multiplexed frame belongs to strip apv_strip(idx)
// (chip = idx[0], channel order of the APV25 output multiplexer). The
// pedestal memory holds one 10-bit value per strip (256 per fibre), written
// over the register bus. In raw mode the pedestal is not subtracted and the
// raw sample is passed on unchanged. The reordering formula comes from the
// APV25 chip, not from the FED description; the signed 11-bit result width is
// this implementation's choice.
//
// Timing: one word per cycle, output registered one cycle after the input.
module ped_reorder (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         raw_mode,
  input  logic                         ped_we,
  input  logic [7:0]                   ped_addr,
  input  logic [fed_pkg::ADC_W-1:0]    ped_wdata,
  input  logic                         in_valid,
  input  logic [7:0]                   in_idx,
  input  logic [fed_pkg::ADC_W-1:0]    in_data,
  output logic                         out_valid,
  output logic [7:0]                   out_strip,
  output logic signed [fed_pkg::VAL_W-1:0] out_val
);
  import fed_pkg::*;

  logic [ADC_W-1:0] ped [256];
  logic [7:0]       strip;

  assign strip = apv_strip(in_idx);

  always_ff @(posedge clk) begin
    if (ped_we) ped[ped_addr] <= ped_wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_strip <= '0;
      out_val   <= '0;
    end else begin
      out_valid <= in_valid;
      out_strip <= strip;
      if (raw_mode) out_val <= signed'({1'b0, in_data});
      else          out_val <= signed'({1'b0, in_data}) - signed'({1'b0, ped[strip]});
    end
  end

endmodule
