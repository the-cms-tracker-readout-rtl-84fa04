// qdr_sram_model: behavioural model of the FED's QDR SRAM pair as one memory
// of 2^ADDR_W 65-bit words with separate read and write ports. A write is
// taken when w_n is low; a read issued with r_n low returns its word on q
// RD_LAT cycles later. Used only by the testbenches.
module qdr_sram_model #(
  parameter int ADDR_W = 18,
  parameter int RD_LAT = 2
) (
  input  logic              clk,
  input  logic              w_n,
  input  logic [ADDR_W-1:0] wa,
  input  logic [64:0]       d,
  input  logic              r_n,
  input  logic [ADDR_W-1:0] ra,
  output logic [64:0]       q
);
  logic [64:0] mem [2**ADDR_W];
  logic [64:0] pipe [RD_LAT];

  always @(posedge clk) begin
    if (!w_n) mem[wa] <= d;
    pipe[0] <= r_n ? 65'h0 : mem[ra];
    for (int i = 1; i < RD_LAT; i++) pipe[i] <= pipe[i-1];
  end
  assign q = pipe[RD_LAT-1];
endmodule
