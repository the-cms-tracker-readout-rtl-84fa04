// delay_fpga: one Delay FPGA, serving NCH fibre channels between the ADCs and
// the Front-End FPGA.
//
// Each channel's 10-bit sample stream is passed on after a programmable delay
// of 1 + delay[ch] clock cycles (a register pipeline of MAX_DELAY stages), so
// that channels whose fibres differ in length can be brought into step. The
// FED adjusts the ADC clock phase with a sub-cycle programmable delay; that
// analogue timing cannot be expressed in synchronous RTL, so this block only
// provides the whole-cycle part of the alignment (an implementation choice).
//
// Data spy: after spy_arm, the next l1a starts a capture of SPY_DEPTH raw
// samples of every channel into a spy memory, so that unprocessed tracker
// data can be read back over the register bus (spy_rd_ch/spy_rd_addr,
// combinational read). spy_done stays high until the next arm.
//
// Interface: delays are written with dly_we/dly_ch/dly_val. Timing: samples
// leave delay+1 cycles after they enter; the spy sample at address k is the
// delayed output k+1 cycles after the l1a.
module delay_fpga #(
  parameter int NCH       = 4,
  parameter int MAX_DELAY = 16,
  parameter int SPY_DEPTH = 512
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [fed_pkg::ADC_W-1:0]     adc_in  [NCH],
  output logic [fed_pkg::ADC_W-1:0]     adc_out [NCH],
  input  logic                          dly_we,
  input  logic [$clog2(NCH)-1:0]        dly_ch,
  input  logic [$clog2(MAX_DELAY)-1:0]  dly_val,
  input  logic                          l1a,
  input  logic                          spy_arm,
  output logic                          spy_done,
  input  logic [$clog2(NCH)-1:0]        spy_rd_ch,
  input  logic [$clog2(SPY_DEPTH)-1:0]  spy_rd_addr,
  output logic [fed_pkg::ADC_W-1:0]     spy_rd_data
);
  import fed_pkg::*;

  logic [ADC_W-1:0]             sr    [NCH][MAX_DELAY];
  logic [$clog2(MAX_DELAY)-1:0] delay [NCH];
  logic [ADC_W-1:0]             spy_mem [NCH][SPY_DEPTH];

  typedef enum logic [1:0] {SPY_IDLE, SPY_ARMED, SPY_RUN, SPY_DONE} spy_state_e;
  spy_state_e                   spy_state;
  logic [$clog2(SPY_DEPTH)-1:0] spy_wa;

  always_ff @(posedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      sr[c][0] <= adc_in[c];
      for (int s = 1; s < MAX_DELAY; s++) sr[c][s] <= sr[c][s-1];
    end
    if (rst) begin
      for (int c = 0; c < NCH; c++) delay[c] <= '0;
    end else if (dly_we) begin
      delay[dly_ch] <= dly_val;
    end
  end

  always_comb
    for (int c = 0; c < NCH; c++) adc_out[c] = sr[c][delay[c]];

  always_ff @(posedge clk) begin
    if (rst) begin
      spy_state <= SPY_IDLE;
      spy_wa    <= '0;
    end else begin
      unique case (spy_state)
        SPY_IDLE, SPY_DONE: if (spy_arm) spy_state <= SPY_ARMED;
        SPY_ARMED: if (l1a) begin
          spy_state <= SPY_RUN;
          spy_wa    <= '0;
        end
        SPY_RUN: begin
          for (int c = 0; c < NCH; c++) spy_mem[c][spy_wa] <= adc_out[c];
          spy_wa <= spy_wa + 1'b1;
          if (spy_wa == $clog2(SPY_DEPTH)'(SPY_DEPTH - 1)) spy_state <= SPY_DONE;
        end
        default: spy_state <= SPY_IDLE;
      endcase
    end
  end

  assign spy_done    = (spy_state == SPY_DONE);
  assign spy_rd_data = spy_mem[spy_rd_ch][spy_rd_addr];

endmodule
