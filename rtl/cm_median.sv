// cm_median: two-bank frame store of one fibre and the common-mode finder.
//
// Pedestal-subtracted strip values are written into the current write bank
// (wr_valid/wr_strip/wr_val). frame_end closes the bank together with its
// frame tag; the next frame goes to the other bank. wr_free says whether a
// bank is free for the next frame (the caller drops a frame otherwise).
//
// For a closed bank the common-mode offset of each APV25 is the median of its
// 128 strips, here the 64th smallest value (lower median). It is found by a
// bit-serial search from the MSB: for each of the 11 bits, all 128 values of a
// chip are compared at once with a candidate and counted, so both medians are
// ready 12 cycles after the bank is closed (one to start, 11 bit steps). The parallel compare-and-count is
// this implementation's choice; the FED description gives only "median".
//
// The cluster finder then reads the bank through a combinational read
// port (rd_a) and pulses release when done; the bank becomes free.
module cm_median #(
  parameter int TAG_W = $bits(fed_pkg::frame_tag_t)
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic                               wr_valid,
  input  logic [7:0]                         wr_strip,
  input  logic signed [fed_pkg::VAL_W-1:0]   wr_val,
  input  logic                               frame_end,
  input  logic [TAG_W-1:0]                   frame_tag,
  output logic                               wr_free,
  output logic                               cm_valid,
  output logic signed [fed_pkg::VAL_W-1:0]   cm0,
  output logic signed [fed_pkg::VAL_W-1:0]   cm1,
  output logic [TAG_W-1:0]                   cm_tag,
  input  logic [7:0]                         rd_a,
  output logic signed [fed_pkg::VAL_W-1:0]   rd_a_val,
  input  logic                               release_bank
);
  import fed_pkg::*;

  localparam int K = STRIPS_PER_APV / 2;  // rank of the lower median

  logic signed [VAL_W-1:0] mem [2][256];
  logic [TAG_W-1:0]        tag [2];
  logic [1:0]              full;
  logic                    wbank, pbank;
  logic [VAL_W-1:0]        res0, res1;     // offset-binary results
  logic [$clog2(VAL_W):0]  bitn;
  logic                    busy;
  logic [VAL_W-1:0]        cand0, cand1;
  logic [7:0]              cnt0, cnt1;

  assign wr_free = !full[wbank];

  // candidate: result so far, current bit 0, lower bits 1
  always_comb begin
    cand0 = res0 | VAL_W'((1 << bitn) - 1);
    cand1 = res1 | VAL_W'((1 << bitn) - 1);
    cnt0 = '0;
    cnt1 = '0;
    for (int s = 0; s < STRIPS_PER_APV; s++) begin
      cnt0 += 8'(({~mem[pbank][s][VAL_W-1], mem[pbank][s][VAL_W-2:0]} <= cand0));
      cnt1 += 8'(({~mem[pbank][s+STRIPS_PER_APV][VAL_W-1],
                   mem[pbank][s+STRIPS_PER_APV][VAL_W-2:0]} <= cand1));
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wbank][wr_strip] <= wr_val;
    if (frame_end) tag[wbank] <= frame_tag;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      full     <= '0;
      wbank    <= 1'b0;
      pbank    <= 1'b0;
      busy     <= 1'b0;
      cm_valid <= 1'b0;
      bitn     <= '0;
      res0     <= '0;
      res1     <= '0;
    end else begin
      if (frame_end) begin
        full[wbank] <= 1'b1;
        wbank       <= ~wbank;
      end
      if (!busy && !cm_valid && full[pbank]) begin
        busy <= 1'b1;
        bitn <= ($clog2(VAL_W)+1)'(VAL_W - 1);
        res0 <= '0;
        res1 <= '0;
      end else if (busy) begin
        if (cnt0 < 8'(K)) res0[bitn[$clog2(VAL_W)-1:0]] <= 1'b1;
        if (cnt1 < 8'(K)) res1[bitn[$clog2(VAL_W)-1:0]] <= 1'b1;
        if (bitn == 0) begin
          busy     <= 1'b0;
          cm_valid <= 1'b1;
        end else begin
          bitn <= bitn - 1'b1;
        end
      end
      if (release_bank && cm_valid) begin
        cm_valid    <= 1'b0;
        full[pbank] <= 1'b0;
        pbank       <= ~pbank;
      end
    end
  end

  assign cm0      = signed'({~res0[VAL_W-1], res0[VAL_W-2:0]});
  assign cm1      = signed'({~res1[VAL_W-1], res1[VAL_W-2:0]});
  assign cm_tag   = tag[pbank];
  assign rd_a_val = mem[pbank][rd_a];

endmodule
