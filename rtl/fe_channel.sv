// fe_channel: processing chain of one fibre inside a Front-End FPGA.
//
// apv_frame_sync -> ped_reorder -> cm_median (two frame banks, median) ->
// cluster_finder (output buffer). A frame whose header arrives while both
// banks are still in use is dropped and reported by `overrun`. A trigger
// that got no frame inside the time window still produces an (empty) record
// marked `missing`, so that every channel gives one record per trigger and the
// events of all channels stay aligned.
//
// The output buffer interface (ob_*) is the cluster_finder's. Timing: a
// record is ready about 256 + 13 cycles after the last data word of its
// frame, if the output buffer was free.
module fe_channel (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [fed_pkg::ADC_W-1:0]    sample,
  input  logic                         l1a,
  input  logic                         raw_mode,
  input  logic [15:0]                  win_start,
  input  logic [15:0]                  win_end,
  input  logic [15:0]                  min_period,
  input  logic [fed_pkg::ADC_W-1:0]    tick_level,
  input  logic [7:0]                   thr_lo,
  input  logic [7:0]                   thr_hi,
  input  logic                         ped_we,
  input  logic                         noise_we,
  input  logic [7:0]                   cfg_addr,
  input  logic [fed_pkg::ADC_W-1:0]    cfg_wdata,
  output logic                         ob_ready,
  output logic [9:0]                   ob_len,
  output fed_pkg::frame_tag_t          ob_tag,
  input  logic [7:0]                   ob_rd_addr,
  output logic [15:0]                  ob_rd_data,
  input  logic                         ob_release,
  output logic                         overrun,
  output logic                         trig_overflow
);
  import fed_pkg::*;

  logic              hdr_valid, data_valid, frame_done, missed;
  frame_tag_t        hdr_tag, cap_tag, end_tag, cm_tag;
  logic [7:0]        data_idx;
  logic [ADC_W-1:0]  data;
  logic              pr_valid;
  logic [7:0]        pr_strip;
  logic signed [VAL_W-1:0] pr_val, cm0, cm1, rd_val;
  logic              capturing, done_d, wr_free, frame_end, miss_pend, miss_end;
  logic              cm_valid, release_bank;
  logic [7:0]        rd_strip;

  apv_frame_sync u_sync (
    .clk, .rst, .sample, .l1a, .win_start, .win_end, .min_period, .tick_level,
    .hdr_valid, .hdr_tag, .data_valid, .data_idx, .data, .frame_done, .missed,
    .trig_overflow
  );

  ped_reorder u_ped (
    .clk, .rst, .raw_mode, .ped_we, .ped_addr(cfg_addr), .ped_wdata(cfg_wdata),
    .in_valid(data_valid), .in_idx(data_idx), .in_data(data),
    .out_valid(pr_valid), .out_strip(pr_strip), .out_val(pr_val)
  );

  assign miss_end  = miss_pend && !(done_d && capturing) && wr_free && !hdr_valid;
  assign frame_end = (done_d && capturing) || miss_end;
  always_comb begin
    end_tag = cap_tag;
    if (!(done_d && capturing)) begin
      end_tag = '0;
      end_tag.missing = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    overrun <= 1'b0;
    if (rst) begin
      capturing <= 1'b0;
      done_d    <= 1'b0;
      miss_pend <= 1'b0;
      cap_tag   <= '0;
    end else begin
      done_d <= frame_done;
      if (hdr_valid) begin
        if (wr_free && !miss_pend) begin
          capturing <= 1'b1;
          cap_tag   <= hdr_tag;
        end else begin
          overrun <= 1'b1;
        end
      end
      if (done_d) capturing <= 1'b0;
      if (missed) miss_pend <= 1'b1;
      else if (miss_end) miss_pend <= 1'b0;
    end
  end

  cm_median u_cm (
    .clk, .rst, .wr_valid(pr_valid && capturing), .wr_strip(pr_strip), .wr_val(pr_val),
    .frame_end, .frame_tag(end_tag), .wr_free, .cm_valid, .cm0, .cm1, .cm_tag,
    .rd_a(rd_strip), .rd_a_val(rd_val), .release_bank
  );

  cluster_finder u_cf (
    .clk, .rst, .raw_mode, .thr_lo, .thr_hi,
    .noise_we, .noise_addr(cfg_addr), .noise_wdata(cfg_wdata[7:0]),
    .cm_valid, .cm0, .cm1, .cm_tag, .rd_strip, .rd_val, .release_bank,
    .ob_ready, .ob_len, .ob_tag, .ob_rd_addr, .ob_rd_data, .ob_release
  );

endmodule
