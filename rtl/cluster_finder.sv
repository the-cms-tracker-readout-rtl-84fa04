// cluster_finder: common-mode subtraction, cluster search and 8-bit
// compression for one fibre (two APV25 chips, 256 strips).
//
// Works on a closed frame bank of cm_median, one strip per cycle (strip 0 to
// 255, read through rd_strip/rd_val). The signal of strip i is
// v = value - cm(chip of i). With a per-strip noise value n[i] (8 bits,
// written over the register bus) and two programmable thresholds in units of
// a quarter of the noise, strip i is
//   low  if v > 0 and 4*v > thr_lo * n[i]
//   high if v > 0 and 4*v > thr_hi * n[i].
// A cluster is a run of two or more neighbouring low strips, or a single
// strip that is high. Clusters do not cross the boundary between the chips.
//
// Output record of a cluster: first strip (1 byte), width (1 byte), then one
// byte per strip, the signal clipped to 0..255 (a minimum ionising particle
// gives about 80 counts, so 8 bits lose little). The values of a run are
// written as the run grows and its two header bytes when it ends; a rejected
// run is simply overwritten. In raw mode the 256 values are stored unchanged
// as 16-bit words, without common-mode subtraction.
//
// Thresholds, the noise memory, the byte layout and the quarter-noise unit are
// this implementation's choices; the two-threshold rule is the FED's.
//
// There are two output buffers, so that a frame can be searched while the
// previous record is still being read out. Timing: start when cm_valid and the
// buffer being filled is free; 256 cycles plus one to close the last run; then
// release_bank pulses and the buffer is handed to the read side. ob_ready,
// ob_len (bytes) and ob_tag describe the oldest full buffer, which is read as
// 16-bit words (byte 2k in bits 15:8) and freed by ob_release.
module cluster_finder #(
  parameter int TAG_W = $bits(fed_pkg::frame_tag_t)
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              raw_mode,
  input  logic [7:0]                        thr_lo,
  input  logic [7:0]                        thr_hi,
  input  logic                              noise_we,
  input  logic [7:0]                        noise_addr,
  input  logic [7:0]                        noise_wdata,
  input  logic                              cm_valid,
  input  logic signed [fed_pkg::VAL_W-1:0]  cm0,
  input  logic signed [fed_pkg::VAL_W-1:0]  cm1,
  input  logic [TAG_W-1:0]                  cm_tag,
  output logic [7:0]                        rd_strip,
  input  logic signed [fed_pkg::VAL_W-1:0]  rd_val,
  output logic                              release_bank,
  output logic                              ob_ready,
  output logic [9:0]                        ob_len,
  output logic [TAG_W-1:0]                  ob_tag,
  input  logic [7:0]                        ob_rd_addr,
  output logic [15:0]                       ob_rd_data,
  input  logic                              ob_release
);
  import fed_pkg::*;

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_FLUSH} state_e;
  state_e state;

  logic [7:0]  noise [256];
  logic [7:0]  ob    [2][512];
  logic [1:0]  ob_full;
  logic        wsel, rsel;
  logic [9:0]  len_q [2];
  logic [TAG_W-1:0] tag_q [2];
  logic [8:0]  i;
  logic [9:0]  pos;
  logic        in_run, run_hi, run_raw;
  logic [7:0]  run_start, run_len;

  logic signed [VAL_W:0] v;
  logic [7:0]  v8;
  logic        hit_lo, hit_hi, boundary, closing, keep;
  logic [9:0]  pos_after;
  logic [17:0] sig4, tlo, thi;

  assign rd_strip = i[7:0];
  always_comb begin
    v        = {rd_val[VAL_W-1], rd_val} - (i[7] ? {cm1[VAL_W-1], cm1} : {cm0[VAL_W-1], cm0});
    v8       = (v < 0) ? 8'd0 : (v > 255) ? 8'd255 : v[7:0];
    sig4     = (v > 0) ? {5'b0, v[VAL_W-1:0], 2'b00} : '0;
    tlo      = {2'b0, 16'(thr_lo) * 16'(noise[i[7:0]])};
    thi      = {2'b0, 16'(thr_hi) * 16'(noise[i[7:0]])};
    hit_lo   = (state == C_RUN) && (v > 0) && (sig4 > tlo);
    hit_hi   = (state == C_RUN) && (v > 0) && (sig4 > thi);
    boundary = (i == 9'(STRIPS_PER_APV));
    closing  = in_run && (state == C_FLUSH || !hit_lo || boundary);
    keep     = closing && (run_len >= 8'd2 || run_hi);
    pos_after = keep ? pos + 10'd2 + 10'(run_len) : pos;
  end

  always_ff @(posedge clk) begin
    if (noise_we) noise[noise_addr] <= noise_wdata;
  end

  always_ff @(posedge clk) begin
    release_bank <= 1'b0;
    if (rst) begin
      state     <= C_IDLE;
      i         <= '0;
      pos       <= '0;
      in_run    <= 1'b0;
      run_hi    <= 1'b0;
      run_raw   <= 1'b0;
      run_start <= '0;
      run_len   <= '0;
      ob_full   <= '0;
      wsel      <= 1'b0;
      rsel      <= 1'b0;
    end else begin
      unique case (state)
        C_IDLE: if (cm_valid && !release_bank && !ob_full[wsel]) begin
          state   <= C_RUN;
          i       <= '0;
          pos     <= '0;
          in_run  <= 1'b0;
          run_raw <= raw_mode;
        end
        C_RUN: begin
          if (run_raw) begin
            ob[wsel][{i[7:0], 1'b0}] <= 8'(rd_val[VAL_W-1:8]);
            ob[wsel][{i[7:0], 1'b1}] <= rd_val[7:0];
            pos <= pos + 10'd2;
          end else begin
            if (keep) begin
              ob[wsel][pos[8:0]]        <= run_start;
              ob[wsel][9'(pos + 10'd1)] <= run_len;
            end
            if (hit_lo && (!in_run || closing)) begin
              ob[wsel][9'(pos_after + 10'd2)] <= v8;
              in_run    <= 1'b1;
              run_start <= i[7:0];
              run_len   <= 8'd1;
              run_hi    <= hit_hi;
            end else if (hit_lo) begin
              ob[wsel][9'(pos + 10'd2 + 10'(run_len))] <= v8;
              run_len <= run_len + 1'b1;
              run_hi  <= run_hi | hit_hi;
            end else begin
              in_run <= 1'b0;
            end
            pos <= pos_after;
          end
          if (i == 9'd255) state <= C_FLUSH;
          i <= i + 1'b1;
        end
        C_FLUSH: begin
          if (keep) begin
            ob[wsel][pos[8:0]]        <= run_start;
            ob[wsel][9'(pos + 10'd1)] <= run_len;
          end
          pos          <= pos_after;
          len_q[wsel]  <= pos_after;
          tag_q[wsel]  <= cm_tag;
          ob_full[wsel] <= 1'b1;
          wsel         <= ~wsel;
          in_run       <= 1'b0;
          release_bank <= 1'b1;
          state        <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
      if (ob_release && ob_full[rsel]) begin
        ob_full[rsel] <= 1'b0;
        rsel          <= ~rsel;
      end
    end
  end

  assign ob_ready   = ob_full[rsel];
  assign ob_len     = len_q[rsel];
  assign ob_tag     = tag_q[rsel];
  assign ob_rd_data = {ob[rsel][{ob_rd_addr, 1'b0}], ob[rsel][{ob_rd_addr, 1'b1}]};

endmodule
