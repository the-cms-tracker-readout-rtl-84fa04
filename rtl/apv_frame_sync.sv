// apv_frame_sync: finds the APV25 data frame of one fibre and accepts it only
// inside a programmable time window after the trigger.
//
// A fibre carries the output of two multiplexed APV25 chips at 40 MHz. A frame
// is a 24-word header followed by 256 data words. The header is taken here as
// 6 words of start bits (3 per chip), 16 pipeline-address bits (8 per chip,
// MSB first, chip 0 on even words) and 2 error bits (one per chip, high =
// no error, as on the APV25). A header word is a logical 1 when the sample is
// at or above tick_level. A frame starts where 6 consecutive samples are 1.
//
// Every l1a pushes its arrival time T into a queue of pending triggers. The
// frame of the oldest pending trigger is expected from
//   E = max(T + win_start, previous frame start + min_period)
// (an APV25 that still holds earlier events sends its frames back to back, so
// a frame cannot come sooner than min_period after the one before). A frame
// start is accepted only in the window E .. E + (win_end - win_start);
// acceptance pops the trigger. If the window closes without a frame, the
// trigger is popped with a `missed` pulse and its slot counts as used, so that
// every trigger yields exactly one frame or one miss. The time of a frame is
// the cycle its 6th start word arrives. The expected-time rule for queued
// frames is this implementation's reading of the FED's "predefined time
// window".
//
// Outputs: hdr_valid pulses with the decoded tag on the last header word;
// then data_valid/data_idx/data follow for 256 cycles; frame_done pulses with
// the last data word. Latency: data leave one cycle after they arrive.
module apv_frame_sync #(
  parameter int QDEPTH = 16
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic [fed_pkg::ADC_W-1:0]      sample,
  input  logic                           l1a,
  input  logic [15:0]                    win_start,
  input  logic [15:0]                    win_end,
  input  logic [15:0]                    min_period,
  input  logic [fed_pkg::ADC_W-1:0]      tick_level,
  output logic                           hdr_valid,
  output fed_pkg::frame_tag_t            hdr_tag,
  output logic                           data_valid,
  output logic [7:0]                     data_idx,
  output logic [fed_pkg::ADC_W-1:0]      data,
  output logic                           frame_done,
  output logic                           missed,
  output logic                           trig_overflow
);
  import fed_pkg::*;

  typedef enum logic [1:0] {S_HUNT, S_HDR, S_DATA} state_e;
  state_e state;

  logic [15:0] now;
  logic [15:0] tq [QDEPTH];
  logic [$clog2(QDEPTH):0] tq_cnt;
  logic [$clog2(QDEPTH)-1:0] tq_rd, tq_wr;
  logic [2:0]  ones;          // consecutive 1 samples, saturating at 6
  logic [4:0]  hcnt;          // header word index
  logic [7:0]  dcnt;
  logic [ADDR_BITS-1:0] a0, a1;
  logic        eb;
  logic        bit_now;
  logic [15:0] e1, exp_t, since, win_len, next_min;
  logic        have_prev;
  logic        in_window, expired, accept, pop;

  assign bit_now   = (sample >= tick_level);
  assign e1        = tq[tq_rd] + win_start;
  assign exp_t     = (have_prev && $signed(next_min - e1) > 0) ? next_min : e1;
  assign since     = now - exp_t;
  assign win_len   = win_end - win_start;
  assign in_window = (tq_cnt != 0) && !since[15] && (since <= win_len);
  assign expired   = (tq_cnt != 0) && !since[15] && (since > win_len);
  assign accept    = (state == S_HUNT) && bit_now && (ones == 3'd5) && in_window;
  assign pop       = accept || (expired && state == S_HUNT);

  always_ff @(posedge clk) begin
    hdr_valid  <= 1'b0;
    data_valid <= 1'b0;
    frame_done <= 1'b0;
    missed     <= 1'b0;
    trig_overflow <= 1'b0;
    if (rst) begin
      state  <= S_HUNT;
      now    <= '0;
      tq_cnt <= '0;
      tq_rd  <= '0;
      tq_wr  <= '0;
      ones   <= '0;
      hcnt   <= '0;
      dcnt   <= '0;
      a0     <= '0;
      a1     <= '0;
      eb     <= '0;
      hdr_tag <= '0;
      data_idx <= '0;
      data   <= '0;
      next_min  <= '0;
      have_prev <= 1'b0;
    end else begin
      now <= now + 1'b1;
      if (accept) begin
        next_min  <= now + min_period;
        have_prev <= 1'b1;
      end else if (expired && state == S_HUNT) begin
        next_min  <= exp_t + min_period;
        have_prev <= 1'b1;
      end else if (have_prev && tq_cnt == 0 && $signed(now - next_min) > 0) begin
        have_prev <= 1'b0;
      end
      // trigger queue
      if (l1a) begin
        if (tq_cnt == ($clog2(QDEPTH)+1)'(QDEPTH) && !pop) trig_overflow <= 1'b1;
        else begin
          tq[tq_wr] <= now;
          tq_wr     <= tq_wr + 1'b1;
        end
      end
      if (pop) tq_rd <= tq_rd + 1'b1;
      tq_cnt <= tq_cnt + ($clog2(QDEPTH)+1)'(l1a && !(tq_cnt == ($clog2(QDEPTH)+1)'(QDEPTH) && !pop))
                       - ($clog2(QDEPTH)+1)'(pop);
      if (expired && state == S_HUNT && !accept) missed <= 1'b1;

      ones <= bit_now ? ((ones == 3'd6) ? ones : ones + 1'b1) : 3'd0;

      unique case (state)
        S_HUNT: if (accept) begin
          state <= S_HDR;
          hcnt  <= 5'(START_WORDS);
        end
        S_HDR: begin
          if (hcnt < 5'(START_WORDS + 2*ADDR_BITS)) begin
            if (!hcnt[0]) a0 <= {a0[ADDR_BITS-2:0], bit_now};
            else          a1 <= {a1[ADDR_BITS-2:0], bit_now};
          end else begin
            eb <= bit_now;
          end
          hcnt <= hcnt + 1'b1;
          if (hcnt == 5'(HDR_WORDS - 1)) begin
            state     <= S_DATA;
            dcnt      <= '0;
            hdr_valid <= 1'b1;
            hdr_tag.missing <= 1'b0;
            hdr_tag.addr0   <= a0;
            hdr_tag.addr1   <= a1;
            hdr_tag.err     <= ~{eb, bit_now};
          end
        end
        S_DATA: begin
          data_valid <= 1'b1;
          data_idx   <= dcnt;
          data       <= sample;
          dcnt       <= dcnt + 1'b1;
          if (dcnt == 8'(DATA_WORDS - 1)) begin
            frame_done <= 1'b1;
            state      <= S_HUNT;
          end
        end
        default: state <= S_HUNT;
      endcase
    end
  end

endmodule
