// capture_ctrl: trigger and capture controller.
//
// Runs the two history buffers as circular buffers and decides when to stop
// them. In ACQUIRE both buffers take one word per clock. The sampler is armed
// once the buffers hold enough fresh history for a full window (len - post
// words written since re-arming); an armed detector hit from either
// polarisation is a trigger. The controller then records `post` more words,
// freezes both buffers and asks the readout streamer to return the `len`
// words that end with the last post-trigger word (READOUT). When the
// streamer reports that the frame is out it re-arms. Triggers during the
// post-trigger and readout phases are ignored: this is the dead time in
// which the sampler is "writing data from a previous trigger".
//
// The published design states the trigger rule (either polarisation over
// threshold), that both buffers are returned with a sample-accurate
// time-stamp, and that the returned length is adjustable up to the full
// buffer (16,320 samples; 256 samples in normal observing). The pre/post
// trigger split, the arming hold-off and the rule that the configuration is
// taken when the sampler re-arms are this design's own choices.
//
// Configuration (cfg_len_words, cfg_post_words) is sampled at reset release
// and at every re-arm, and clamped to 1 <= len <= DEPTH and post <= len-1.
//
// Timing: the detector result for the word written in clock t arrives in
// clock t+1 together with the word's address (kept here as wptr_d) and its
// time-stamp (ts_d). With post = 0 the trigger word is the last one written.
// rd_start is a one-clock pulse in the first READOUT clock.
module capture_ctrl #(
  parameter int unsigned DEPTH  = lunaska_pkg::BUF_SAMPLES_DEF / lunaska_pkg::LANES_DEF,
  parameter int unsigned TS_W   = lunaska_pkg::TS_W_DEF,
  parameter int unsigned LANE_W = 3,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW    = $clog2(DEPTH + 1)   // width of a length in words
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [LW-1:0]     cfg_len_words,
  input  logic [LW-1:0]     cfg_post_words,
  // detector (one clock after the samples)
  input  logic              det_hit_a,
  input  logic              det_hit_b,
  input  logic [LANE_W-1:0] det_lane,
  // time of lane 0 of the word written this clock
  input  logic [TS_W-1:0]   ts_now,
  // buffer write port (shared by A and B)
  output logic              buf_we,
  output logic [AW-1:0]     buf_waddr,
  // readout request
  output logic              rd_start,
  output logic [AW-1:0]     rd_base,     // address of the oldest returned word
  output logic [LW-1:0]     rd_len,      // words per polarisation
  output logic [TS_W-1:0]   trig_ts,     // sample number of the first sample over threshold
  output logic              trig_hit_a,
  output logic              trig_hit_b,
  output logic [LANE_W-1:0] trig_lane,
  input  logic              rd_done,     // frame fully sent
  // status
  output logic              armed,       // ready to trigger
  output lunaska_pkg::cap_state_t state
);
  import lunaska_pkg::*;

  logic [AW-1:0] wptr, wptr_d;
  logic [TS_W-1:0] ts_d;
  logic [LW-1:0] fill, len_q, post_q, post_left;
  logic [LW-1:0] len_c, post_c;
  logic trig_now;
  logic [AW+1:0] base_sum;
  logic [AW-1:0] base_c;

  // Clamp the requested window to what the buffer can hold.
  always_comb begin
    if (cfg_len_words == '0)                  len_c = LW'(1);
    else if (cfg_len_words > LW'(DEPTH))      len_c = LW'(DEPTH);
    else                                      len_c = cfg_len_words;
    post_c = (cfg_post_words >= len_c) ? len_c - LW'(1) : cfg_post_words;
  end

  assign armed    = (state == CAP_ACQUIRE) && (len_q != '0) && (fill >= len_q - post_q);
  assign trig_now = armed && (det_hit_a || det_hit_b);

  // Oldest word of the window: trigger word + post + 1 - len, modulo DEPTH.
  always_comb begin
    base_sum = (AW+2)'(wptr_d) + (AW+2)'(post_q) + (AW+2)'(1) + (AW+2)'(DEPTH) - (AW+2)'(len_q);
    if (base_sum >= (AW+2)'(DEPTH)) base_sum = base_sum - (AW+2)'(DEPTH);
    if (base_sum >= (AW+2)'(DEPTH)) base_sum = base_sum - (AW+2)'(DEPTH);
    base_c = AW'(base_sum);
  end

  assign buf_we    = ((state == CAP_ACQUIRE) && !(trig_now && post_q == '0)) || (state == CAP_POST);
  assign buf_waddr = wptr;
  assign rd_len    = len_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= CAP_ACQUIRE;
      wptr       <= '0;
      wptr_d     <= '0;
      ts_d       <= '0;
      fill       <= '0;
      len_q      <= '0;
      post_q     <= '0;
      post_left  <= '0;
      rd_start   <= 1'b0;
      rd_base    <= '0;
      trig_ts    <= '0;
      trig_hit_a <= 1'b0;
      trig_hit_b <= 1'b0;
      trig_lane  <= '0;
    end else begin
      rd_start <= 1'b0;
      ts_d     <= ts_now;
      if (buf_we) begin
        wptr_d <= wptr;
        wptr   <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + AW'(1);
      end
      if (len_q == '0) begin
        // First clock after reset: take the configuration.
        len_q  <= len_c;
        post_q <= post_c;
      end
      unique case (state)
        CAP_ACQUIRE: begin
          if (buf_we && fill < LW'(DEPTH)) fill <= fill + LW'(1);
          if (trig_now) begin
            rd_base    <= base_c;
            trig_ts    <= ts_d + TS_W'(det_lane);
            trig_hit_a <= det_hit_a;
            trig_hit_b <= det_hit_b;
            trig_lane  <= det_lane;
            if (post_q <= LW'(1)) begin
              state    <= CAP_READOUT;
              rd_start <= 1'b1;
            end else begin
              state     <= CAP_POST;
              post_left <= post_q - LW'(1);
            end
          end
        end
        CAP_POST: begin
          post_left <= post_left - LW'(1);
          if (post_left == LW'(1)) begin
            state    <= CAP_READOUT;
            rd_start <= 1'b1;
          end
        end
        CAP_READOUT: begin
          if (rd_done) begin
            state  <= CAP_ACQUIRE;
            fill   <= '0;
            len_q  <= len_c;
            post_q <= post_c;
          end
        end
        default: state <= CAP_ACQUIRE;
      endcase
    end
  end

  // The window never reaches past what was written since re-arming.
  always_ff @(posedge clk) begin
    if (state == CAP_ACQUIRE && len_q != '0)
      assert (post_q < len_q) else $error("capture_ctrl: post-trigger length not below window length");
  end

endmodule
