// lunaska_sampler_top: pulse-trigger sampler of one antenna.
//
// The digital part of the lunar Cherenkov pulse search at one antenna. Two
// ADCs deliver the A and B linear polarisations, already dedispersed by
// analogue filters, at 2.048 GS/s and 8 bits. Here they arrive as LANES
// samples per clock and polarisation (adc_a, adc_b; lane 0 the earliest).
// Every word goes both into the polarisation's history buffer and into the
// threshold detector. When the magnitude of any sample of either polarisation
// exceeds that polarisation's threshold, the capture controller records the
// post-trigger words, freezes both buffers and the readout streamer sends
// them, behind a header carrying the sample-accurate trigger time-stamp, on
// the frame stream (out_*). While a capture is being returned the sampler is
// dead; it re-arms when the frame has gone and the buffers again hold a full
// window of fresh history.
//
//   adc_a ──┬──────────────► sample_buffer A ──┐
//           │                                  ├─► readout_streamer ─► out_*
//   adc_b ──┼──┬───────────► sample_buffer B ──┘          ▲
//           ▼  ▼                  ▲ write                  │ start/done
//        threshold_detect ──► capture_ctrl ◄── timestamp_counter
//
// Published: two polarisations, 8-bit samples, either-polarisation magnitude
// trigger with an adjustable threshold, buffers of up to 16,320 samples,
// return of both buffers with a sample-accurate time-stamp. This design's
// own: 8 samples per clock, one threshold per polarisation, the window
// configuration in words with a post-trigger part, the time-stamp load, and
// the frame format (see readout_streamer).
//
// Configuration ports are meant to be static; the window (cfg_len_words,
// cfg_post_words) is taken at reset release and at each re-arm, thresholds
// act at once. Latency from a sample to the trigger decision: 1 clock.
module lunaska_sampler_top #(
  parameter int unsigned SAMPLE_W    = lunaska_pkg::SAMPLE_W_DEF,
  parameter int unsigned LANES       = lunaska_pkg::LANES_DEF,
  parameter int unsigned BUF_SAMPLES = lunaska_pkg::BUF_SAMPLES_DEF,
  parameter int unsigned TS_W        = lunaska_pkg::TS_W_DEF,
  localparam int unsigned DEPTH      = BUF_SAMPLES / LANES,
  localparam int unsigned W          = SAMPLE_W * LANES,
  localparam int unsigned LANE_W     = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned LW         = $clog2(DEPTH + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ADC samples, one word per clock per polarisation
  input  logic signed [SAMPLE_W-1:0] adc_a [LANES],
  input  logic signed [SAMPLE_W-1:0] adc_b [LANES],
  // configuration (from the control link)
  input  logic        [SAMPLE_W-1:0] thr_a,
  input  logic        [SAMPLE_W-1:0] thr_b,
  input  logic        [LW-1:0]       cfg_len_words,
  input  logic        [LW-1:0]       cfg_post_words,
  input  logic                       ts_load,
  input  logic        [TS_W-1:0]     ts_load_value,
  // frame stream towards the control-room link
  output logic        [W-1:0]        out_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_last,
  // status
  output logic                       armed,
  output logic                       dead,     // not ready to trigger
  output logic                       reading,  // a frame is being sent
  output lunaska_pkg::cap_state_t    cap_state,
  output logic        [TS_W-1:0]     ts_now
);
  import lunaska_pkg::*;

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic              det_hit_a, det_hit_b;
  logic [LANE_W-1:0] det_lane;
  logic              buf_we;
  logic [AW-1:0]     buf_waddr;
  logic [W-1:0]      wdata_a, wdata_b;
  logic              rd_start, rd_done, rd_en;
  logic [AW-1:0]     rd_base, rd_addr;
  logic [LW-1:0]     rd_len;
  logic [TS_W-1:0]   trig_ts;
  logic              trig_hit_a, trig_hit_b;
  logic [LANE_W-1:0] trig_lane;
  logic [W-1:0]      rd_data_a, rd_data_b;

  // Lane i occupies bits [i*SAMPLE_W +: SAMPLE_W] of a buffer word.
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      wdata_a[i*SAMPLE_W +: SAMPLE_W] = adc_a[i];
      wdata_b[i*SAMPLE_W +: SAMPLE_W] = adc_b[i];
    end
  end

  timestamp_counter #(.TS_W(TS_W), .STEP(LANES)) u_ts (
    .clk, .rst_n, .load(ts_load), .load_value(ts_load_value), .ts(ts_now)
  );

  threshold_detect #(.SAMPLE_W(SAMPLE_W), .LANES(LANES)) u_det (
    .clk, .rst_n, .samp_a(adc_a), .samp_b(adc_b), .thr_a, .thr_b,
    .hit_a(det_hit_a), .hit_b(det_hit_b), .first_lane(det_lane)
  );

  capture_ctrl #(.DEPTH(DEPTH), .TS_W(TS_W), .LANE_W(LANE_W)) u_ctrl (
    .clk, .rst_n, .cfg_len_words, .cfg_post_words,
    .det_hit_a, .det_hit_b, .det_lane, .ts_now,
    .buf_we, .buf_waddr,
    .rd_start, .rd_base, .rd_len, .trig_ts, .trig_hit_a, .trig_hit_b, .trig_lane,
    .rd_done, .armed, .state(cap_state)
  );

  sample_buffer #(.DATA_W(W), .DEPTH(DEPTH)) u_buf_a (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(wdata_a),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data_a)
  );

  sample_buffer #(.DATA_W(W), .DEPTH(DEPTH)) u_buf_b (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(wdata_b),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data_b)
  );

  readout_streamer #(.W(W), .DEPTH(DEPTH), .TS_W(TS_W), .LANE_W(LANE_W)) u_rd (
    .clk, .rst_n, .start(rd_start), .base(rd_base), .len(rd_len), .ts(trig_ts),
    .hit_a(trig_hit_a), .hit_b(trig_hit_b), .lane(trig_lane),
    .done(rd_done), .busy(reading),
    .rd_en, .rd_addr, .rd_data_a, .rd_data_b,
    .m_data(out_data), .m_valid(out_valid), .m_ready(out_ready), .m_last(out_last)
  );

  // Dead: not sampling-and-ready, i.e. capturing post-trigger data or
  // returning a capture (hold-off after re-arm counts too).
  assign dead = !armed;

  if (BUF_SAMPLES % LANES != 0) begin : g_bad_buf
    $error("lunaska_sampler_top: BUF_SAMPLES must be a multiple of LANES");
  end

endmodule
