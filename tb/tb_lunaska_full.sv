// tb_lunaska_full: the sampler at its full default size.
//
// The design as published: 8-bit samples, 8 samples per clock and a
// 16,320-sample (2,040-word) buffer per polarisation. Three captures are
// taken and checked word by word against the input history:
//   1. normal observing: a 256-sample window (32 words, 16 of them after
//      the trigger), threshold 55 counts (about 5.5 sigma of the noise), a
//      single pulse on polarisation B;
//   2. timing calibration: the full 16,320-sample window, trigger in the
//      middle, pulse on A;
//   3. sensitivity calibration: threshold zero, 256-sample window, which
//      triggers on the first non-zero sample after arming.
// The frame layout is described in readout_streamer.
module tb_lunaska_full;
  import lunaska_pkg::*;
  localparam int SW = 8;
  localparam int L  = 8;
  localparam int D  = 16320 / 8;
  localparam int W  = SW * L;
  localparam int LW = $clog2(D + 1);
  localparam int NCYC = 40000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [SW-1:0] adc_a [L], adc_b [L];
  logic [SW-1:0] thr_a, thr_b;
  logic [LW-1:0] cfg_len, cfg_post;
  logic ts_load = 1'b0;
  logic [63:0] ts_load_value = '0, ts_now;
  logic [W-1:0] out_data;
  logic out_valid, out_ready = 1'b1, out_last, armed, dead, reading;
  cap_state_t cap_state;

  lunaska_sampler_top dut (
    .clk, .rst_n, .adc_a, .adc_b, .thr_a, .thr_b,
    .cfg_len_words(cfg_len), .cfg_post_words(cfg_post), .ts_load, .ts_load_value,
    .out_data, .out_valid, .out_ready, .out_last, .armed, .dead, .reading, .cap_state, .ts_now
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d t=%0t", what, got, exp, $time);
    end
  endtask

  logic [W-1:0]  hist_a [NCYC], hist_b [NCYC];
  logic [63:0]   word_ts [NCYC];

  function automatic int noise();
    int s = 0;
    for (int k = 0; k < 4; k++) s += $urandom_range(0, 16) - 8;
    return s;
  endfunction

  int n = 0;
  logic [W-1:0] frame [$];

  // One clock of stimulus; pol 0 = A, 1 = B, -1 = no pulse.
  task automatic step(int pulse_pol, int lane, int amp);
    for (int i = 0; i < L; i++) begin
      adc_a[i] = SW'(noise());
      adc_b[i] = SW'(noise());
    end
    if (pulse_pol == 0) adc_a[lane] = SW'(amp);
    if (pulse_pol == 1) adc_b[lane] = SW'(amp);
    #1;
    for (int i = 0; i < L; i++) begin
      hist_a[n][i*SW +: SW] = adc_a[i];
      hist_b[n][i*SW +: SW] = adc_b[i];
    end
    word_ts[n] = ts_now;
    if (out_valid && out_ready) frame.push_back(out_data);
    @(negedge clk);
    n++;
  endtask

  // Run one capture: wait until armed, put a pulse in, collect the frame.
  task automatic capture(string name, int len, int post, int pol, int lane, int amp, bit zero_thr);
    int tn, first, c0, exp_lane;
    logic [W-1:0] h1;
    bit pulse_sent = 0;
    cfg_len = LW'(len); cfg_post = LW'(post);
    // The new window is taken at the next re-arm; wait for it.
    while (!armed) step(-1, 0, 0);
    if (int'(dut.u_ctrl.len_q) != len) begin
      // Armed with the old window (first capture after reset): no change.
      check({name, ": window taken"}, dut.u_ctrl.len_q, len);
    end
    thr_a = zero_thr ? 8'd0 : 8'd55;
    thr_b = zero_thr ? 8'd0 : 8'd55;
    frame.delete();
    tn = -1;
    c0 = n;
    while (n - c0 < NCYC / 2) begin
      if (!zero_thr && !pulse_sent) begin
        tn = n; pulse_sent = 1;
        step(pol, lane, amp);
      end else begin
        step(-1, 0, 0);
      end
      if (frame.size() == 2 + 2 * len) break;
    end
    check({name, ": frame length"}, frame.size(), 2 + 2 * len);
    if (frame.size() != 2 + 2 * len) return;
    // In zero-threshold mode the sampler is already armed when the threshold
    // drops, so the first word compared with zero triggers; find its first
    // non-zero sample.
    if (zero_thr) tn = c0;
    exp_lane = lane;
    if (zero_thr) begin
      exp_lane = -1;
      for (int i = L - 1; i >= 0; i--)
        if (hist_a[tn][i*SW +: SW] != 0 || hist_b[tn][i*SW +: SW] != 0) exp_lane = i;
    end
    check({name, ": time-stamp"}, frame[0], word_ts[tn] + 64'(exp_lane));
    h1 = '0;
    h1[HDR_LEN_LSB +: HDR_LEN_W]   = HDR_LEN_W'(len);
    h1[HDR_LANE_LSB +: HDR_LANE_W] = HDR_LANE_W'(exp_lane);
    h1[HDR_HITA_BIT] = zero_thr ? (hist_a[tn] != '0) : (pol == 0);
    h1[HDR_HITB_BIT] = zero_thr ? (hist_b[tn] != '0) : (pol == 1);
    check({name, ": header"}, frame[1], h1);
    first = tn + post - len + 1;
    for (int k = 0; k < len; k++) begin
      check({name, ": A data"}, frame[2 + k], hist_a[first + k]);
      check({name, ": B data"}, frame[2 + len + k], hist_b[first + k]);
    end
    $display("%s: %0d-sample window, trigger at sample %0d, %0d clocks", name, len * L, frame[0], n - c0);
  endtask

  initial begin
    thr_a = 8'd55; thr_b = 8'd55;
    cfg_len = LW'(32); cfg_post = LW'(16);
    for (int i = 0; i < L; i++) begin adc_a[i] = '0; adc_b[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    capture("observing", 32, 16, 1, 5, -90, 0);
    capture("timing calibration", D, D / 2, 0, 2, 127, 0);
    capture("sensitivity calibration", 32, 16, -1, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
