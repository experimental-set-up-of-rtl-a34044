// tb_lunaska_sampler_top: end-to-end test of the pulse-trigger sampler.
//
// Feeds both polarisations with Gaussian-like receiver noise (sigma about 10
// counts) plus occasional narrow pulses of either sign up to full scale, and
// receives the frame stream through a randomly stalling sink. The testbench
// keeps the whole input history and its own detector: whenever the sampler
// reports itself armed in the clock after a word that holds a sample above
// threshold, that word must be the trigger of the next frame. Each frame is
// then checked completely against the history: time-stamp of the first
// sample over threshold, header fields, and the len words of A and of B that
// end `post` words after the trigger word. It also checks the hold-off: the
// sampler must arm exactly len - post + 2 clocks after the last word of the
// previous frame is accepted.
//
// The run goes through phases: pulses on A only, on B only, on both, the
// zero-threshold (unbiased calibration) mode, and full-buffer windows, with a
// time-stamp reload and window changes between captures. Each mechanism is
// counted and a mechanism that never occurred counts as a failure. The buffer
// is reduced to 320 samples (40 words) to keep the run short.
module tb_lunaska_sampler_top;
  import lunaska_pkg::*;
  localparam int SW  = 8;
  localparam int L   = 8;
  localparam int BUF = 320;
  localparam int TW  = 64;
  localparam int D   = BUF / L;
  localparam int W   = SW * L;
  localparam int LW  = $clog2(D + 1);
  localparam int NCYC = 200000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [SW-1:0] adc_a [L], adc_b [L];
  logic [SW-1:0] thr_a, thr_b;
  logic [LW-1:0] cfg_len, cfg_post;
  logic ts_load = 1'b0;
  logic [TW-1:0] ts_load_value = '0, ts_now;
  logic [W-1:0] out_data;
  logic out_valid, out_ready = 1'b0, out_last, armed, dead, reading;
  cap_state_t cap_state;

  lunaska_sampler_top #(.SAMPLE_W(SW), .LANES(L), .BUF_SAMPLES(BUF), .TS_W(TW)) dut (
    .clk, .rst_n, .adc_a, .adc_b, .thr_a, .thr_b,
    .cfg_len_words(cfg_len), .cfg_post_words(cfg_post), .ts_load, .ts_load_value,
    .out_data, .out_valid, .out_ready, .out_last, .armed, .dead, .reading, .cap_state, .ts_now
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d (%h) expected %0d (%h) t=%0t", what, got, got, exp, exp, $time);
    end
  endtask

  // Input history, one entry per clock.
  logic [W-1:0]  hist_a [NCYC], hist_b [NCYC];
  logic [TW-1:0] word_ts [NCYC];
  bit            hit_a_h [NCYC], hit_b_h [NCYC];
  int            lane_h [NCYC];

  // Expected triggers.
  typedef struct { int n; int len; int post; } trig_t;
  trig_t exp_q [$];
  logic [W-1:0] frame [$];

  // Mechanism counters.
  int n_a_only = 0, n_b_only = 0, n_both = 0, n_ign_dead = 0, n_ign_holdoff = 0;
  int n_stall = 0, n_wrap = 0, n_zero = 0, n_load = 0, n_reconf = 0, n_fullbuf = 0;
  int n_fullscale = 0, n_frames = 0, n_holdoff_checked = 0;

  function automatic int noise();
    int s = 0;
    for (int k = 0; k < 4; k++) s += $urandom_range(0, 16) - 8;
    return s;
  endfunction

  function automatic int absv(int v);
    return v < 0 ? -v : v;
  endfunction

  task automatic check_frame(int fr_phase);
    trig_t t;
    int first;
    logic [W-1:0] h1;
    if (exp_q.size() == 0) begin
      check("frame without expected trigger", 1, 0);
      return;
    end
    t = exp_q.pop_front();
    check("frame length", frame.size(), 2 + 2 * t.len);
    if (frame.size() != 2 + 2 * t.len) return;
    check("header time-stamp", frame[0], word_ts[t.n] + TW'(lane_h[t.n]));
    h1 = '0;
    h1[HDR_LEN_LSB +: HDR_LEN_W]   = HDR_LEN_W'(t.len);
    h1[HDR_LANE_LSB +: HDR_LANE_W] = HDR_LANE_W'(lane_h[t.n]);
    h1[HDR_HITA_BIT] = hit_a_h[t.n];
    h1[HDR_HITB_BIT] = hit_b_h[t.n];
    check("header word 1", frame[1], h1);
    first = t.n + t.post - t.len + 1;
    for (int k = 0; k < t.len; k++) begin
      check("A data", frame[2 + k], hist_a[first + k]);
      check("B data", frame[2 + t.len + k], hist_b[first + k]);
    end
    if (hit_a_h[t.n] && !hit_b_h[t.n]) n_a_only++;
    if (!hit_a_h[t.n] && hit_b_h[t.n]) n_b_only++;
    if (hit_a_h[t.n] && hit_b_h[t.n]) n_both++;
    if (t.len == D) n_fullbuf++;
    n_frames++;
  endtask

  initial begin
    int n = 0, phase = 0, last_hs = -1, cur_len, cur_post, pulse_pol;
    bit armed_prev = 0, reading_prev = 0;
    thr_a = 8'd55; thr_b = 8'd55;        // about 5.5 sigma
    cfg_len = LW'(8); cfg_post = LW'(4);
    cur_len = 8; cur_post = 4;
    for (int i = 0; i < L; i++) begin adc_a[i] = '0; adc_b[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (n < NCYC - 1 && phase < 6) begin
      // Phase from the number of frames received.
      phase = n_frames / 12;
      // Stimulus for clock n.
      for (int i = 0; i < L; i++) begin
        adc_a[i] = SW'(noise());
        adc_b[i] = SW'(noise());
      end
      if ($urandom_range(0, 39) == 0) begin
        int amp, ln;
        ln  = $urandom_range(0, L - 1);
        amp = $urandom_range(60, 128);
        pulse_pol = (phase == 0) ? 0 : (phase == 1) ? 1 : $urandom_range(0, 2);
        if (amp == 128) n_fullscale++;
        if (pulse_pol != 1) adc_a[ln] = ($urandom_range(0, 1) == 1 || amp == 128) ? SW'(-amp) : SW'(amp);
        if (pulse_pol != 0) adc_b[ln] = ($urandom_range(0, 1) == 1 || amp == 128) ? SW'(-amp) : SW'(amp);
      end
      thr_a = (phase == 3) ? 8'd0 : 8'd55;
      thr_b = (phase == 3) ? 8'd0 : 8'd55;
      out_ready = (phase == 4) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      ts_load = 1'b0;
      if (n == 3000) begin
        ts_load = 1'b1; ts_load_value = 64'h0000_1234_5678_9AB3; n_load++;
      end
      #1;
      // Record the word and this model's detector result.
      for (int i = 0; i < L; i++) begin
        hist_a[n][i*SW +: SW] = adc_a[i];
        hist_b[n][i*SW +: SW] = adc_b[i];
      end
      word_ts[n] = ts_now;
      hit_a_h[n] = 0; hit_b_h[n] = 0; lane_h[n] = -1;
      for (int i = L - 1; i >= 0; i--) begin
        bit oa, ob;
        oa = absv(int'(adc_a[i])) > int'(thr_a);
        ob = absv(int'(adc_b[i])) > int'(thr_b);
        if (oa) hit_a_h[n] = 1;
        if (ob) hit_b_h[n] = 1;
        if (oa || ob) lane_h[n] = i;
      end
      // Trigger model: armed now and the previous word had a hit.
      if (n > 0 && (hit_a_h[n-1] || hit_b_h[n-1])) begin
        if (armed) begin
          trig_t t;
          t.n = n - 1; t.len = cur_len; t.post = cur_post;
          exp_q.push_back(t);
          if (thr_a == 0) n_zero++;
        end else if (reading) n_ign_dead++;
        else if (cap_state == CAP_ACQUIRE) n_ign_holdoff++;
      end
      check("dead is not armed", dead, !armed);
      // Hold-off: arming follows the previous frame by len - post + 2 clocks.
      if (armed && !armed_prev && last_hs >= 0) begin
        check("hold-off length", n - last_hs, cur_len - cur_post + 2);
        n_holdoff_checked++;
      end
      if (dut.u_ctrl.rd_start && int'(dut.u_ctrl.rd_base) + int'(dut.u_ctrl.rd_len) > D) n_wrap++;
      // New window while a frame is out; it applies from the re-arm.
      if (reading && !reading_prev) begin
        if (phase == 4) begin
          cfg_len = LW'(D); cfg_post = LW'($urandom_range(0, D - 1));
        end else begin
          cfg_len = LW'($urandom_range(2, 12)); cfg_post = LW'($urandom_range(0, int'(cfg_len) - 1));
        end
        n_reconf++;
      end
      if (reading_prev && !reading) begin
        cur_len = int'(cfg_len); cur_post = int'(cfg_post);
      end
      // Frame sink.
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        frame.push_back(out_data);
        if (out_last) begin
          check_frame(phase);
          frame.delete();
          last_hs = n;
        end
      end
      armed_prev = armed;
      reading_prev = reading;
      @(negedge clk);
      n++;
    end
    check("ran all phases", phase >= 6, 1);
    $display("frames=%0d A-only=%0d B-only=%0d both=%0d zero-threshold=%0d full-buffer=%0d",
             n_frames, n_a_only, n_b_only, n_both, n_zero, n_fullbuf);
    $display("ignored: dead=%0d hold-off=%0d; stalls=%0d wraps=%0d ts-loads=%0d reconfigs=%0d full-scale=%0d hold-off checks=%0d",
             n_ign_dead, n_ign_holdoff, n_stall, n_wrap, n_load, n_reconf, n_fullscale, n_holdoff_checked);
    check("mechanism: trigger on A only", n_a_only > 0, 1);
    check("mechanism: trigger on B only", n_b_only > 0, 1);
    check("mechanism: trigger on both", n_both > 0, 1);
    check("mechanism: hit ignored in dead time", n_ign_dead > 0, 1);
    check("mechanism: hit ignored in hold-off", n_ign_holdoff > 0, 1);
    check("mechanism: output stall", n_stall > 0, 1);
    check("mechanism: window wraps the buffer", n_wrap > 0, 1);
    check("mechanism: zero-threshold capture", n_zero > 0, 1);
    check("mechanism: full-buffer window", n_fullbuf > 0, 1);
    check("mechanism: time-stamp load", n_load > 0, 1);
    check("mechanism: window change", n_reconf > 0, 1);
    check("mechanism: full-scale pulse", n_fullscale > 0, 1);
    check("mechanism: hold-off timing", n_holdoff_checked > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
