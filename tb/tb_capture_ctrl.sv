// tb_capture_ctrl: self-checking test of the trigger and capture controller.
//
// The testbench plays the detector, the time base and the readout streamer.
// Each clock it may report a hit for the word written in the previous clock.
// An independent model decides which hit must trigger: the first one seen
// while acquiring once at least len - post words have been written since the
// last re-arm. It then checks that exactly `post` more words are written,
// that rd_start follows, that nothing is written while the capture is being
// returned, that the reported window (rd_base, rd_len) covers len
// consecutive words ending with the last post-trigger word (via a shadow copy
// of what was written where), and the trigger time-stamp and flags. The
// window configuration, including out-of-range values that must be clamped,
// changes from capture to capture. The buffer is 20 words, so windows wrap.
module tb_capture_ctrl;
  import lunaska_pkg::*;
  localparam int D  = 20;
  localparam int TW = 32;
  localparam int LN = 3;
  localparam int ST = 8;                // samples per word
  localparam int AW = $clog2(D);
  localparam int LW = $clog2(D + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [LW-1:0] cfg_len = '0, cfg_post = '0;
  logic det_hit_a = 1'b0, det_hit_b = 1'b0;
  logic [LN-1:0] det_lane = '0;
  logic [TW-1:0] ts_now = '0;
  logic buf_we, rd_start, trig_hit_a, trig_hit_b, rd_done = 1'b0, armed;
  logic [AW-1:0] buf_waddr, rd_base;
  logic [LW-1:0] rd_len;
  logic [TW-1:0] trig_ts;
  logic [LN-1:0] trig_lane;
  cap_state_t state;

  capture_ctrl #(.DEPTH(D), .TS_W(TW), .LANE_W(LN)) dut (
    .clk, .rst_n, .cfg_len_words(cfg_len), .cfg_post_words(cfg_post),
    .det_hit_a, .det_hit_b, .det_lane, .ts_now,
    .buf_we, .buf_waddr, .rd_start, .rd_base, .rd_len, .trig_ts,
    .trig_hit_a, .trig_hit_b, .trig_lane, .rd_done, .armed, .state
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Model state.
  typedef enum {M_ACQ, M_POST, M_READ} mstate_t;
  mstate_t m = M_ACQ;
  int  exp_len, exp_post, arm_writes = 0, post_writes = 0;
  logic [TW-1:0] shadow [D];
  logic [TW-1:0] last_ts, exp_trig_ts, trig_word_ts;
  bit  wrote_last = 0, exp_ha, exp_hb;
  int  exp_lane, captures = 0, wraps = 0, ignored_hits = 0, read_wait = 0;

  function automatic void clamp(input int l, input int p, output int lo, output int po);
    lo = (l == 0) ? 1 : (l > D ? D : l);
    po = (p >= lo) ? lo - 1 : p;
  endfunction

  task automatic new_config();
    case ($urandom_range(0, 5))
      0: begin cfg_len = '0; cfg_post = LW'($urandom_range(0, 3)); end
      1: begin cfg_len = LW'(D + $urandom_range(0, 31 - D)); cfg_post = LW'($urandom_range(0, 31)); end
      2: begin cfg_len = LW'($urandom_range(1, D)); cfg_post = cfg_len + LW'($urandom_range(0, 2)); end
      default: begin cfg_len = LW'($urandom_range(1, D)); cfg_post = LW'($urandom_range(0, int'(cfg_len) - 1)); end
    endcase
  endtask

  initial begin
    int hit_prob;
    new_config();
    clamp(int'(cfg_len), int'(cfg_post), exp_len, exp_post);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1;
    // The controller writes from the first clock out of reset.
    wrote_last = buf_we;
    if (buf_we) begin
      shadow[buf_waddr] = ts_now;
      last_ts = ts_now;
      arm_writes++;
    end
    while (captures < 300) begin
      @(negedge clk);
      ts_now += TW'(ST);
      rd_done = 1'b0;
      // Detector result for the word written in the previous clock.
      hit_prob = (captures % 3 == 0) ? 2 : 20;
      det_hit_a = wrote_last && ($urandom_range(0, 99) < hit_prob);
      det_hit_b = wrote_last && ($urandom_range(0, 99) < hit_prob);
      det_lane  = LN'($urandom_range(0, 7));
      if (m == M_READ) begin
        // Streamer: finish after a while, possibly with a new window.
        if (read_wait == 3) new_config();
        if (read_wait == 0) rd_done = 1'b1;
        else read_wait--;
      end
      #1;
      check("armed", armed, m == M_ACQ && arm_writes >= exp_len - exp_post);
      if (m == M_ACQ && (det_hit_a || det_hit_b)) begin
        if (arm_writes >= exp_len - exp_post) begin
          m = M_POST; post_writes = 0;
          trig_word_ts = last_ts;
          exp_trig_ts  = last_ts + TW'(det_lane);
          exp_ha = det_hit_a; exp_hb = det_hit_b; exp_lane = int'(det_lane);
        end else ignored_hits++;
      end
      if (rd_start) begin
        check("rd_start only after trigger", m, M_POST);
        check("post-trigger words", post_writes, exp_post);
        check("rd_len", rd_len, exp_len);
        check("trig_ts", trig_ts, exp_trig_ts);
        check("trig_hit_a", trig_hit_a, exp_ha);
        check("trig_hit_b", trig_hit_b, exp_hb);
        check("trig_lane", trig_lane, exp_lane);
        // Window: len consecutive words ending trigger word + post.
        for (int k = 0; k < exp_len; k++) begin
          int a;
          a = (int'(rd_base) + k) % D;
          check("window word", shadow[a], TW'(trig_word_ts + TW'((k - (exp_len - 1 - exp_post)) * ST)));
        end
        if (int'(rd_base) + exp_len > D) wraps++;
        m = M_READ; read_wait = $urandom_range(0, 8);
        captures++;
      end
      if (m == M_READ) check("no write while frozen", buf_we, 0);
      // Record this clock's write.
      wrote_last = buf_we;
      if (buf_we) begin
        shadow[buf_waddr] = ts_now;
        last_ts = ts_now;
        if (m == M_ACQ) arm_writes++;
        if (m == M_POST) post_writes++;
      end
      if (rd_done) begin
        m = M_ACQ; arm_writes = 0;
        clamp(int'(cfg_len), int'(cfg_post), exp_len, exp_post);
      end
    end
    check("some hits ignored during hold-off", ignored_hits > 0, 1);
    check("some windows wrap", wraps > 0, 1);
    $display("captures=%0d wraps=%0d ignored_hits=%0d", captures, wraps, ignored_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
