// tb_readout_streamer: self-checking test of the capture readout.
//
// Models the two buffers as arrays with a one-clock registered read, fills
// them with random words, requests captures with random base, length,
// time-stamp and flags, and takes the frame with a randomly stalling ready.
// Every frame is checked word by word against the layout: time-stamp,
// header, len words of A from base (wrapping at DEPTH), len words of B, last
// on the final word only, and a done pulse after it. Also checks that a frame
// word takes no more than three clocks when ready is held high.
module tb_readout_streamer;
  import lunaska_pkg::*;
  localparam int W  = 64;
  localparam int D  = 24;
  localparam int TW = 64;
  localparam int LN = 3;
  localparam int AW = $clog2(D);
  localparam int LW = $clog2(D + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, hit_a = 1'b0, hit_b = 1'b0;
  logic [AW-1:0] base = '0, rd_addr;
  logic [LW-1:0] len = '0;
  logic [TW-1:0] ts = '0;
  logic [LN-1:0] lane = '0;
  logic done, busy, rd_en, m_valid, m_last;
  logic m_ready = 1'b0;
  logic [W-1:0] rd_data_a, rd_data_b, m_data;
  logic [W-1:0] mem_a [D], mem_b [D];

  readout_streamer #(.W(W), .DEPTH(D), .TS_W(TW), .LANE_W(LN)) dut (
    .clk, .rst_n, .start, .base, .len, .ts, .hit_a, .hit_b, .lane, .done, .busy,
    .rd_en, .rd_addr, .rd_data_a, .rd_data_b, .m_data, .m_valid, .m_ready, .m_last
  );

  always_ff @(posedge clk) if (rd_en) begin
    rd_data_a <= mem_a[rd_addr];
    rd_data_b <= mem_b[rd_addr];
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  initial begin
    logic [W-1:0] exp_words [$];
    logic [W-1:0] h1;
    int stall_pct, n, cycles;
    bit saw_done;
    for (int a = 0; a < D; a++) begin
      mem_a[a] = {$urandom, $urandom};
      mem_b[a] = {$urandom, $urandom};
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 60; f++) begin
      @(negedge clk);
      base  = AW'($urandom_range(0, D - 1));
      len   = LW'($urandom_range(1, D));
      ts    = {$urandom, $urandom};
      hit_a = $urandom_range(0, 1) == 1;
      hit_b = !hit_a || ($urandom_range(0, 1) == 1);
      lane  = LN'($urandom_range(0, 7));
      stall_pct = (f % 4 == 0) ? 0 : $urandom_range(10, 70);
      exp_words.delete();
      exp_words.push_back(ts);
      h1 = '0;
      h1[HDR_LEN_LSB +: HDR_LEN_W] = HDR_LEN_W'(len);
      h1[HDR_LANE_LSB +: HDR_LANE_W] = HDR_LANE_W'(lane);
      h1[HDR_HITA_BIT] = hit_a;
      h1[HDR_HITB_BIT] = hit_b;
      exp_words.push_back(h1);
      for (int k = 0; k < int'(len); k++) exp_words.push_back(mem_a[(int'(base) + k) % D]);
      for (int k = 0; k < int'(len); k++) exp_words.push_back(mem_b[(int'(base) + k) % D]);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      base = '0; len = '0; ts = '0; lane = '0;   // inputs need only be valid with start
      n = 0; cycles = 0; saw_done = 0;
      while (n < exp_words.size()) begin
        m_ready = ($urandom_range(0, 99) >= stall_pct);
        #1;
        if (m_valid && m_ready) begin
          check("frame word", m_data, exp_words[n]);
          check("last", W'(m_last), W'(n == exp_words.size() - 1));
          n++;
        end
        @(negedge clk);
        cycles++;
        if (cycles > 10000) break;
      end
      m_ready = 1'b0;
      #1;
      check("done after last word", W'(done), W'(1));
      check("idle after frame", W'(busy), W'(0));
      if (stall_pct == 0)
        check("at most 3 clocks per data word", W'(cycles <= 2 + 3 * (exp_words.size() - 2) + 1), W'(1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
