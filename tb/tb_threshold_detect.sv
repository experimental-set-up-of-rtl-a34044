// tb_threshold_detect: self-checking test of the magnitude threshold detector.
//
// Drives random sample words on both polarisations (with extra weight on the
// corner values -128, 127, 0 and on magnitudes equal to the threshold) and
// random thresholds, including zero. The expected flags and earliest lane are
// computed here with integer arithmetic and compared one clock later, which
// also checks the one-clock latency.
module tb_threshold_detect;
  localparam int SW = 8;
  localparam int L  = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [SW-1:0] sa [L], sb [L];
  logic [SW-1:0] ta, tb;
  logic hit_a, hit_b;
  logic [2:0] lane;
  int checks = 0, failures = 0;

  threshold_detect #(.SAMPLE_W(SW), .LANES(L)) dut (
    .clk, .rst_n, .samp_a(sa), .samp_b(sb), .thr_a(ta), .thr_b(tb),
    .hit_a, .hit_b, .first_lane(lane)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int absval(int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic logic signed [SW-1:0] pick(int thr);
    int r = $urandom_range(0, 9);
    case (r)
      0: return -8'sd128;
      1: return 8'sd127;
      2: return 8'sd0;
      3: return SW'(thr);
      4: return SW'(-thr);
      5: return SW'(thr + 1);
      6: return SW'(-(thr + 1));
      default: return SW'($urandom_range(0, 255));
    endcase
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int eha, ehb, elane;
    for (int i = 0; i < L; i++) begin sa[i] = '0; sb[i] = '0; end
    ta = '0; tb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      case (n % 4)
        0: begin ta = '0; tb = SW'($urandom_range(0, 128)); end
        default: begin ta = SW'($urandom_range(0, 128)); tb = SW'($urandom_range(0, 128)); end
      endcase
      for (int i = 0; i < L; i++) begin
        sa[i] = ($urandom_range(0, 3) == 0) ? pick(int'(ta)) : SW'($urandom_range(0, 255)) >>> 3;
        sb[i] = ($urandom_range(0, 3) == 0) ? pick(int'(tb)) : SW'($urandom_range(0, 255)) >>> 3;
      end
      eha = 0; ehb = 0; elane = 0;
      for (int i = L - 1; i >= 0; i--) begin
        bit oa, ob;
        oa = absval(int'(sa[i])) > int'(ta);
        ob = absval(int'(sb[i])) > int'(tb);
        if (oa) eha = 1;
        if (ob) ehb = 1;
        if (oa || ob) elane = i;
      end
      @(posedge clk);
      #1;
      check("hit_a", int'(hit_a), eha);
      check("hit_b", int'(hit_b), ehb);
      if (eha || ehb) check("first_lane", int'(lane), elane);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
