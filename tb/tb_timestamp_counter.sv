// tb_timestamp_counter: self-checking test of the sample-count time base.
//
// Checks the reset value, an advance of STEP samples per clock, a load of an
// arbitrary epoch and the wrap of the counter at the top of its range.
module tb_timestamp_counter;
  localparam int TW = 64;
  localparam int ST = 8;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [TW-1:0] load_value = '0, ts, exp;
  int checks = 0, failures = 0;

  timestamp_counter #(.TS_W(TW), .STEP(ST)) dut (.clk, .rst_n, .load, .load_value, .ts);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    checks++;
    if (ts !== exp) begin
      failures++;
      $display("FAIL %s: ts %0d expected %0d", what, ts, exp);
    end
  endtask

  initial begin
    @(posedge clk); #1; exp = '0; check("reset");
    @(negedge clk); rst_n = 1'b1;
    exp = '0;
    for (int n = 0; n < 100; n++) begin
      @(posedge clk); #1;
      exp += TW'(ST);
      check("count");
    end
    for (int k = 0; k < 20; k++) begin
      @(negedge clk); load = 1'b1; load_value = {$urandom, $urandom};
      if (k == 19) load_value = '1 - TW'(2 * ST) + 1;  // near the top: wraps below
      @(posedge clk); #1; exp = load_value; check("load");
      load = 1'b0;
      repeat ($urandom_range(1, 10)) begin
        @(posedge clk); #1; exp += TW'(ST); check("count after load");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
