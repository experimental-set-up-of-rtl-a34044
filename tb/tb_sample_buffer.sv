// tb_sample_buffer: self-checking test of the history buffer memory.
//
// Fills a small buffer (DEPTH 60, not a power of two, like the full-size
// 2,040 words) with random words, then mixes random writes and reads, keeping
// a reference copy here. Each read must return the reference word one clock
// later; a read of the address written in the same clock returns the old word.
module tb_sample_buffer;
  localparam int DW = 64;
  localparam int D  = 60;
  localparam int AW = $clog2(D);

  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  sample_buffer #(.DATA_W(DW), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] exp;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we    = $urandom_range(0, 1) == 1;
      waddr = AW'($urandom_range(0, D - 1));
      wdata = {$urandom, $urandom};
      re    = 1'b1;
      raddr = (n % 5 == 0) ? waddr : AW'($urandom_range(0, D - 1));
      exp   = ref_mem[raddr];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        $display("FAIL read %0d: got %h expected %h", raddr, rdata, exp);
      end
    end
    // rdata holds while re is low.
    @(negedge clk); re = 1'b0; exp = rdata; we = 1'b0;
    repeat (3) @(posedge clk);
    #1; checks++;
    if (rdata !== exp) begin failures++; $display("FAIL rdata changed without re"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
