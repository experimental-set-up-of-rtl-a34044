// sample_buffer: history buffer of one polarisation.
//
// A simple dual-port memory of DEPTH words, each word holding LANES samples
// (one fabric clock's worth). The capture controller writes it as a circular
// buffer, one word per clock, while the sampler is armed, stops writing
// ("freezes" it) after a trigger, and the readout streamer then reads it back.
// The published buffer holds up to 16,320 samples (about 8 us at 2.048 GS/s);
// with 8 samples per word that is 2,040 words.
//
// Interface: write port (we, waddr, wdata) and read port (re, raddr) with the
// data on rdata one clock after re (registered read, as a block RAM gives).
// The memory contents are not reset; the controller never returns words that
// were not written since it last re-armed.
module sample_buffer #(
  parameter int unsigned DATA_W = lunaska_pkg::SAMPLE_W_DEF * lunaska_pkg::LANES_DEF,
  parameter int unsigned DEPTH  = lunaska_pkg::BUF_SAMPLES_DEF / lunaska_pkg::LANES_DEF,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    assert (!we || waddr < AW'(DEPTH)) else $error("sample_buffer: write address %0d out of range", waddr);
    assert (!re || raddr < AW'(DEPTH)) else $error("sample_buffer: read address %0d out of range", raddr);
  end

endmodule
