// timestamp_counter: sample-accurate time base.
//
// Counts samples, not clocks: every fabric clock carries STEP (= LANES)
// samples, so the count advances by STEP per clock and ts is the sample number
// of lane 0 of the word arriving in that clock. Adding a lane index gives the
// time of any single sample, which is the "time-stamp at sampling accuracy"
// that goes with every returned buffer. The count can be loaded (load,
// load_value) to align it to an external epoch; how the published system
// aligned its clock is not described, so the load port is this design's
// choice, as are the width and the reset value of zero.
//
// Timing: load takes effect at the next clock edge; ts is a register.
module timestamp_counter #(
  parameter int unsigned TS_W = lunaska_pkg::TS_W_DEF,
  parameter int unsigned STEP = lunaska_pkg::LANES_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [TS_W-1:0] load_value,
  output logic [TS_W-1:0] ts
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ts <= '0;
    else if (load) ts <= load_value;
    else           ts <= ts + TS_W'(STEP);
  end

endmodule
