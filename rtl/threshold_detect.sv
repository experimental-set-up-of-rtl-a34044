// threshold_detect: adjustable-threshold pulse detector for both polarisations.
//
// Every clock it receives LANES consecutive samples of polarisation A and of
// polarisation B (two's-complement, lane 0 the earliest). Each sample's
// magnitude |v| is compared with that polarisation's threshold; a sample fires
// when its magnitude is strictly greater than the threshold. The outputs say
// whether any sample of A and whether any sample of B fired, and the lowest lane in
// which a sample of either polarisation fired, which gives the time-stamp its
// sample accuracy.
//
// Following the published design, the polarisations are tested one by one
// (no combination such as A^2+B^2) and either one may trigger. The strict
// "greater than", the separate threshold per polarisation and the lane
// ordering are this implementation's choices. A threshold of zero fires on
// every non-zero sample, which is how the unbiased calibration captures are
// taken.
//
// Timing: all outputs are registered, one clock after the samples arrive.
module threshold_detect #(
  parameter int unsigned SAMPLE_W = lunaska_pkg::SAMPLE_W_DEF,
  parameter int unsigned LANES    = lunaska_pkg::LANES_DEF,
  localparam int unsigned LANE_W  = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic signed [SAMPLE_W-1:0] samp_a [LANES],
  input  logic signed [SAMPLE_W-1:0] samp_b [LANES],
  input  logic        [SAMPLE_W-1:0] thr_a,
  input  logic        [SAMPLE_W-1:0] thr_b,
  output logic                       hit_a,       // some sample of A exceeded thr_a
  output logic                       hit_b,       // some sample of B exceeded thr_b
  output logic        [LANE_W-1:0]   first_lane   // earliest lane that exceeded
);

  // Magnitude of a two's-complement sample; -2^(W-1) maps to 2^(W-1), which
  // still fits in W unsigned bits.
  function automatic logic [SAMPLE_W-1:0] magnitude(input logic signed [SAMPLE_W-1:0] v);
    return v[SAMPLE_W-1] ? SAMPLE_W'(-v) : SAMPLE_W'(v);
  endfunction

  logic [LANES-1:0]  over_a, over_b, over_any;
  logic [LANE_W-1:0] lane_c;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      over_a[i] = magnitude(samp_a[i]) > thr_a;
      over_b[i] = magnitude(samp_b[i]) > thr_b;
    end
    over_any = over_a | over_b;
    // Priority encoder: lowest lane wins.
    lane_c = '0;
    for (int i = LANES - 1; i >= 0; i--) begin
      if (over_any[i]) lane_c = LANE_W'(i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_a      <= 1'b0;
      hit_b      <= 1'b0;
      first_lane <= '0;
    end else begin
      hit_a      <= |over_a;
      hit_b      <= |over_b;
      first_lane <= lane_c;
    end
  end

endmodule
