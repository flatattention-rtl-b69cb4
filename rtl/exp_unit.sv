// exp_unit: lane-wise exponential for the Softmax numerator, exp(x) on signed Q8.8.
//
// The evaluated tile adds a dedicated exponential unit to its vector FPU. This
// version is combinational and uses the base-2 split
//   exp(x) = 2^(x*log2 e) = 2^n * 2^f,  n = floor(x*log2 e), 0 <= f < 1,
// with log2 e ~ 369/256 and the linear approximation 2^f ~ 1 + f, so the result
// is (256 + f*256) shifted by n. Results above 127.99 saturate to 0x7fff; shifts
// below 2^-16 give 0. The arithmetic (fixed point, linear mantissa) is this
// design's own choice; its largest relative error is about 6 %.
module exp_unit
  import flat_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  lane_t x [N],
  output lane_t y [N]
);
  for (genvar i = 0; i < N; i++) begin : g_lane
    logic signed [31:0] t;
    logic signed [23:0] n;
    logic        [8:0]  mant;
    always_comb begin
      t    = (32'(x[i]) * 32'sd369) >>> 8;    // x * log2(e), Q8.8
      n    = 24'(t >>> 8);                     // floor
      mant = {1'b1, t[7:0]};                   // 1 + f, Q1.8
      if (n >= 24'sd7)       y[i] = 16'sh7fff;
      else if (n >= 0)       y[i] = lane_t'(32'(mant) << n[2:0]);
      else if (n <= -24'sd16) y[i] = '0;
      else                   y[i] = lane_t'(32'(mant) >> (-n));
    end
  end
endmodule
