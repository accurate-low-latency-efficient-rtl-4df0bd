// sigmoid_pla: FP32 sigmoid by piecewise linear approximation (combinational).
// The Gather Unit PEs use it as their activation for spatial-attention scores.
// The reference design uses a piecewise linear approximation; the segments are
// not published, so this unit uses the PLAN segments, in which every slope is a
// power of two and the product becomes a shift:
//     |x| >= 5          : y = 1
//     2.375 <= |x| < 5  : y = |x|/32 + 0.84375
//     1 <= |x| < 2.375  : y = |x|/8  + 0.625
//     0 <= |x| < 1      : y = |x|/4  + 0.5
//     x < 0             : y = 1 - y(|x|)
// |x| is converted to unsigned fixed point with 24 fraction bits, the segment is
// evaluated there, and the result is normalised back to FP32. The maximum error
// against the true sigmoid is about 0.019 (that of PLAN itself).
module sigmoid_pla
  import fp32_pkg::*;
(
  input  fp32_t x,
  output fp32_t y
);
  localparam logic [29:0] ONE   = 30'd1 << 24;
  localparam logic [29:0] BP1   = 30'd1 << 24;      // 1.0
  localparam logic [29:0] BP2   = 30'd39845888;     // 2.375 * 2^24
  localparam logic [29:0] BP3   = 30'd83886080;     // 5.0   * 2^24
  localparam logic [29:0] C1    = 30'd8388608;      // 0.5
  localparam logic [29:0] C2    = 30'd10485760;     // 0.625
  localparam logic [29:0] C3    = 30'd14155776;     // 0.84375

  logic [29:0]        ax, yp, yf;
  logic signed [9:0]  sh;
  logic [4:0]         msb;
  logic [23:0]        mant;

  always_comb begin
    // |x| in fixed point, 24 fraction bits
    sh = 10'(x[30:23]) - 10'sd126;
    if (x[30:23] == 8'd0 || sh < -10'sd24) ax = 30'd0;
    else if (sh > 10'sd3)                ax = BP3;           // |x| >= 8: saturated region
    else if (sh >= 0)                    ax = 30'({1'b1, x[22:0]}) << sh;
    else                                 ax = 30'({1'b1, x[22:0]}) >> (-sh);
    // positive half of the curve
    if (ax >= BP3)      yp = ONE;
    else if (ax >= BP2) yp = (ax >> 5) + C3;
    else if (ax >= BP1) yp = (ax >> 3) + C2;
    else                yp = (ax >> 2) + C1;
    yf = x[31] ? (ONE - yp) : yp;
    // back to FP32 (yf > 0 always, yf <= 1.0)
    msb = 5'd0;
    for (int i = 0; i <= 24; i++) if (yf[i]) msb = 5'(i);
    if (msb >= 5'd23) mant = 24'(yf >> (msb - 5'd23));
    else              mant = 24'(yf << (5'd23 - msb));
    if (yf == 30'd0) y = 32'd0;
    else             y = {1'b0, 8'(8'd103 + 8'(msb)), mant[22:0]};
  end
endmodule
