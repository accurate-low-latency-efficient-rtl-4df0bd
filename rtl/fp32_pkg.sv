// fp32_pkg: IEEE-754 single-precision arithmetic used by the processing elements.
// The accelerator computes in 32-bit floating point. These combinational
// functions implement multiply, add, max and ReLU with round-to-nearest-even.
// Simplifications chosen for this design: subnormal inputs and results are
// flushed to signed zero, overflow saturates to infinity, and NaN inputs are
// not treated specially (the GNN data never produces them).
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  // Pack sign, biased exponent and a 24-bit mantissa (hidden bit included),
  // with saturation to zero / infinity.
  function automatic fp32_t fp_pack(input logic s, input logic signed [10:0] e, input logic [23:0] m);
    if (e <= 0)        return {s, 31'd0};
    else if (e >= 255) return {s, 8'hFF, 23'd0};
    else               return {s, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic              s;
    logic [47:0]       prod;
    logic [23:0]       m;
    logic              g, st;
    logic signed [10:0] e;
    logic [24:0]       mr;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(a[30:23]) + 11'(b[30:23]) - 11'sd127;
    if (prod[47]) begin
      m = prod[47:24]; g = prod[23]; st = |prod[22:0]; e = e + 11'sd1;
    end else begin
      m = prod[46:23]; g = prod[22]; st = |prod[21:0];
    end
    mr = {1'b0, m} + 25'((g && (st || m[0])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1; e = e + 11'sd1;
    end
    return fp_pack(s, e, mr[23:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t             x, y, t;
    logic [26:0]       mx, my, sh;   // mantissa + guard, round, sticky
    logic [27:0]       sum;
    logic [7:0]        d;
    logic signed [10:0] e;
    logic              s;
    logic [4:0]        lz;
    logic [24:0]       mr;
    logic              lsb, g, r, st;
    x = a; y = b;
    if (x[30:23] == 8'd0) x = 32'd0;
    if (y[30:23] == 8'd0) y = 32'd0;
    if (y[30:0] > x[30:0]) begin t = x; x = y; y = t; end
    if (x[30:0] == 31'd0) return (a[31] & b[31]) ? 32'h8000_0000 : 32'd0;
    if (y[30:0] == 31'd0) return x;
    s  = x[31];
    e  = 11'(x[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = x[30:23] - y[30:23];
    if (d >= 8'd27) begin
      sh = 27'd1;                       // only sticky survives
    end else begin
      sh = my >> d;
      sh[0] = sh[0] | (|(my & ((27'd1 << d) - 27'd1)));
    end
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 11'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, sh};
      if (sum == 28'd0) return 32'd0;
      lz = 5'd0;
      for (int i = 0; i <= 26; i++) if (sum[i]) lz = 5'(26 - i);   // highest one wins
      sum = sum << lz;
      e = e - 11'(lz);
    end
    lsb = sum[3]; g = sum[2]; r = sum[1]; st = sum[0];
    mr = {1'b0, sum[26:3]} + 25'((g && (r || st || lsb)) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1; e = e + 11'sd1;
    end
    return fp_pack(s, e, mr[23:0]);
  endfunction

  // a > b as real numbers (zeros of either sign compare equal).
  function automatic logic fp_gt(input fp32_t a, input fp32_t b);
    logic az, bz;
    az = (a[30:23] == 8'd0);
    bz = (b[30:23] == 8'd0);
    if (az && bz) return 1'b0;
    if (az) return b[31];
    if (bz) return !a[31];
    if (a[31] != b[31]) return !a[31];
    if (!a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic fp32_t fp_max(input fp32_t a, input fp32_t b);
    return fp_gt(b, a) ? b : a;
  endfunction

  function automatic fp32_t fp_relu(input fp32_t a);
    return (a[31] || a[30:23] == 8'd0) ? 32'd0 : a;
  endfunction

endpackage
