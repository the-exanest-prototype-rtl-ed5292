// fp_pkg: IEEE-754 arithmetic helpers for the Allreduce reduction unit.
//
// The paper only says the accelerator handles sum, min and max on int, float and double.
// How this design does it is its own choice: single precision is widened exactly to
// double, added in double with round-to-nearest-even and narrowed back with
// round-to-nearest-even (double rounding is harmless for addition when the wide format
// has at least 2p+2 bits, 53 >= 2*24+2). Subnormal inputs and results are flushed to
// zero; NaN inputs give the canonical quiet NaN for sums; min/max order values by their
// sign-magnitude key (NaNs are not special-cased).
// All functions are combinational and synthesizable.
package fp_pkg;

  function automatic logic [63:0] f32_to_f64(input logic [31:0] a);
    logic [7:0] e;
    e = a[30:23];
    if (e == 8'd0)        return {a[31], 63'd0};
    else if (e == 8'hff)  return {a[31], 11'h7ff, a[22:0], 29'd0};
    else                  return {a[31], 11'(e) + 11'd896, a[22:0], 29'd0};
  endfunction

  function automatic logic [31:0] f64_to_f32(input logic [63:0] a);
    logic [10:0] e;
    int          ne;
    logic [23:0] m;       // hidden bit + 23 fraction bits
    logic        g, s, up;
    e = a[62:52];
    if (e == 11'd0)      return {a[63], 31'd0};
    if (e == 11'h7ff)    return {a[63], 8'hff, (a[51:0] != '0) ? 23'h400000 : 23'd0};
    ne = int'(e) - 896;
    m  = {1'b1, a[51:29]};
    g  = a[28];
    s  = (a[27:0] != '0);
    up = g && (s || m[0]);
    if (up) begin
      if (m == 24'hffffff) begin m = 24'h800000; ne = ne + 1; end
      else m = m + 24'd1;
    end
    if (ne >= 255) return {a[63], 8'hff, 23'd0};
    if (ne <= 0)   return {a[63], 31'd0};
    return {a[63], 8'(ne), m[22:0]};
  endfunction

  function automatic logic [63:0] f64_add(input logic [63:0] a, input logic [63:0] b);
    logic [63:0] x, y;
    logic [10:0] ex, ey;
    logic [55:0] mx, my;   // 1 hidden + 52 fraction + guard, round, sticky
    logic [56:0] sum;
    int          d, e, lz;
    logic        sgn, stk, up;
    logic [52:0] mant;
    // flush subnormals
    x = (a[62:52] == 11'd0) ? {a[63], 63'd0} : a;
    y = (b[62:52] == 11'd0) ? {b[63], 63'd0} : b;
    // special values
    if (x[62:52] == 11'h7ff || y[62:52] == 11'h7ff) begin
      if ((x[62:52] == 11'h7ff && x[51:0] != '0) || (y[62:52] == 11'h7ff && y[51:0] != '0))
        return 64'h7ff8000000000000;
      if (x[62:52] == 11'h7ff && y[62:52] == 11'h7ff && x[63] != y[63])
        return 64'h7ff8000000000000;
      return (x[62:52] == 11'h7ff) ? x : y;
    end
    if (x[62:0] == '0 && y[62:0] == '0) return {x[63] & y[63], 63'd0};
    if (x[62:0] == '0) return y;
    if (y[62:0] == '0) return x;
    // order by magnitude
    if (y[62:0] > x[62:0]) begin x = b; y = a; end
    ex = x[62:52]; ey = y[62:52];
    mx = {1'b1, x[51:0], 3'b000};
    my = {1'b1, y[51:0], 3'b000};
    d  = int'(ex) - int'(ey);
    if (d > 55) begin
      my = 56'd1;                       // only a sticky bit is left
    end else if (d > 0) begin
      stk = 1'b0;
      for (int i = 0; i < 56; i++) if (i < d && my[i]) stk = 1'b1;
      my = (my >> d) | 56'(stk);
    end
    sgn = x[63];
    e   = int'(ex);
    if (x[63] == y[63]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[56]) begin
        sum = {1'b0, sum[56:1]} | 57'(sum[0]);
        e   = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == '0) return 64'd0;
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    // sum[55] is the hidden bit, [2:0] guard/round/sticky
    mant = sum[55:3];
    up   = sum[2] && (sum[1] || sum[0] || mant[0]);
    if (up) begin
      if (mant == '1) begin mant = 53'h10000000000000; e = e + 1; end
      else mant = mant + 53'd1;
    end
    if (e >= 2047) return {sgn, 11'h7ff, 52'd0};
    if (e <= 0)    return {sgn, 63'd0};
    return {sgn, 11'(e), mant[51:0]};
  endfunction

  function automatic logic [31:0] f32_add(input logic [31:0] a, input logic [31:0] b);
    return f64_to_f32(f64_add(f32_to_f64(a), f32_to_f64(b)));
  endfunction

  // total order key for comparisons: larger key = larger value
  function automatic logic [63:0] f64_key(input logic [63:0] a);
    return a[63] ? ~a : (a | 64'h8000000000000000);
  endfunction

  function automatic logic [31:0] f32_key(input logic [31:0] a);
    return a[31] ? ~a : (a | 32'h80000000);
  endfunction

endpackage
