// fbfq_fp_pkg: the small float32 arithmetic the Vector Compute Unit needs to
// apply super-block scales and to accumulate results.
//
// GGUF keeps the Q2_K/Q3_K super-block scales as fp16 and the Q8_K scale as
// fp32; the integer block sums are converted to fp32 and scaled, as the
// reference CPU kernels do. These functions are combinational and are this
// design's own simplification of IEEE-754: results are truncated (round toward
// zero), subnormal inputs and results are flushed to zero, and overflow gives
// infinity. NaN is not propagated specially.
package fbfq_fp_pkg;

  // fp16 -> fp32 (exact for normal numbers)
  function automatic logic [31:0] h2f(input logic [15:0] h);
    logic [4:0] e;
    e = h[14:10];
    if (e == 5'd0)       return {h[15], 31'd0};
    else if (e == 5'h1f) return {h[15], 8'hff, h[9:0], 13'd0};
    else                 return {h[15], 8'(e) + 8'd112, h[9:0], 13'd0};
  endfunction

  // signed 32-bit integer -> fp32
  function automatic logic [31:0] i2f(input logic signed [31:0] v);
    logic [31:0] a;
    logic [31:0] norm;
    int          msb;
    if (v == 0) return 32'd0;
    a   = v[31] ? 32'(-v) : 32'(v);
    msb = 0;
    for (int i = 0; i < 32; i++) if (a[i]) msb = i;
    norm = a << (31 - msb);               // leading one at bit 31
    return {v[31], 8'(127 + msb), norm[30:8]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic signed [9:0] e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 10'(a[30:23]) + 10'(b[30:23]) - 10'sd127;
    if (p[47]) begin
      e = e + 10'sd1;
      p = p >> 1;
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], p[45:23]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  sh8;
    logic [27:0] mx, my, m;   // hidden bit + 23 mantissa bits + 4 guard bits
    logic signed [9:0] e;
    int          lead;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    // x holds the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    sh8 = x[30:23] - y[30:23];
    mx  = {1'b0, 1'b1, x[22:0], 3'd0};
    my  = {1'b0, 1'b1, y[22:0], 3'd0};
    my  = (sh8 > 8'd27) ? 28'd0 : (my >> sh8);
    m   = (x[31] == y[31]) ? (mx + my) : (mx - my);
    if (m == 28'd0) return 32'd0;
    lead = 0;
    for (int i = 0; i < 28; i++) if (m[i]) lead = i;
    e = 10'(x[30:23]) + 10'(lead) - 10'sd26;
    m = m << (27 - lead);                 // leading one at bit 27
    if (e <= 0)   return 32'd0;
    if (e >= 255) return {x[31], 8'hff, 23'd0};
    return {x[31], e[7:0], m[26:4]};
  endfunction

endpackage
