// fp32_pkg -- single-precision floating-point helper functions shared by the
// arithmetic accelerators (FMAV, utility).
//
// The accelerators of the paper instantiate vendor floating-point IP cores
// (fp_ip_add, fp_ip_mul, fp_ip_cmp, fp_ip_abs). Those cores are not part of the
// design, so this package gives simple combinational stand-ins with the same
// function on IEEE-754 binary32 numbers, simplified as follows (own choices):
//   * subnormal inputs are read as zero and subnormal results flush to zero;
//   * results are truncated (round toward zero) instead of round-to-nearest,
//     so a result may differ from the exact IEEE one by less than one ulp;
//   * every NaN result is the quiet NaN 32'h7FC00000.
package fp32_pkg;

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  // Compare result encoding carried on the accelerator's 2-bit cond output.
  localparam logic [1:0] CMP_EQ = 2'd0;
  localparam logic [1:0] CMP_LT = 2'd1;
  localparam logic [1:0] CMP_GT = 2'd2;
  localparam logic [1:0] CMP_UN = 2'd3;   // unordered: an operand is NaN

  function automatic logic is_nan(input logic [31:0] a);
    return (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
  endfunction

  function automatic logic is_inf(input logic [31:0] a);
    return (a[30:23] == 8'hFF) && (a[22:0] == 23'd0);
  endfunction

  function automatic logic is_zero(input logic [31:0] a);
    return a[30:23] == 8'h00;   // zero or subnormal (flushed)
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic [22:0] m;
    int          e;
    s = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b)) return QNAN;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return QNAN;
    if (is_inf(a) || is_inf(b)) return {s, 8'hFF, 23'd0};
    if (is_zero(a) || is_zero(b)) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = p[46:24];
      e = e + 1;
    end else begin
      m = p[45:23];
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, e[7:0], m};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [26:0] mx, my;
    logic [27:0] sum;
    int          d, e, lz;
    if (is_nan(a) || is_nan(b)) return QNAN;
    if (is_inf(a) && is_inf(b)) return (a[31] == b[31]) ? a : QNAN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return {a[31] & b[31], 31'd0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    e  = int'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = sum >> 1;
        e = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - lz;
    end
    if (e >= 255) return {x[31], 8'hFF, 23'd0};
    if (e <= 0)   return {x[31], 31'd0};
    return {x[31], e[7:0], sum[25:3]};
  endfunction

  function automatic logic [31:0] fsub(input logic [31:0] a, input logic [31:0] b);
    return fadd(a, {~b[31], b[30:0]});
  endfunction

  function automatic logic [1:0] fcmp(input logic [31:0] a, input logic [31:0] b);
    if (is_nan(a) || is_nan(b)) return CMP_UN;
    if (is_zero(a) && is_zero(b)) return CMP_EQ;
    if (a == b) return CMP_EQ;
    if (a[31] != b[31]) return a[31] ? CMP_LT : CMP_GT;
    if (a[31] == 1'b0) return (a[30:0] < b[30:0]) ? CMP_LT : CMP_GT;
    return (a[30:0] > b[30:0]) ? CMP_LT : CMP_GT;
  endfunction

  function automatic logic [31:0] fabs(input logic [31:0] a);
    return {1'b0, a[30:0]};
  endfunction

endpackage
