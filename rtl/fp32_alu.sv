// fp32_alu: the floating-point unit of a SiteO.
//
// A purely combinational single-precision (IEEE 754 binary32) unit computing
// y = a OP b for OP in add, subtract, multiply, divide, maximum, RELU (of b),
// average ((a+b)/2) and pass (b). A SiteO turns a message around in one clock
// cycle when its FIFOs are empty, so the whole operation is settled within the
// cycle and the SiteO registers the result.
//
// Interface: op selects the operation (mipu_pkg::fpu_op_e); a and b are the
// operands, y the result. No clock.
//
// The operation list (add, subtract, multiply, divide on 32-bit IEEE 754
// values, a RELU and a comparison) follows the published description. The
// rest is this design's own choice: results are rounded to nearest, ties to
// even; subnormal inputs are read as zero and subnormal results are flushed to
// signed zero; overflow gives infinity; any NaN input, 0/0, inf-inf, 0*inf and
// inf/inf give the quiet NaN 0x7FC00000. Division uses a single wide integer
// division of the significands.
module fp32_alu
  import mipu_pkg::*;
(
  input  fpu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  function automatic logic is_nan(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != 0);
  endfunction
  function automatic logic is_inf(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] == 0);
  endfunction
  function automatic logic is_zero(logic [31:0] x);
    return x[30:23] == 8'h00;   // zero or subnormal, read as zero
  endfunction

  // Round a 24-bit significand (hidden bit at [23]) with guard and sticky bits
  // to nearest-even and pack it with sign and unbiased-plus-127 exponent.
  function automatic logic [31:0] round_pack(logic s, logic signed [11:0] e,
                                             logic [23:0] m, logic g, logic st);
    logic [24:0] mr;
    logic signed [11:0] er;
    mr = {1'b0, m} + 25'(g && (st || m[0]));
    er = e;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255)     return {s, 8'hFF, 23'd0};
    else if (er <= 0)  return {s, 31'd0};
    else               return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] x, logic [31:0] z);
    logic [31:0] p, q;
    logic [49:0] mp, mq;
    logic [50:0] sum;
    logic [7:0]  d;
    logic [5:0]  lz;
    logic signed [11:0] e;
    logic        st;
    if (is_nan(x) || is_nan(z)) return QNAN;
    if (is_inf(x) && is_inf(z)) return (x[31] == z[31]) ? x : QNAN;
    if (is_inf(x)) return x;
    if (is_inf(z)) return z;
    if (is_zero(x) && is_zero(z)) return {x[31] & z[31], 31'd0};
    if (is_zero(x)) return z;
    if (is_zero(z)) return x;
    // p gets the larger magnitude
    if (x[30:0] >= z[30:0]) begin p = x; q = z; end
    else                    begin p = z; q = x; end
    d  = p[30:23] - q[30:23];
    mp = {1'b1, p[22:0], 26'd0};
    mq = {1'b1, q[22:0], 26'd0};
    if (d >= 8'd50) begin
      mq = 50'd1;                               // only the sticky bit remains
    end else begin
      st = 1'b0;
      for (int i = 0; i < 50; i++)
        if (i < int'(d)) st = st | mq[i];
      mq = (mq >> d) | 50'(st);
    end
    if (p[31] == q[31]) sum = {1'b0, mp} + {1'b0, mq};
    else                sum = {1'b0, mp} - {1'b0, mq};
    if (sum == 0) return 32'd0;
    lz = 6'd0;
    for (int i = 0; i <= 50; i++)
      if (sum[i]) lz = 6'(50 - i);
    sum = sum << lz;
    e   = 12'(p[30:23]) + 12'sd1 - 12'(lz);
    return round_pack(p[31], e, sum[50:27], sum[26], |sum[25:0]);
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] x, logic [31:0] z);
    logic        s;
    logic [47:0] pr;
    logic signed [11:0] e;
    s = x[31] ^ z[31];
    if (is_nan(x) || is_nan(z)) return QNAN;
    if ((is_inf(x) && is_zero(z)) || (is_zero(x) && is_inf(z))) return QNAN;
    if (is_inf(x) || is_inf(z)) return {s, 8'hFF, 23'd0};
    if (is_zero(x) || is_zero(z)) return {s, 31'd0};
    pr = {24'd0, 1'b1, x[22:0]} * {24'd0, 1'b1, z[22:0]};
    e  = 12'(x[30:23]) + 12'(z[30:23]) - 12'sd127;
    if (pr[47]) return round_pack(s, e + 12'sd1, pr[47:24], pr[23], |pr[22:0]);
    else        return round_pack(s, e,          pr[46:23], pr[22], |pr[21:0]);
  endfunction

  function automatic logic [31:0] fdiv(logic [31:0] x, logic [31:0] z);
    logic        s;
    logic [49:0] num, rm;
    logic [26:0] qt;
    logic signed [11:0] e;
    s = x[31] ^ z[31];
    if (is_nan(x) || is_nan(z)) return QNAN;
    if ((is_inf(x) && is_inf(z)) || (is_zero(x) && is_zero(z))) return QNAN;
    if (is_inf(x) || is_zero(z)) return {s, 8'hFF, 23'd0};
    if (is_zero(x) || is_inf(z)) return {s, 31'd0};
    num = {1'b1, x[22:0], 26'd0};
    qt  = 27'(num / {26'd0, 1'b1, z[22:0]});
    rm  = num % {26'd0, 1'b1, z[22:0]};
    e   = 12'(x[30:23]) - 12'(z[30:23]) + 12'sd127;
    // the quotient of two significands in [1,2) lies in (0.5, 2)
    if (qt[26]) return round_pack(s, e,          qt[26:3], qt[2], (|qt[1:0]) || (rm != 0));
    else        return round_pack(s, e - 12'sd1, qt[25:2], qt[1], qt[0] || (rm != 0));
  endfunction

  // x > z as real numbers (zeros of either sign are equal)
  function automatic logic fgt(logic [31:0] x, logic [31:0] z);
    logic xz, zz;
    xz = is_zero(x);
    zz = is_zero(z);
    if (xz && zz) return 1'b0;
    if (xz) return z[31];
    if (zz) return !x[31];
    if (x[31] != z[31]) return !x[31];
    if (!x[31]) return x[30:0] > z[30:0];
    return x[30:0] < z[30:0];
  endfunction

  logic [31:0] sum_ab;
  assign sum_ab = fadd(a, b);

  always_comb begin
    unique case (op)
      FPU_ADD:  y = sum_ab;
      FPU_SUB:  y = fadd(a, {~b[31], b[30:0]});
      FPU_MUL:  y = fmul(a, b);
      FPU_DIV:  y = fdiv(a, b);
      FPU_MAX:  y = (is_nan(a) || is_nan(b)) ? QNAN : (fgt(b, a) ? b : a);
      FPU_RELU: y = is_nan(b) ? QNAN : ((b[31] || is_zero(b)) ? 32'd0 : b);
      FPU_AVG: begin
        if (sum_ab[30:23] == 8'hFF)      y = sum_ab;
        else if (sum_ab[30:23] <= 8'd1)  y = {sum_ab[31], 31'd0};
        else                             y = {sum_ab[31], sum_ab[30:23] - 8'd1, sum_ab[22:0]};
      end
      default:  y = b;
    endcase
  end

endmodule
