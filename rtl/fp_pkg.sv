// fp_pkg: IEEE-754 double-precision arithmetic used by the finite volume
// processor, written as synthesizable functions so that a pipeline stage can
// apply an operator between two registers.
//
// Every operator rounds to nearest, ties to even, so add, sub, mul, div and
// sqrt give the correctly rounded result for normal operands. To keep the
// logic small, subnormal inputs are read as zero and subnormal results are
// flushed to a signed zero; an overflowing result becomes infinity. NaN is
// not produced or propagated (the solver never forms 0/0 on physical data).
// The operator set is the one the flux data-flow graph needs: +, -, *, /,
// sqrt, the exact halving "/2" and |x|.
//
// The precision is fixed by EW/MW below; the double-precision configuration
// is the design's main one (the constants below are double words).
package fp_pkg;

  localparam int unsigned EW   = 11;           // exponent bits
  localparam int unsigned MW   = 52;           // fraction bits
  localparam int unsigned FW   = 1 + EW + MW;  // word width
  localparam int unsigned BIAS = (1 << (EW - 1)) - 1;
  localparam int unsigned EMAX = (1 << EW) - 1;

  typedef logic [FW-1:0] fp_t;

  // Physical constants of the Euler equations (gamma = 1.4).
  localparam fp_t FP_ZERO     = '0;
  localparam fp_t FP_GAMMA    = 64'h3FF6_6666_6666_6666;  // 1.4
  localparam fp_t FP_GAMMA_M1 = 64'h3FD9_9999_9999_999A;  // 0.4

  typedef enum logic [2:0] {
    FP_ADD  = 3'd0,
    FP_SUB  = 3'd1,
    FP_MUL  = 3'd2,
    FP_DIV  = 3'd3,
    FP_SQRT = 3'd4,
    FP_HALF = 3'd5,
    FP_ABS  = 3'd6
  } fp_op_e;

  // Assemble a result from sign, unbiased-plus-bias exponent (may be out of
  // range) and a 53-bit significand with the hidden one at the top, plus the
  // guard and sticky information for rounding.
  function automatic fp_t fp_pack(input logic s, input int e,
                                  input logic [MW:0] m, input logic g,
                                  input logic st);
    logic [MW+1:0] mr;
    int            er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 1'b1;
    if (mr[MW+1]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= int'(EMAX)) return {s, {EW{1'b1}}, {MW{1'b0}}};
    if (er <= 0)          return {s, {(FW-1){1'b0}}};
    return {s, er[EW-1:0], mr[MW-1:0]};
  endfunction

  function automatic fp_t fp_mul(input fp_t a, input fp_t b);
    logic              s;
    logic [MW:0]       ma, mb;
    logic [2*MW+1:0]   p;
    int                e;
    s = a[FW-1] ^ b[FW-1];
    if (a[FW-2:MW] == '0 || b[FW-2:MW] == '0) return {s, {(FW-1){1'b0}}};
    ma = {1'b1, a[MW-1:0]};
    mb = {1'b1, b[MW-1:0]};
    p  = ma * mb;
    e  = int'(a[FW-2:MW]) + int'(b[FW-2:MW]) - int'(BIAS);
    if (p[2*MW+1])
      return fp_pack(s, e + 1, p[2*MW+1:MW+1], p[MW], |p[MW-1:0]);
    else
      return fp_pack(s, e, p[2*MW:MW], p[MW-1], |p[MW-2:0]);
  endfunction

  // Add with 3 extra low bits (guard, round, sticky) and a carry bit.
  function automatic fp_t fp_add(input fp_t a, input fp_t b);
    fp_t             x, y;
    logic [MW+4:0]   xa, yb, sh, sum;
    int              d, e, lz;
    logic            st;
    if (a[FW-2:MW] == '0) return (b[FW-2:MW] == '0) ? (a & b) : b;
    if (b[FW-2:MW] == '0) return a;
    if (a[FW-2:0] >= b[FW-2:0]) begin x = a; y = b; end
    else                        begin x = b; y = a; end
    xa = {2'b01, x[MW-1:0], 3'b000};
    yb = {2'b01, y[MW-1:0], 3'b000};
    d  = int'(x[FW-2:MW]) - int'(y[FW-2:MW]);
    e  = int'(x[FW-2:MW]);
    if (d > MW + 4) begin
      sh = {{(MW+4){1'b0}}, 1'b1};
    end else begin
      sh = yb >> d;
      st = 1'b0;
      for (int i = 0; i < MW + 5; i++)
        if (i < d && yb[i]) st = 1'b1;
      sh[0] = sh[0] | st;
    end
    if (x[FW-1] == y[FW-1]) begin
      sum = xa + sh;
      if (sum[MW+4]) begin
        sum = {1'b0, sum[MW+4:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = xa - sh;
      if (sum == '0) return FP_ZERO;
      lz = 0;
      for (int i = 0; i <= MW + 3; i++)
        if (sum[i]) lz = MW + 3 - i;
      sum = sum << lz;
      e   = e - lz;
    end
    return fp_pack(x[FW-1], e, sum[MW+3:3], sum[2], sum[1] | sum[0]);
  endfunction

  function automatic fp_t fp_sub(input fp_t a, input fp_t b);
    return fp_add(a, {~b[FW-1], b[FW-2:0]});
  endfunction

  function automatic fp_t fp_div(input fp_t a, input fp_t b);
    logic              s;
    logic [2*MW+3:0]   num, q, r;
    logic [MW:0]       mb;
    int                e;
    s = a[FW-1] ^ b[FW-1];
    if (a[FW-2:MW] == '0) return {s, {(FW-1){1'b0}}};
    if (b[FW-2:MW] == '0) return {s, {EW{1'b1}}, {MW{1'b0}}};
    num = {1'b1, a[MW-1:0], {(MW+3){1'b0}}};
    mb  = {1'b1, b[MW-1:0]};
    q   = num / {{(MW+3){1'b0}}, mb};
    r   = num % {{(MW+3){1'b0}}, mb};
    e   = int'(a[FW-2:MW]) - int'(b[FW-2:MW]) + int'(BIAS);
    // q lies in [2^(MW+2), 2^(MW+4))
    if (q[MW+3])
      return fp_pack(s, e, q[MW+3:3], q[2], (|q[1:0]) | (r != '0));
    else
      return fp_pack(s, e - 1, q[MW+2:2], q[1], q[0] | (r != '0));
  endfunction

  // Square root by the bit-serial (restoring) method, unrolled.
  function automatic fp_t fp_sqrt(input fp_t a);
    logic [2*MW+7:0] op, res, one;
    logic [MW+1:0]   m;
    int              e, er;
    if (a[FW-2:MW] == '0 || a[FW-1]) return FP_ZERO;
    e = int'(a[FW-2:MW]) - int'(BIAS);
    m = {2'b01, a[MW-1:0]};
    if (e % 2 != 0) begin
      m = m << 1;
      e = e - 1;
    end
    er  = e / 2 + int'(BIAS);
    op  = {m, {(MW+6){1'b0}}};           // m * 2^(MW+6)
    res = '0;
    one = {2'b01, {(2*MW+6){1'b0}}};      // 2^(2*MW+6)
    for (int i = 0; i < MW + 4; i++) begin
      if (op >= res + one) begin
        op  = op - (res + one);
        res = (res >> 1) + one;
      end else begin
        res = res >> 1;
      end
      one = one >> 2;
    end
    // res = floor(sqrt(m * 2^(MW+6))), which lies in [2^(MW+3), 2^(MW+4))
    return fp_pack(1'b0, er, res[MW+3:3], res[2], (|res[1:0]) | (op != '0));
  endfunction

  function automatic fp_t fp_half(input fp_t a);
    if (a[FW-2:MW] <= 1) return {a[FW-1], {(FW-1){1'b0}}};
    return {a[FW-1], a[FW-2:MW] - 1'b1, a[MW-1:0]};
  endfunction

  function automatic fp_t fp_abs(input fp_t a);
    return {1'b0, a[FW-2:0]};
  endfunction

  function automatic fp_t fp_apply(input fp_op_e op, input fp_t a, input fp_t b);
    case (op)
      FP_ADD:  return fp_add(a, b);
      FP_SUB:  return fp_sub(a, b);
      FP_MUL:  return fp_mul(a, b);
      FP_DIV:  return fp_div(a, b);
      FP_SQRT: return fp_sqrt(a);
      FP_HALF: return fp_half(a);
      default: return fp_abs(a);
    endcase
  endfunction

endpackage
