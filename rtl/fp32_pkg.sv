// fp32_pkg: IEEE-754 single-precision arithmetic used by the stencil engines.
//
// Both stencil kernels work on float32 grid values, 32 of which fill one
// 1024-bit host cache line. This package gives add, subtract, multiply and
// divide as combinational functions, so an engine calls one per lane and
// operation and the whole expression settles in one clock cycle.
//
// Behaviour: round to nearest, ties to even (the IEEE default). Subnormal
// inputs are read as zero and results below the normal range are flushed to
// zero; results above it become infinity; any NaN or infinity operand gives a
// quiet NaN or infinity without the finer IEEE cases. The paper uses float32
// data; rounding mode, subnormal handling and the single-cycle, unpipelined
// form are this design's own choices.
package fp32_pkg;

  typedef logic [31:0] f32_t;

  localparam f32_t F32_ZERO = 32'h0000_0000;
  localparam f32_t F32_ONE  = 32'h3F80_0000;
  localparam f32_t F32_FOUR = 32'h4080_0000;
  localparam f32_t F32_QNAN = 32'h7FC0_0000;

  // Round a 24-bit significand (hidden bit at [23]) with guard, round and
  // sticky bits and pack it; exp is the biased exponent, possibly out of range.
  function automatic f32_t f32_round_pack(input logic sign, input logic signed [11:0] exp,
                                          input logic [23:0] man, input logic g,
                                          input logic r, input logic s);
    logic [24:0] rounded;
    logic signed [11:0] e;
    e = exp;
    rounded = {1'b0, man} + {24'd0, g & (r | s | man[0])};
    if (rounded[24]) begin
      rounded = rounded >> 1;
      e = e + 12'sd1;
    end
    if (e <= 12'sd0) return {sign, 31'd0};
    if (e >= 12'sd255) return {sign, 8'hFF, 23'd0};
    return {sign, e[7:0], rounded[22:0]};
  endfunction

  function automatic logic f32_is_zero(input f32_t a);
    return a[30:23] == 8'd0;
  endfunction

  function automatic logic f32_is_special(input f32_t a);
    return a[30:23] == 8'hFF;
  endfunction

  function automatic f32_t f32_add(input f32_t a, input f32_t b);
    f32_t hi_op, lo_op;
    logic [7:0] diff;
    logic [26:0] mb, ms, shifted;
    logic [27:0] sum;
    logic sticky;
    logic signed [11:0] e;
    int lz;
    if (f32_is_special(a) || f32_is_special(b)) begin
      if (f32_is_special(a) && f32_is_special(b) && (a[31] != b[31])) return F32_QNAN;
      return f32_is_special(a) ? a : b;
    end
    if (f32_is_zero(a)) return f32_is_zero(b) ? {a[31] & b[31], 31'd0} : b;
    if (f32_is_zero(b)) return a;
    if (a[30:0] >= b[30:0]) begin hi_op = a; lo_op = b; end
    else begin hi_op = b; lo_op = a; end
    diff = hi_op[30:23] - lo_op[30:23];
    mb = {1'b1, hi_op[22:0], 3'b000};
    ms = {1'b1, lo_op[22:0], 3'b000};
    if (diff >= 8'd27) begin
      shifted = 27'd1;  // only the sticky bit survives
    end else begin
      shifted = ms >> diff;
      sticky = |(ms & ((27'd1 << diff) - 27'd1));
      shifted[0] = shifted[0] | sticky;
    end
    e = 12'(hi_op[30:23]);
    if (hi_op[31] == lo_op[31]) begin
      sum = {1'b0, mb} + {1'b0, shifted};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 12'sd1;
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, shifted};
      if (sum == 28'd0) return F32_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - 12'(lz);
    end
    return f32_round_pack(hi_op[31], e, sum[26:3], sum[2], sum[1], sum[0]);
  endfunction

  function automatic f32_t f32_sub(input f32_t a, input f32_t b);
    return f32_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic f32_t f32_mul(input f32_t a, input f32_t b);
    logic sign;
    logic [47:0] p;
    logic signed [11:0] e;
    sign = a[31] ^ b[31];
    if (f32_is_special(a) || f32_is_special(b)) begin
      if (f32_is_zero(a) || f32_is_zero(b)) return F32_QNAN;
      return {sign, 8'hFF, 23'd0};
    end
    if (f32_is_zero(a) || f32_is_zero(b)) return {sign, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 12'(a[30:23]) + 12'(b[30:23]) - 12'sd127;
    if (p[47])
      return f32_round_pack(sign, e + 12'sd1, p[47:24], p[23], p[22], |p[21:0]);
    return f32_round_pack(sign, e, p[46:23], p[22], p[21], |p[20:0]);
  endfunction

  function automatic f32_t f32_div(input f32_t a, input f32_t b);
    logic sign;
    logic [49:0] num, q, rem;
    logic signed [11:0] e;
    sign = a[31] ^ b[31];
    if (f32_is_special(a) || f32_is_special(b)) begin
      if (f32_is_special(a) && !f32_is_special(b)) return {sign, 8'hFF, 23'd0};
      if (!f32_is_special(a)) return {sign, 31'd0};
      return F32_QNAN;
    end
    if (f32_is_zero(b)) return f32_is_zero(a) ? F32_QNAN : {sign, 8'hFF, 23'd0};
    if (f32_is_zero(a)) return {sign, 31'd0};
    num = {1'b1, a[22:0], 26'd0};
    q   = num / {26'd0, 1'b1, b[22:0]};
    rem = num % {26'd0, 1'b1, b[22:0]};
    e = 12'(a[30:23]) - 12'(b[30:23]) + 12'sd127;
    if (q[26])
      return f32_round_pack(sign, e, q[26:3], q[2], q[1], q[0] | (rem != 50'd0));
    return f32_round_pack(sign, e - 12'sd1, q[25:2], q[1], q[0], rem != 50'd0);
  endfunction

endpackage
