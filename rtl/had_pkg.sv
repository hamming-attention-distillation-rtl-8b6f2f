// had_pkg: types, default sizes and arithmetic helpers shared by the binary-key
// attention head.
//
// Default sizes follow the evaluated hardware point of the method: one attention
// head whose query is 1 x 1024 and whose key matrix is 1024 x 256 (head
// dimension 1024, 256 keys of context), with the top 30 logits kept per query.
// The lane count (elements moved per cycle on the load and value paths) is this
// design's own choice.
//
// Number formats used across the head:
//   * bf16_t   : bfloat16 (1 sign, 8 exponent, 7 fraction bits) for Q, K, V and
//                the output.
//   * scores   : signed +-1 dot products Q.K, range [-DK, DK].
//   * t (Q16)  : non-negative softmax exponents in the base-2 domain,
//                t = (s_max - s) * log2(e) / sqrt(DK), 16 fraction bits.
//   * weights and probabilities: unsigned Q16, 1.0 = 65536.
//   * accumulators: IEEE single layout, no denormals, truncating adds.
package had_pkg;

  localparam int unsigned DK_DEF    = 1024; // head dimension d_k
  localparam int unsigned CTX_DEF   = 256;  // keys / value rows held
  localparam int unsigned TOPN_DEF  = 30;   // logits kept per query
  localparam int unsigned LANES_DEF = 64;   // elements per load word / AV lanes

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // log2(e) in Q24.
  localparam int unsigned LOG2E_Q24 = 24204406;

  // Integer square root (floor), used at elaboration only.
  function automatic int unsigned isqrt(input int unsigned x);
    int unsigned r;
    r = 0;
    for (int unsigned b = 32'h8000; b != 0; b = b >> 1) begin
      if ((r + b) * (r + b) <= x) r = r + b;
    end
    return r;
  endfunction

  // log2(e)/sqrt(dk) in Q16, rounded. 2955 for dk = 1024.
  function automatic int unsigned scale_q16(input int unsigned dk);
    int unsigned q;
    q = LOG2E_Q24 / isqrt(dk);
    return (q + 128) >> 8;
  endfunction

  // 2^(-i/16) in Q16 for i = 0..16: round(65536 * 2^(-i/16)).
  function automatic logic [16:0] exp2_knot(input logic [4:0] i);
    case (i)
      5'd0:  return 17'd65536;
      5'd1:  return 17'd62757;
      5'd2:  return 17'd60097;
      5'd3:  return 17'd57549;
      5'd4:  return 17'd55109;
      5'd5:  return 17'd52773;
      5'd6:  return 17'd50535;
      5'd7:  return 17'd48393;
      5'd8:  return 17'd46341;
      5'd9:  return 17'd44376;
      5'd10: return 17'd42495;
      5'd11: return 17'd40693;
      5'd12: return 17'd38968;
      5'd13: return 17'd37316;
      5'd14: return 17'd35734;
      5'd15: return 17'd34219;
      default: return 17'd32768;
    endcase
  endfunction

  // 2^(-t) for t >= 0 in Q16 (t has 16 fraction bits); result Q16.
  // The fraction is split into 16 segments with linear interpolation between
  // knots (error below 0.03 %), the integer part becomes a right shift.
  function automatic logic [16:0] exp2_neg_q16(input logic [31:0] t);
    logic [15:0] k;
    logic [3:0]  seg;
    logic [11:0] r;
    logic [16:0] y0, y1;
    logic [28:0] dy;
    logic [16:0] m;
    k   = t[31:16];
    seg = t[15:12];
    r   = t[11:0];
    y0  = exp2_knot({1'b0, seg});
    y1  = exp2_knot({1'b0, seg} + 5'd1);
    dy  = 29'(y0 - y1) * 29'(r);
    m   = y0 - 17'(dy >> 12);
    if (k > 16) return '0;
    return m >> k;
  endfunction

  // Product of a Q16 probability and a bf16 value, as fp32 (truncated).
  function automatic fp32_t prod_to_fp32(input bf16_t v, input logic [16:0] p);
    logic [24:0] mp;
    logic [22:0] frac;
    int          lead;
    int          e;
    if (v[14:7] == 8'd0 || p == '0) return '0;
    mp   = {1'b1, v[6:0]} * p;
    lead = 0;
    for (int i = 0; i < 25; i++) if (mp[i]) lead = i;
    e = int'(v[14:7]) - 23 + lead;
    if (e <= 0) return '0;
    if (e >= 255) return {v[15], 8'hFE, 23'h7FFFFF};
    frac = 23'((mp << (24 - lead)) >> 1);  // bits below the leading one
    return {v[15], 8'(e), frac};
  endfunction

  // fp32 addition without denormals; the result is truncated toward zero.
  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;
    logic [27:0] sum;
    int          ex, d, lz;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    if (x[30:23] == 8'd0) return '0;
    if (y[30:23] == 8'd0) return x;
    ex = int'(x[30:23]);
    d  = ex - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    my = (d > 26) ? '0 : (my >> d);
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == '0) return '0;
    if (sum[27]) begin
      sum = sum >> 1;
      ex  = ex + 1;
    end else begin
      lz = 0;
      for (int i = 0; i < 27; i++) if (sum[i]) lz = 26 - i;
      sum = sum << lz;
      ex  = ex - lz;
    end
    if (ex <= 0) return '0;
    if (ex >= 255) return {x[31], 8'hFE, 23'h7FFFFF};
    return {x[31], 8'(ex), sum[25:3]};
  endfunction

  // fp32 to bf16, round to nearest even.
  function automatic bf16_t fp32_to_bf16(input fp32_t a);
    bf16_t u;
    u = a[31:16];
    if (a[15] && (a[14:0] != '0 || a[16])) u = u + 16'd1;
    return u;
  endfunction

endpackage
