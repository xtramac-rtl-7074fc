// xm_ref_pkg: bit-exact reference model of the MAC used by the testbenches.
//
// It works from the number formats alone and shares no code with the RTL: every
// operand is decoded to (sign, integer mantissa M, exponent E) with value M * 2^E,
// the product is formed exactly, the accumulator is added exactly in a 128-bit
// integer and the sum is rounded once to BF16 with round-to-nearest-even. Subnormal
// inputs are zero, results below the normal range flush to signed zero, overflow gives
// infinity. NaN propagates as 7FC0; inf x 0 and inf - inf give NaN. E4M3 all-ones
// exponents are NaN; E2M1 has no special encodings. INT32 accumulation saturates.
package xm_ref_pkg;

  typedef struct {
    bit     sign;
    bit     zero;
    bit     inf;
    bit     nan;
    longint m;     // integer mantissa / magnitude
    int     e;     // exponent of the mantissa's LSB
  } num_t;

  // fmt: 0 BF16, 1 FP8 E4M3, 2 FP4 E2M1, 3 INT4, 4 INT8
  function automatic num_t dec(int fmt, bit [15:0] x);
    num_t n;
    int ex;
    n = '{default: 0};
    case (fmt)
      0: begin
        ex = int'(x[14:7]); n.sign = x[15];
        if (ex == 0) n.zero = 1;
        else if (ex == 255) begin n.inf = (x[6:0] == 0); n.nan = (x[6:0] != 0); end
        else begin n.m = 128 + longint'(x[6:0]); n.e = ex - 127 - 7; end
      end
      1: begin
        ex = int'(x[6:3]); n.sign = x[7];
        if (ex == 0) n.zero = 1;
        else if (ex == 15) n.nan = 1;
        else begin n.m = 8 + longint'(x[2:0]); n.e = ex - 7 - 3; end
      end
      2: begin
        ex = int'(x[2:1]); n.sign = x[3];
        if (ex == 0) n.zero = 1;
        else begin n.m = 2 + longint'(x[0]); n.e = ex - 1 - 1; end
      end
      3: begin
        automatic int v = int'($signed(x[3:0]));
        n.sign = v < 0; n.m = v < 0 ? -v : v; n.zero = (v == 0);
      end
      default: begin
        automatic int v = int'($signed(x[7:0]));
        n.sign = v < 0; n.m = v < 0 ? -v : v; n.zero = (v == 0);
      end
    endcase
    return n;
  endfunction

  function automatic num_t mul(num_t a, num_t b);
    num_t p;
    p = '{default: 0};
    p.sign = a.sign ^ b.sign;
    p.nan  = a.nan | b.nan | (a.inf & b.zero) | (a.zero & b.inf);
    p.inf  = !p.nan && (a.inf | b.inf);
    p.zero = !p.nan && !p.inf && (a.zero | b.zero);
    if (!p.nan && !p.inf && !p.zero) begin
      p.m = a.m * b.m;
      p.e = a.e + b.e;
    end
    return p;
  endfunction

  // Exact sum of two finite numbers rounded once to BF16 (RNE, FTZ, overflow -> inf).
  function automatic bit [15:0] add_round(num_t p, num_t c);
    bit signed [127:0] xp, xc, s;
    bit [127:0] mag, kept, rem, half;
    int ebase, q, sh, ue, be;
    bit rs;
    if (p.zero && c.zero) return {p.sign & c.sign, 15'd0};
    if (p.zero) ebase = c.e - 80;
    else if (c.zero) ebase = p.e - 80;
    else ebase = (p.e > c.e ? p.e : c.e) - 80;
    xp = 0; xc = 0;
    if (!p.zero) xp = (p.e >= ebase) ? (128'(p.m) << (p.e - ebase)) : 128'(1);
    if (!c.zero) xc = (c.e >= ebase) ? (128'(c.m) << (c.e - ebase)) : 128'(1);
    if (p.sign) xp = -xp;
    if (c.sign) xc = -xc;
    s = xp + xc;
    if (s == 0) return 16'h0000;
    rs  = s < 0;
    mag = rs ? -s : s;
    q = 0;
    for (int i = 0; i < 128; i++) if (mag[i]) q = i;
    if (q >= 8) begin
      sh   = q - 7;
      kept = mag >> sh;
      rem  = mag & ((128'(1) << sh) - 1);
      half = 128'(1) << (sh - 1);
      if (rem > half || (rem == half && kept[0])) kept = kept + 1;
      if (kept == 256) begin kept = 128; sh = sh + 1; end
    end else begin
      sh   = q - 7;   // negative: exact left shift
      kept = mag << (7 - q);
    end
    ue = ebase + sh + 7;
    be = ue + 127;
    if (be >= 255) return {rs, 15'h7F80};
    if (be <= 0)   return {rs, 15'd0};
    return {rs, 8'(be), 7'(kept[6:0])};
  endfunction

  function automatic bit [15:0] fp_lane(num_t p, bit [15:0] cbits);
    num_t c = dec(0, cbits);
    if (p.nan || c.nan || (p.inf && c.inf && p.sign != c.sign)) return 16'h7FC0;
    if (p.inf) return {p.sign, 15'h7F80};
    if (c.inf) return {c.sign, 15'h7F80};
    return add_round(p, c);
  endfunction

  function automatic bit [31:0] int_lane(bit [7:0] a, bit [7:0] b, bit [31:0] c);
    longint s = longint'($signed(a)) * longint'($signed(b)) + longint'($signed(c));
    if (s > 64'sd2147483647)  return 32'h7FFF_FFFF;
    if (s < -64'sd2147483648) return 32'h8000_0000;
    return 32'(s);
  endfunction

  // Datatype codes as in the RTL: 0 BF16xBF16, 1 INT4xBF16, 2 FP4xBF16,
  // 3 FP8xFP8, 4 INT8xINT8.
  function automatic int lanes_of(int dt);
    return dt == 3 ? 4 : 2;
  endfunction

  // Product of lane k as the reference number.
  function automatic num_t lane_prod(int dt, bit [31:0] a, bit [15:0] b, int k);
    case (dt)
      0: return mul(dec(0, a[16*k +: 16]), dec(0, b));
      1: return mul(dec(3, 16'(a[4*k +: 4])), dec(0, b));
      2: return mul(dec(2, 16'(a[4*k +: 4])), dec(0, b));
      3: return mul(dec(1, 16'(a[8*(k/2) +: 8])), dec(1, 16'(b[8*(k%2) +: 8])));
      default: return mul(dec(4, 16'(a[8*k +: 8])), dec(4, 16'(b[7:0])));
    endcase
  endfunction

  // Full MAC result P = A x B + C for datatype dt.
  function automatic bit [63:0] mac(int dt, bit [31:0] a, bit [15:0] b, bit [63:0] c);
    bit [63:0] r = 0;
    if (dt == 4) begin
      for (int k = 0; k < 2; k++) r[32*k +: 32] = int_lane(a[8*k +: 8], b[7:0], c[32*k +: 32]);
    end else begin
      for (int k = 0; k < lanes_of(dt); k++) r[16*k +: 16] = fp_lane(lane_prod(dt, a, b, k), c[16*k +: 16]);
    end
    return r;
  endfunction

  // Random BF16 value with exponent near 127 (plus occasional special values).
  function automatic bit [15:0] rand_bf16(int spread);
    bit [15:0] v;
    int r = $urandom_range(0, 99);
    v[15]   = $urandom_range(0, 1);
    v[6:0]  = 7'($urandom);
    v[14:7] = 8'(127 - spread + int'($urandom_range(0, 2 * spread)));
    if (r == 0) v[14:7] = 0;                       // zero / subnormal
    else if (r == 1) begin v[14:7] = 8'hFF; v[6:0] = 0; end   // infinity
    else if (r == 2) v[14:7] = 8'hFF;              // NaN (if fraction nonzero)
    return v;
  endfunction

endpackage
