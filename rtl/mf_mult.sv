// mf_mult: multi-field-adaptive multiplier built from three 30-bit signed
// multipliers (Mul0, Mul1, Mul2) that all three fields share.
//
//  * F_CKKS  : 56 x 56 bit unsigned integer product by Karatsuba on 28-bit
//              halves: Mul0 = lo*lo, Mul1 = hi*hi, Mul2 = (lo+hi)*(lo+hi),
//              p = Mul1<<56 + (Mul2-Mul0-Mul1)<<28 + Mul0 (112 bits). The product
//              is reduced afterwards by barrett_reduce.
//  * F_CPLX  : complex product of two 29-bit signed fixed-point numbers
//              ({real, imag} in bits [57:29] and [28:0]) by the three-multiplier
//              form re = ac - bd, im = (a+b)(c+d) - ac - bd, each scaled down by
//              FRAC fraction bits (arithmetic shift, truncating).
//  * F_RUB   : product modulo the Rubato modulus t (< 2^28) by Barrett: Mul0 =
//              a*b, Mul1 = (x>>k_se)*mu_se, Mul2 = (that>>k_se)*t_se, remainder
//              corrected by 0, t or 2t. The three multiplications run one after
//              the other, one per pipeline stage.
// The Karatsuba sharing, the three multipliers and the Barrett form for Rubato
// follow the paper. The paper speaks of 29-bit signed multipliers; the Karatsuba
// sums of 28-bit halves are 29-bit unsigned, so 30-bit signed ones are used here.
// The value of FRAC and the operand packing are this design's choices.
//
// Timing: three pipeline stages in every field, one operation per cycle. Mul1
// and Mul2 belong to stage 1 for F_CKKS/F_CPLX and to stages 2/3 for F_RUB, so
// the field must not change while operations are in flight.
module mf_mult
  import dna_pkg::*;
#(
  parameter int unsigned FRAC = 26
) (
  input  logic         clk,
  input  field_e       mode,
  input  logic [63:0]  a,
  input  logic [63:0]  b,
  input  logic [27:0]  t_se,
  input  logic [29:0]  mu_se,
  input  logic [4:0]   k_se,
  output logic [111:0] p
);
  function automatic logic signed [59:0] smul(input logic signed [29:0] x, input logic signed [29:0] y);
    return 60'(x) * 60'(y);
  endfunction

  // ---------------- stage 1 operands
  logic signed [29:0] m0a, m0b, m1a, m1b, m2a, m2b;
  logic signed [59:0] p0, p1, p2;
  // stage registers
  logic signed [59:0] s1_p0, s1_p1, s1_p2;
  logic [111:0]       s2_p;
  logic [55:0]        s2_x;          // Rubato a*b carried along
  logic signed [59:0] s2_q1;
  logic [111:0]       s3_p;
  field_e             s1_m, s2_m;
  logic [27:0]        s1_t, s2_t;
  logic [29:0]        s1_mu;
  logic [4:0]         s1_k, s2_k;

  always_comb begin
    // defaults: F_CKKS Karatsuba on 28-bit halves
    m0a = 30'(a[27:0]);                     m0b = 30'(b[27:0]);
    m1a = 30'(a[55:28]);                    m1b = 30'(b[55:28]);
    m2a = 30'(a[27:0]) + 30'(a[55:28]);     m2b = 30'(b[27:0]) + 30'(b[55:28]);
    case (mode)
      F_CPLX: begin
        m0a = 30'($signed(a[57:29]));       m0b = 30'($signed(b[57:29]));
        m1a = 30'($signed(a[28:0]));        m1b = 30'($signed(b[28:0]));
        m2a = 30'($signed(a[57:29])) + 30'($signed(a[28:0]));
        m2b = 30'($signed(b[57:29])) + 30'($signed(b[28:0]));
      end
      F_RUB: begin
        m0a = 30'(a[27:0]);                 m0b = 30'(b[27:0]);
        m1a = 30'(s1_p0[55:0] >> s1_k);     m1b = 30'(s1_mu);          // stage 2
        m2a = 30'(s2_q1[59:0] >>> s2_k);    m2b = 30'(s2_t);           // stage 3
      end
      default: ;
    endcase
    p0 = smul(m0a, m0b);
    p1 = smul(m1a, m1b);
    p2 = smul(m2a, m2b);
  end

  // ---------------- stage 2 combination
  logic signed [60:0] mid;
  logic signed [60:0] re_full, im_full;
  logic [111:0]       ckks_p;
  logic signed [28:0] re_o, im_o;
  always_comb begin
    mid     = 61'(s1_p2) - 61'(s1_p0) - 61'(s1_p1);
    ckks_p  = (112'(s1_p1[55:0]) << 56) + (112'(mid[57:0]) << 28) + 112'(s1_p0[55:0]);
    re_full = 61'(s1_p0) - 61'(s1_p1);
    im_full = mid;
    re_o    = 29'(re_full >>> FRAC);
    im_o    = 29'(im_full >>> FRAC);
  end

  // ---------------- stage 3 Rubato correction
  logic [31:0] r_rub, r_sel;
  always_comb begin
    r_rub = 32'(s2_x) - 32'(p2[55:0]);
    if (r_rub >= 32'({s2_t, 1'b0}))  r_sel = r_rub - 32'({s2_t, 1'b0});
    else if (r_rub >= 32'(s2_t))     r_sel = r_rub - 32'(s2_t);
    else                             r_sel = r_rub;
  end

  always_ff @(posedge clk) begin
    // stage 1
    s1_p0 <= p0;
    s1_p1 <= p1;
    s1_p2 <= p2;
    s1_m  <= mode;
    s1_t  <= t_se;
    s1_mu <= mu_se;
    s1_k  <= k_se;
    // stage 2
    s2_m  <= s1_m;
    s2_t  <= s1_t;
    s2_k  <= s1_k;
    s2_x  <= s1_p0[55:0];
    s2_q1 <= p1;
    case (s1_m)
      F_CPLX:  s2_p <= 112'({re_o, im_o});
      default: s2_p <= ckks_p;
    endcase
    // stage 3
    if (s2_m == F_RUB) s3_p <= 112'(r_sel[27:0]);
    else               s3_p <= s2_p;
  end

  assign p = s3_p;
endmodule
