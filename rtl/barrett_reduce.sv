// barrett_reduce: DSP-efficient Barrett reduction for RNS-CKKS moduli.
//
// Each modulus has the form q = 2^K - 2N*bnd + 1 with a 10-bit bnd, and its
// Barrett constant mu = floor(2^2K / q) then has the form 2^K + {dprime,12'b0} - 1.
// Both constant multiplications therefore shrink to a K x 12 and a K x 10 bit
// product plus shifts and additions:
//   m0 * mu  = (m0 << K) + ((m0 * dprime) << 12) - m0       (m0 = z >> K)
//   qe * q   = (qe << K) - ((qe * bnd) << log2(2N)) + qe    (qe = m0*mu >> K)
// The remainder r = z - qe*q lies below 3q and is brought into [0, q) by
// choosing r, r - q or r - 2q. This structure and the widths K, 12 and 10 follow
// the paper; the paper's comparators are drawn as ">q" and ">2q", here r >= q and
// r >= 2q are used so that r == q also reduces to 0.
//
// Interface: z (< q^2), bnd, dprime and q enter with in_valid; res appears with
// out_valid four cycles later (four pipeline stages: mu product, q product,
// subtraction, correction). The stage boundaries are this design's choice.
module barrett_reduce #(
  parameter int unsigned K       = 54,
  parameter int unsigned LOG2_2N = 14,
  parameter int unsigned BND_W   = 10,
  parameter int unsigned DP_W    = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [2*K-1:0]   z,
  input  logic [BND_W-1:0] bnd,
  input  logic [DP_W-1:0]  dprime,
  input  logic [K-1:0]     q,
  output logic             out_valid,
  output logic [K-1:0]     res
);
  // ---- stage 1: m0 * mu
  logic [K-1:0]       m0;
  logic [2*K+1:0]     mu_prod;
  assign m0 = z[2*K-1:K];
  always_comb begin
    mu_prod = ({2'b0, m0, {K{1'b0}}})
            + ({(2*K+2){1'b0}} | ((2*K+2)'(m0) * (2*K+2)'(dprime)) << 12)
            - (2*K+2)'(m0);
  end

  logic [K-1:0]     s1_qe;
  logic [2*K-1:0]   s1_z;
  logic [K-1:0]     s1_q;
  logic [BND_W-1:0] s1_bnd;
  logic             s1_v;
  always_ff @(posedge clk) begin
    s1_qe  <= mu_prod[2*K-1:K];
    s1_z   <= z;
    s1_q   <= q;
    s1_bnd <= bnd;
  end

  // ---- stage 2: qe * q
  logic [2*K+1:0] q_prod;
  always_comb begin
    q_prod = ({2'b0, s1_qe, {K{1'b0}}})
           - (((2*K+2)'(s1_qe) * (2*K+2)'(s1_bnd)) << LOG2_2N)
           + (2*K+2)'(s1_qe);
  end

  logic [2*K-1:0] s2_qprod, s2_z;
  logic [K-1:0]   s2_q;
  logic           s2_v;
  always_ff @(posedge clk) begin
    s2_qprod <= q_prod[2*K-1:0];
    s2_z     <= s1_z;
    s2_q     <= s1_q;
  end

  // ---- stage 3: r = z - qe*q. The paper draws this value K+1 bits wide, but
  // r can reach 2q + (2^K - q) >= 2^(K+1) for the largest bnd (found with
  // z = 0xb6b8e0ee48b887f99a5bae03960, bnd = 1023), so K+2 bits are kept.
  logic [2*K-1:0] r_full;   // upper bits are zero for z < q^2
  assign r_full = s2_z - s2_qprod;

  logic [K+1:0] s3_r;
  logic [K-1:0] s3_q;
  logic         s3_v;
  always_ff @(posedge clk) begin
    s3_r <= r_full[K+1:0];
    s3_q <= s2_q;
  end

  // ---- stage 4: subtract 0, q or 2q
  logic [K+1:0] q1, q2;
  logic [K+1:0] r_sel;
  always_comb begin
    q1 = {2'b0, s3_q};
    q2 = {1'b0, s3_q, 1'b0};
    if (s3_r >= q2)      r_sel = s3_r - q2;
    else if (s3_r >= q1) r_sel = s3_r - q1;
    else                         r_sel = s3_r;
  end

  always_ff @(posedge clk) res <= r_sel[K-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {s1_v, s2_v, s3_v, out_valid} <= '0;
    else        {s1_v, s2_v, s3_v, out_valid} <= {in_valid, s1_v, s2_v, s3_v};
  end
endmodule
