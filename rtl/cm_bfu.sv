// cm_bfu: compact multi-field-adaptive butterfly unit.
//
// One multiplier (mf_mult), one DSP-efficient reduction (barrett_reduce) and
// field-adaptive adder, subtractor and halving logic serve three fields:
// Z_q of RNS-CKKS (residues below a 54-bit q), Z_t of Rubato (t below 2^28) and
// complex numbers as two 29-bit signed fixed-point halves {real, imag}.
// Operations (op):
//   BF_CT  : out0 = in0 + in1*in2,  out1 = in0 - in1*in2   (Cooley-Tukey, in2 = twiddle)
//   BF_GS  : out0 = (in0+in1)/2,    out1 = ((in0-in1)/2)*in2 (Gentleman-Sande; the
//            halving folds the 1/N of an inverse transform into its stages)
//   BF_MUL : out0 = in0*in1        BF_ADD : out0 = in0+in1     BF_SUB : out0 = in0-in1
//   BF_MAC : out0 = in0*in1 + in2  (the Rubato multiply-accumulate)
// Halving in Z_q is x/2 or (x+q)/2; in the complex field an arithmetic shift.
// The set of operations and fields and the use of the 1/2 units follow the
// paper; the latency and the exact sharing of adders are this design's choice.
//
// Timing: fully pipelined, one operation per cycle. The result appears on
// out0/out1 with out_valid LAT cycles after in_valid: 7 for F_CKKS (3 multiplier +
// 4 reduction stages), 3 for F_CPLX and F_RUB (the final addition is
// combinational after the last register). The field must stay constant while
// operations are in flight.
module cm_bfu
  import dna_pkg::*;
#(
  parameter int unsigned K = 54
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  bf_op_e      op,
  input  field_e      mode,
  input  logic [63:0] in0,
  input  logic [63:0] in1,
  input  logic [63:0] in2,
  input  logic [55:0] q,
  input  logic [9:0]  bnd,
  input  logic [11:0] dprime,
  input  logic [27:0] t_se,
  input  logic [29:0] mu_se,
  input  logic [4:0]  k_se,
  output logic        out_valid,
  output logic [63:0] out0,
  output logic [63:0] out1
);
  localparam int unsigned MAXLAT = 7;

  // modulus of the finite field in use (0 for the complex field)
  logic [56:0] modv;
  assign modv = (mode == F_RUB) ? 57'(t_se) : 57'(q[K-1:0]);

  function automatic logic [63:0] f_add(field_e m, logic [56:0] md, logic [63:0] x, logic [63:0] y);
    logic [57:0] s;
    logic [28:0] re, im;
    if (m == F_CPLX) begin
      re = x[57:29] + y[57:29];
      im = x[28:0] + y[28:0];
      return 64'({re, im});
    end
    s = 58'(x[56:0]) + 58'(y[56:0]);
    if (s >= 58'(md)) s = s - 58'(md);
    return 64'(s);
  endfunction

  function automatic logic [63:0] f_sub(field_e m, logic [56:0] md, logic [63:0] x, logic [63:0] y);
    logic [57:0] s;
    logic [28:0] re, im;
    if (m == F_CPLX) begin
      re = x[57:29] - y[57:29];
      im = x[28:0] - y[28:0];
      return 64'({re, im});
    end
    s = 58'(x[56:0]) - 58'(y[56:0]);
    if (x[56:0] < y[56:0]) s = s + 58'(md);
    return 64'(s);
  endfunction

  function automatic logic [63:0] f_half(field_e m, logic [56:0] md, logic [63:0] x);
    logic [57:0] s;
    if (m == F_CPLX)
      return 64'({$signed(x[57:29]) >>> 1, $signed(x[28:0]) >>> 1});
    s = x[0] ? 58'(x[56:0]) + 58'(md) : 58'(x[56:0]);
    return 64'(s >> 1);
  endfunction

  // ---------------- issue stage: operands of the multiplier and the side path
  logic [63:0] ma, mb, side;
  always_comb begin
    ma = in0; mb = in1; side = in2;
    case (op)
      BF_CT:  begin ma = in1; mb = in2; side = in0; end
      BF_GS:  begin ma = f_half(mode, modv, f_sub(mode, modv, in0, in1)); mb = in2;
                    side = f_half(mode, modv, f_add(mode, modv, in0, in1)); end
      BF_ADD: side = f_add(mode, modv, in0, in1);
      BF_SUB: side = f_sub(mode, modv, in0, in1);
      default: ;   // BF_MUL, BF_MAC: ma = in0, mb = in1, side = in2
    endcase
  end

  logic [111:0] prod;
  mf_mult u_mul (
    .clk, .mode, .a(ma), .b(mb), .t_se, .mu_se, .k_se, .p(prod)
  );

  logic        red_v;
  logic [K-1:0] red;
  barrett_reduce #(.K(K)) u_red (
    .clk, .rst_n, .in_valid(1'b1), .z(prod[2*K-1:0]), .bnd, .dprime, .q(q[K-1:0]),
    .out_valid(red_v), .res(red)
  );

  // ---------------- delay lines for the side operand, op and valid
  logic [63:0]  side_d [MAXLAT];
  bf_op_e       op_d   [MAXLAT];
  logic [MAXLAT-1:0] v_d;
  logic [MAXLAT-1:0] c_d;   // operation was issued in the Z_q field (long pipeline)
  always_ff @(posedge clk) begin
    side_d[0] <= side;
    op_d[0]   <= op;
    for (int i = 1; i < MAXLAT; i++) begin
      side_d[i] <= side_d[i-1];
      op_d[i]   <= op_d[i-1];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin v_d <= '0; c_d <= '0; end
    else begin
      v_d <= {v_d[MAXLAT-2:0], in_valid};
      c_d <= {c_d[MAXLAT-2:0], mode == F_CKKS};
    end
  end

  // ---------------- output stage
  logic [63:0] pr, sd;
  bf_op_e      o_op;
  logic        o_v;
  always_comb begin
    if (mode == F_CKKS) begin
      pr = 64'(red); sd = side_d[6]; o_op = op_d[6]; o_v = v_d[6] && c_d[6];
    end else begin
      pr = (mode == F_RUB) ? 64'(prod[27:0]) : 64'(prod[57:0]);
      sd = side_d[2]; o_op = op_d[2]; o_v = v_d[2] && !c_d[2];
    end
    out1 = '0;
    case (o_op)
      BF_CT:  begin out0 = f_add(mode, modv, sd, pr); out1 = f_sub(mode, modv, sd, pr); end
      BF_GS:  begin out0 = sd; out1 = pr; end
      BF_MUL: out0 = pr;
      BF_MAC: out0 = f_add(mode, modv, pr, sd);
      default: out0 = sd;   // BF_ADD, BF_SUB
    endcase
  end
  assign out_valid = o_v;

  // The reduction pipeline runs every cycle; its valid output is not needed.
  logic unused_red_v;
  assign unused_red_v = red_v;
endmodule
