// tb_cm_bfu: issues random butterflies (CT, GS), point-wise Mul/Add/Sub and MAC
// operations in each field, one per cycle, and compares out0/out1 with results
// worked out with plain modular arithmetic (x*inv2 mod q for the halving) or
// with integer complex arithmetic. It also checks the latency of each field:
// 7 cycles for Z_q, 3 for the complex field and for Z_t.
// The operation set and fields come from the paper; the expected latencies are
// this design's.
module tb_cm_bfu;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  bf_op_e op;
  field_e mode;
  logic [63:0] in0, in1, in2, out0, out1;
  logic [55:0] q;
  logic [9:0]  bnd;
  logic [11:0] dprime;
  logic [27:0] t_se;
  logic [29:0] mu_se;
  logic [4:0]  k_se;
  int checks = 0, failures = 0, cyc = 0;
  cm_bfu dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] e0q[$], e1q[$];
  int          etq[$];
  int          lat;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [63:0] e0, e1; int t0;
    e0 = e0q.pop_front(); e1 = e1q.pop_front(); t0 = etq.pop_front();
    checks++;
    if (out0 !== e0 || out1 !== e1) begin
      failures++;
      if (failures < 10) $display("MISMATCH mode %0d op %0d: %h %h exp %h %h", mode, op, out0, out1, e0, e1);
    end
    checks++;
    if (cyc - t0 != lat) begin failures++; if (failures < 10) $display("LATENCY %0d", cyc - t0); end
  end

  function automatic logic [127:0] md();
    return (mode == F_RUB) ? 128'(t_se) : 128'(q);
  endfunction
  function automatic logic [63:0] mmul(logic [63:0] x, logic [63:0] y);
    logic signed [63:0] ar, ai, br, bi, re, im;
    if (mode != F_CPLX) return 64'((128'(x) * 128'(y)) % md());
    ar = 64'($signed(x[57:29])); ai = 64'($signed(x[28:0]));
    br = 64'($signed(y[57:29])); bi = 64'($signed(y[28:0]));
    re = (ar*br - ai*bi) >>> 26; im = (ar*bi + ai*br) >>> 26;
    return 64'({re[28:0], im[28:0]});
  endfunction
  function automatic logic [63:0] madd(logic [63:0] x, logic [63:0] y);
    logic [28:0] re, im;
    if (mode != F_CPLX) return 64'((128'(x) + 128'(y)) % md());
    re = x[57:29] + y[57:29]; im = x[28:0] + y[28:0];
    return 64'({re, im});
  endfunction
  function automatic logic [63:0] msub(logic [63:0] x, logic [63:0] y);
    logic [28:0] re, im;
    if (mode != F_CPLX) return 64'((128'(x) + md() - 128'(y)) % md());
    re = x[57:29] - y[57:29]; im = x[28:0] - y[28:0];
    return 64'({re, im});
  endfunction
  function automatic logic [63:0] mhalf(logic [63:0] x);
    if (mode != F_CPLX) return 64'((128'(x) * ((md() + 1) / 2)) % md());
    return 64'({$signed(x[57:29]) >>> 1, $signed(x[28:0]) >>> 1});
  endfunction

  function automatic logic [63:0] rnd();
    if (mode == F_CPLX) return 64'({$urandom, $urandom}) & 64'h03ff_ffff_ffff_ffff;
    return 64'(128'({$urandom, $urandom}) % md());
  endfunction

  task automatic run(field_e m, int cnt);
    logic [63:0] e0, e1;
    mode = m;
    lat = (m == F_CKKS) ? 7 : 3;
    for (int i = 0; i < cnt; i++) begin
      op = bf_op_e'($urandom_range(0, 5));
      in0 = rnd(); in1 = rnd(); in2 = rnd();
      e1 = 0;
      case (op)
        BF_CT:  begin e0 = madd(in0, mmul(in1, in2)); e1 = msub(in0, mmul(in1, in2)); end
        BF_GS:  begin e0 = mhalf(madd(in0, in1)); e1 = mmul(mhalf(msub(in0, in1)), in2); end
        BF_MUL: e0 = mmul(in0, in1);
        BF_ADD: e0 = madd(in0, in1);
        BF_SUB: e0 = msub(in0, in1);
        default: e0 = madd(mmul(in0, in1), in2);
      endcase
      e0q.push_back(e0); e1q.push_back(e1); etq.push_back(cyc);
      in_valid = 1;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (10) @(posedge clk); #1;
  endtask

  initial begin
    logic [127:0] mu;
    op = BF_ADD; mode = F_CKKS; in0 = 0; in1 = 0; in2 = 0;
    bnd = 10'd3; q = 56'((128'(1) << 54) - (128'(bnd) << 14) + 1);
    mu = (128'(1) << 108) / 128'(q);
    dprime = 12'((mu - (128'(1) << 54) + 1) >> 12);
    k_se = 5'd26; t_se = 28'd50331653; mu_se = 30'((64'(1) << 52) / 64'(t_se));
    repeat (3) @(posedge clk); rst_n = 1; #1;
    run(F_CKKS, 3000);
    run(F_CPLX, 3000);
    run(F_RUB, 3000);
    checks++;
    if (e0q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
