// tb_mf_mult: drives random operands in each of the three fields, one per cycle,
// and compares every result, three cycles later, with a product computed
// directly: the full 112-bit integer product, the truncated fixed-point complex
// product, and a*b mod t for Rubato moduli of 25, 26 and 28 bits.
// Field widths and the 2^26 fixed-point precision follow the paper; the
// three-cycle latency is this design's.
module tb_mf_mult;
  import dna_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  field_e mode;
  logic [63:0] a, b;
  logic [27:0] t_se;
  logic [29:0] mu_se;
  logic [4:0]  k_se;
  logic [111:0] p;
  int checks = 0, failures = 0;
  mf_mult dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [111:0] expq[$];
  logic         chk_en = 0;
  logic [111:0] pipe_e [4];
  logic         pipe_v [4];

  function automatic logic [111:0] ref_mul(field_e m, logic [63:0] x, logic [63:0] y);
    logic signed [63:0] ar, ai, br, bi, re, im;
    case (m)
      F_CKKS: return 112'(x[55:0]) * 112'(y[55:0]);
      F_CPLX: begin
        ar = 64'($signed(x[57:29])); ai = 64'($signed(x[28:0]));
        br = 64'($signed(y[57:29])); bi = 64'($signed(y[28:0]));
        re = (ar*br - ai*bi) >>> 26;
        im = (ar*bi + ai*br) >>> 26;
        return 112'({re[28:0], im[28:0]});
      end
      default: return 112'((64'(x[27:0]) * 64'(y[27:0])) % 64'(t_se));
    endcase
  endfunction

  task automatic run(field_e m, int cnt);
    mode = m;
    for (int i = 0; i < cnt; i++) begin
      case (m)
        F_CKKS: begin a = 64'({$urandom, $urandom}) & 64'h00ff_ffff_ffff_ffff; b = 64'({$urandom, $urandom}) & 64'h00ff_ffff_ffff_ffff; end
        F_CPLX: begin a = 64'({$urandom, $urandom}) & 64'h03ff_ffff_ffff_ffff; b = 64'({$urandom, $urandom}) & 64'h03ff_ffff_ffff_ffff; end
        default: begin a = 64'($urandom % t_se); b = 64'($urandom % t_se); end
      endcase
      if (i == 0 && m == F_CKKS) begin a = 64'h00ff_ffff_ffff_ffff; b = a; end
      if (i == 1 && m == F_RUB)  begin a = 64'(t_se - 1); b = a; end
      pipe_e[0] <= ref_mul(m, a, b); pipe_v[0] <= 1;
      @(posedge clk); #1;
    end
    pipe_v[0] <= 0;
    repeat (4) @(posedge clk); #1;
  endtask

  always @(posedge clk) begin
    pipe_e[1] <= pipe_e[0]; pipe_e[2] <= pipe_e[1]; pipe_e[3] <= pipe_e[2];
    pipe_v[1] <= pipe_v[0]; pipe_v[2] <= pipe_v[1]; pipe_v[3] <= pipe_v[2];
    if (pipe_v[3]) begin
      checks++;
      if (p !== pipe_e[3]) begin
        failures++;
        if (failures < 10) $display("MISMATCH mode %0d got %h exp %h", mode, p, pipe_e[3]);
      end
    end
  end

  initial begin
    pipe_v[0] = 0; pipe_v[1] = 0; pipe_v[2] = 0; pipe_v[3] = 0;
    mode = F_CKKS; a = 0; b = 0; t_se = 28'd1; mu_se = 0; k_se = 0;
    repeat (2) @(posedge clk); #1;
    run(F_CKKS, 2000);
    run(F_CPLX, 2000);
    for (int s = 0; s < 3; s++) begin
      k_se  = (s == 0) ? 5'd26 : (s == 1) ? 5'd25 : 5'd28;
      t_se  = 28'((1 << (k_se - 1)) + ($urandom % (1 << (k_se - 1))));
      mu_se = 30'((64'(1) << (2 * k_se)) / 64'(t_se));
      run(F_RUB, 2000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
