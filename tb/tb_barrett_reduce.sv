// tb_barrett_reduce: streams products a*b (a, b < q) of random moduli of the form
// q = 2^54 - 2N*bnd + 1 through the reduction unit, one per cycle, and compares
// each result with z % q computed with wide arithmetic. It also checks that
// floor(2^108/q) - 2^54 + 1 has twelve zero low bits (the form the unit relies on)
// and that every result arrives exactly four cycles after its input.
// Moduli, the constant form and the four-stage latency come from the paper and
// this design; operand choice is random plus the extremes 0 and (q-1)^2.
module tb_barrett_reduce;
  localparam int K = 54;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [2*K-1:0] z;
  logic [9:0] bnd;
  logic [11:0] dprime;
  logic [K-1:0] q, res;
  int checks = 0, failures = 0, cyc = 0;
  barrett_reduce dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [K-1:0] exp_q[$];
  int           exp_t[$];
  logic [2*K-1:0] exp_z[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    logic [K-1:0] e; int t0; logic [2*K-1:0] zz;
    e = exp_q.pop_front(); t0 = exp_t.pop_front(); zz = exp_z.pop_front();
    checks++;
    if (res !== e) begin failures++; if (failures < 10) $display("MISMATCH got %h exp %h z %h", res, e, zz); end
    checks++;
    if (cyc - t0 != 4) begin failures++; $display("LATENCY %0d", cyc - t0); end
  end

  task automatic set_mod(input logic [9:0] b);
    logic [127:0] mu, delta;
    bnd = b;
    q = K'((128'(1) << K) - (128'(b) << 14) + 1);
    mu = (128'(1) << (2*K)) / 128'(q);
    delta = mu - (128'(1) << K) + 1;
    checks++;
    if (delta[11:0] != 0 || delta >= (128'(1) << 24)) begin failures++; $display("delta form broken %h", delta); end
    dprime = delta[23:12];
  endtask

  task automatic push(input logic [2*K-1:0] zz);
    z = zz; in_valid = 1;
    exp_q.push_back(K'((128'(zz)) % 128'(q)));
    exp_t.push_back(cyc);
    exp_z.push_back(zz);
    @(posedge clk); #1;
  endtask

  initial begin
    logic [K-1:0] a, b;
    z = '0; bnd = '0; dprime = '0; q = '1;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int m = 0; m < 40; m++) begin
      set_mod((m == 0) ? 10'd1 : (m == 1) ? 10'h3ff : 10'($urandom_range(1, 1023)));
      push('0); push(2*K'(q)); push((2*K)'(q) * (2*K)'(q - 1)); push((2*K)'(q - 1) * (2*K)'(q - 1));
      for (int i = 0; i < 500; i++) begin
        a = K'({$urandom, $urandom}) % q; b = K'({$urandom, $urandom}) % q;
        push((2*K)'(a) * (2*K)'(b));
      end
      in_valid = 0;
      repeat (6) @(posedge clk); #1;
    end
    repeat (8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
