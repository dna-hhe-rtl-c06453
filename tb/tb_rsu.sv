// tb_rsu: runs the four sampling tasks (uniform mod t packed in pairs, uniform
// mod q, ternary, centered-binomial error) and compares every word the unit
// writes with samples computed here from a reference SHAKE128 stream (a second,
// separately verified Keccak permutation) using the sampling rules directly.
// It also checks ranges: uniform samples below the modulus, ternary in
// {0, 1, q-1}, errors within +-21.
// SHAKE and rejection sampling follow the paper; the seed layout and samplers
// checked here are this design's choices.
module tb_rsu;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  inst_t task_i;
  cfg_t cfg;
  mem_req_t wr;
  int checks = 0, failures = 0;
  rsu dut (.clk, .rst_n, .start, .task_i, .cfg, .done, .wr);

  // reference permutation
  logic rk_start = 0, rk_busy, rk_done;
  logic [1599:0] rk_in, rk_out;
  keccak_f1600 u_ref (.clk, .rst_n, .start(rk_start), .state_in(rk_in), .state_out(rk_out), .busy(rk_busy), .done(rk_done));

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] got[$];
  always @(posedge clk) if (wr.en && wr.we) got.push_back(wr.wdata);

  task automatic ref_perm(input logic [1599:0] s);
    rk_in = s; rk_start = 1; @(posedge clk); #1; rk_start = 0;
    while (!rk_done) begin @(posedge clk); #1; end
  endtask

  task automatic run(input logic [4:0] op, input field_e f, input int len, input logic [15:0] ctr);
    logic [1599:0] s;
    logic [63:0] exp_w[$];
    logic [55:0] m, smp;
    int kb, lane, n, e;
    logic [27:0] held;
    logic acc;
    m  = (f == F_RUB) ? 56'(cfg.t) : cfg.q[1];
    kb = (f == F_RUB) ? int'(cfg.k_t) : 54;
    s = '0; s[127:0] = cfg.nonce; s[135:128] = 8'd1; s[151:136] = ctr; s[159:152] = 8'h1F; s[167*8 +: 8] = 8'h80;
    ref_perm(s);
    lane = 0; n = 0;
    while (n < len) begin
      logic [63:0] w;
      w = rk_out[64*lane +: 64];
      case (op)
        OP_RSU_TER: begin acc = (w[1:0] != 3); smp = (w[1:0] == 2) ? m - 1 : 56'(w[1:0]); end
        OP_RSU_ERR: begin e = $countones(w[20:0]) - $countones(w[41:21]); acc = 1; smp = (e < 0) ? m - 56'(-e) : 56'(e); end
        default:    begin smp = 56'(w & ((64'd1 << kb) - 1)); acc = smp < m; end
      endcase
      if (acc) begin
        checks++;
        if (op == OP_RSU_ERR && !(smp <= 21 || smp >= m - 21)) failures++;
        if (op == OP_RSU_TER && !(smp <= 1 || smp == m - 1)) failures++;
        if (op == OP_RSU_UNI && smp >= m) failures++;
        if (f == F_RUB) begin
          if (n % 2 == 0) held = smp[27:0]; else exp_w.push_back(64'({smp[27:0], held}));
        end else exp_w.push_back(64'(smp));
        n++;
      end
      lane++;
      if (lane == 21) begin ref_perm(rk_out); lane = 0; end
    end
    // run the unit
    got.delete();
    task_i = '0; task_i.unit = U_RSU; task_i.op = op; task_i.field = f; task_i.dom = 2'd1;
    task_i.buf_c = (f == F_RUB) ? 4'(B_RF2) : 4'(B_RAM3); task_i.addr_c = 16'd5; task_i.len = 16'(len);
    task_i.imm = 40'(ctr);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++;
    if (got.size() != exp_w.size()) begin failures++; $display("count %0d exp %0d", got.size(), exp_w.size()); end
    for (int i = 0; i < exp_w.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] !== exp_w[i]) begin failures++; if (failures < 10) $display("op %0d word %0d got %h exp %h", op, i, got[i], exp_w[i]); end
    end
  endtask

  initial begin
    cfg = '0;
    cfg.nonce = 128'h0123456789abcdef_fedcba9876543210;
    cfg.q[1] = 56'((64'd1 << 54) - (64'd5 << 14) + 1);
    cfg.k_t = 5'd26; cfg.t = 28'd40000003;   // 26-bit t
    task_i = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    run(OP_RSU_UNI, F_RUB, 64, 16'h0007);
    run(OP_RSU_UNI, F_CKKS, 40, 16'h0100);
    run(OP_RSU_TER, F_CKKS, 60, 16'h0200);
    run(OP_RSU_ERR, F_CKKS, 60, 16'h0300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
