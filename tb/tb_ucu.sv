// tb_ucu: self-checking testbench of the Unified Crypto Unit.
// A behavioural buffer store serves the ten request lines. The testbench checks:
//  - NTT of a random polynomial (length 16, 64 and 128) against direct evaluation
//    a(psi^(2*brv(k)+1)) in bit-reversed order, and INTT(NTT(a)) == a;
//  - FFT then IFFT of random complex fixed-point data returns the input within a
//    few LSBs;
//  - point-wise Mul/Add/Sub over Z_q (two and one element per cycle) and over Z_t;
//  - Rubato MixColumns, MixRows and Feistel for v = 4, 6 and 8 against a direct
//    matrix-vector reference;
//  - whole Rubato round functions (Feistel, MixRows, MixColumns, ARK) chained
//    r+1 times, the last without Feistel, for the three parameter sets, with their cycle counts;
//  - no buffer bank sees more requests in a cycle than it has ports.
// The operations and the two-BFU parallelism follow the paper; the request-line
// numbering, twiddle layout and schedules are this design's choices.
module tb_ucu;
  import dna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start = 1'b0, busy, done;
  inst_t            tk;
  cfg_t             cfg;
  mem_req_t [9:0]   req;
  logic [9:0][63:0] rdata;
  int checks = 0, failures = 0;
  typedef logic [4:0] ucu_op_t;

  ucu dut (.clk, .rst_n, .start, .task_i (tk), .cfg, .busy, .done, .req, .rdata);
  tb_mem_model #(.NP (10)) mem (.clk, .req, .rdata);

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  // bank port check
  always @(posedge clk) if (rst_n) begin
    int cnt [16][2];
    foreach (cnt[a, b]) cnt[a][b] = 0;
    for (int k = 0; k < 10; k++)
      if (req[k].en) cnt[req[k].id][((req[k].id == B_RAM3) || (req[k].id == B_RAM4)) ? int'(^req[k].addr) : 0]++;
    foreach (cnt[a, b]) if (cnt[a][b] > ((a >= int'(B_RF0) && a <= int'(B_RF2)) ? 4 : 2)) begin
      failures++;
      $display("bank overuse id=%0d bank=%0d n=%0d", a, b, cnt[a][b]);
    end
  end

  logic [55:0] q;
  logic [127:0] qq;
  function automatic logic [63:0] mmul(logic [63:0] a, logic [63:0] b);
    return 64'((128'(a) * 128'(b)) % qq);
  endfunction
  function automatic logic [63:0] mpow(logic [63:0] a, logic [127:0] e);
    logic [63:0] r = 64'd1;
    while (e != 0) begin
      if (e[0]) r = mmul(r, a);
      a = mmul(a, a);
      e >>= 1;
    end
    return r;
  endfunction
  function automatic int brv(int x, int bits);
    int r = 0;
    for (int k = 0; k < bits; k++) r |= ((x >> k) & 1) << (bits - 1 - k);
    return r;
  endfunction

  task automatic run(input inst_t t, output int cyc);
    tk = t;
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
  endtask

  function automatic inst_t mk(ucu_op_t op, field_e f, int ba, int bb, int bc,
                               int aa, int ab, int ac, int len);
    inst_t t = '0;
    t.unit = U_UCU; t.op = 5'(op); t.field = f; t.dom = 2'd1;
    t.buf_a = 4'(ba); t.buf_b = 4'(bb); t.buf_c = 4'(bc);
    t.addr_a = 16'(aa); t.addr_b = 16'(ab); t.addr_c = 16'(ac); t.len = 16'(len);
    return t;
  endfunction

  // ---------------- NTT
  task automatic test_ntt(int L);
    int lg = $clog2(L), cyc, res_id;
    logic [63:0] psi, psii, a[], x;
    logic [127:0] e;
    psi = 0;
    for (int g = 2; g < 200 && psi == 0; g++) begin
      x = mpow(64'(g), (qq - 1) / 128'(2 * L));
      if (mpow(x, 128'(L)) == 64'(qq - 1)) psi = x;
    end
    checks++;
    if (psi == 0) begin failures++; $display("no 2L-th root of unity found"); end
    psii = mpow(psi, 128'(2 * L - 1));
    a = new[L];
    for (int k = 0; k < L; k++) begin
      a[k] = 64'({$urandom, $urandom}) % 64'(qq);
      mem.poke(B_RAM3, k, a[k]);
      mem.poke(B_RAM6, k, mpow(psi, 128'(brv(k, lg))));
      mem.poke(B_RAM6, L + k, mpow(psii, 128'(brv(k, lg))));
    end
    run(mk(OP_UCU_NTT, F_CKKS, B_RAM3, B_RAM6, B_RAM4, 0, 0, 0, L), cyc);
    $display("NTT L=%0d: %0d cycles", L, cyc);
    res_id = (lg % 2 == 0) ? B_RAM3 : B_RAM4;
    for (int k = 0; k < L; k++) begin
      logic [63:0] ev = 0, pw;
      e = 128'(2 * brv(k, lg) + 1);
      pw = mpow(psi, e);
      for (int j = L - 1; j >= 0; j--) ev = 64'((128'(mmul(ev, pw)) + 128'(a[j])) % qq);
      checks++;
      if (mem.peek(res_id, k) != ev) begin
        failures++;
        if (failures < 5) $display("NTT mismatch k=%0d got %h exp %h", k, mem.peek(res_id, k), ev);
      end
    end
    // inverse: start from where the forward result sits
    run(mk(OP_UCU_INTT, F_CKKS, res_id, B_RAM6, (res_id == B_RAM3) ? B_RAM4 : B_RAM3, 0, L, 0, L), cyc);
    $display("INTT L=%0d: %0d cycles", L, cyc);
    res_id = (lg % 2 == 0) ? res_id : ((res_id == B_RAM3) ? B_RAM4 : B_RAM3);
    for (int k = 0; k < L; k++) begin
      checks++;
      if (mem.peek(res_id, k) != a[k]) begin
        failures++;
        if (failures < 5) $display("INTT mismatch k=%0d got %h exp %h", k, mem.peek(res_id, k), a[k]);
      end
    end
  endtask

  // ---------------- FFT round trip
  function automatic logic [63:0] cpack(real re, real im);
    logic signed [28:0] r, i;
    r = 29'($rtoi(re * 67108864.0));
    i = 29'($rtoi(im * 67108864.0));
    return 64'({r, i});
  endfunction
  task automatic test_fft(int L);
    int lg = $clog2(L), cyc, res_id, maxerr = 0;
    logic [63:0] a[];
    a = new[L];
    for (int k = 0; k < L; k++) begin
      real ang;
      logic signed [28:0] r, i;
      r = 29'(signed'($urandom_range(0, 1 << 21)) - (1 << 20));
      i = 29'(signed'($urandom_range(0, 1 << 21)) - (1 << 20));
      a[k] = 64'({r, i});
      mem.poke(B_RAM3, k, a[k]);
      ang = 3.14159265358979323846 * real'(brv(k, lg)) / real'(L);
      mem.poke(B_RAM5, k, cpack($cos(ang), $sin(ang)));
      mem.poke(B_RAM5, L + k, cpack($cos(ang), -$sin(ang)));
    end
    run(mk(OP_UCU_NTT, F_CPLX, B_RAM3, B_RAM5, B_RAM4, 0, 0, 0, L), cyc);
    res_id = (lg % 2 == 0) ? B_RAM3 : B_RAM4;
    run(mk(OP_UCU_INTT, F_CPLX, res_id, B_RAM5, (res_id == B_RAM3) ? B_RAM4 : B_RAM3, 0, L, 0, L), cyc);
    res_id = (lg % 2 == 0) ? res_id : ((res_id == B_RAM3) ? B_RAM4 : B_RAM3);
    for (int k = 0; k < L; k++) begin
      logic [63:0] g = mem.peek(res_id, k);
      int er = int'(signed'(g[57:29])) - int'(signed'(a[k][57:29]));
      int ei = int'(signed'(g[28:0])) - int'(signed'(a[k][28:0]));
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > maxerr) maxerr = er;
      if (ei > maxerr) maxerr = ei;
      checks++;
      if (er > 16 || ei > 16) failures++;
    end
    $display("FFT/IFFT L=%0d round trip max error %0d LSB", L, maxerr);
  endtask

  // ---------------- point-wise
  task automatic test_pw(ucu_op_t op, int ba, int bb, int bc, int L, field_e f);
    int cyc;
    logic [63:0] a[], b[];
    logic [127:0] m = (f == F_RUB) ? 128'(cfg.t) : qq;
    a = new[L]; b = new[L];
    for (int k = 0; k < L; k++) begin
      if (f == F_RUB) begin
        a[k] = 64'({28'($urandom % cfg.t), 28'($urandom % cfg.t)});
        b[k] = 64'({28'($urandom % cfg.t), 28'($urandom % cfg.t)});
      end else begin
        a[k] = 64'({$urandom, $urandom}) % 64'(qq);
        b[k] = 64'({$urandom, $urandom}) % 64'(qq);
      end
      mem.poke(ba, 100 + k, a[k]);
      mem.poke(bb, 300 + k, b[k]);
    end
    run(mk(op, f, ba, bb, bc, 100, 300, 100, L), cyc);
    $display("PW op=%0d field=%0d L=%0d: %0d cycles", op, f, L, cyc);
    for (int k = 0; k < L; k++) begin
      logic [63:0] exp;
      for (int h = 0; h < ((f == F_RUB) ? 2 : 1); h++) begin
        logic [127:0] x = (f == F_RUB) ? 128'(a[k][28*h +: 28]) : 128'(a[k]);
        logic [127:0] y = (f == F_RUB) ? 128'(b[k][28*h +: 28]) : 128'(b[k]);
        logic [127:0] z;
        z = (op == OP_UCU_PWMUL) ? (x * y) % m : (op == OP_UCU_PWADD) ? (x + y) % m : (x + m - y) % m;
        if (f == F_RUB) exp[28*h +: 28] = 28'(z); else exp = 64'(z);
      end
      if (f == F_RUB) exp[63:56] = '0;
      checks++;
      if (mem.peek(bc, 100 + k) != exp) begin
        failures++;
        if (failures < 5) $display("PW mismatch k=%0d got %h exp %h", k, mem.peek(bc, 100 + k), exp);
      end
    end
  endtask

  // ---------------- Rubato layers
  task automatic test_rub(int v, ucu_op_t op);
    int cyc, n = v * v;
    logic [27:0] x[], y[];
    logic [63:0] t = 64'(cfg.t);
    x = new[n]; y = new[n];
    cfg.v = 4'(v);
    for (int k = 0; k < VMAX; k++) cfg.m0[k] = 28'($urandom % cfg.t);
    for (int k = 0; k < n; k++) x[k] = 28'($urandom % cfg.t);
    for (int e = 0; e < n / 2; e++) mem.poke(B_RF0, 2 + e, 64'({x[2*e+1], x[2*e]}));
    for (int r = 0; r < v; r++)
      for (int c = 0; c < v; c++) begin
        logic [63:0] s = 0;
        if (op == OP_UCU_FEISTEL) begin
          int i = r * v + c;
          s = (i == 0) ? 64'(x[0]) : (64'(x[i]) + 64'(x[i-1]) * 64'(x[i-1])) % t;
        end else
          for (int i = 0; i < v; i++) begin
            // MixColumns: y(r,c) = sum_i M[r][i] x(i,c); MixRows: y(r,c) = sum_i M[c][i] x(r,i)
            int d = (op == OP_UCU_MIXCOL) ? (r - i + v) % v : (c - i + v) % v;
            logic [27:0] xv = (op == OP_UCU_MIXCOL) ? x[i * v + c] : x[r * v + i];
            s = (s + 64'(cfg.m0[d]) * 64'(xv)) % t;
          end
        y[r * v + c] = 28'(s);
      end
    run(mk(op, F_RUB, B_RF0, B_NONE, B_NONE, 2, 0, 0, 0), cyc);
    $display("Rubato op=%0d v=%0d: %0d cycles", op, v, cyc);
    for (int e = 0; e < n / 2; e++) begin
      checks++;
      if (mem.peek(B_RF0, 2 + e) != 64'({y[2*e+1], y[2*e]})) begin
        failures++;
        if (failures < 5) $display("Rubato mismatch e=%0d got %h exp %h", e, mem.peek(B_RF0, 2 + e), {y[2*e+1], y[2*e]});
      end
    end
  endtask

  // ---------------- Rubato round functions chained on the unit, as a workload:
  // nr round functions RF = ARK o MixColumns o MixRows o Feistel, the last one
  // without Feistel as in Fin, with ARK as PW-Mul k*rc then PW-Add and fresh
  // round constants per round, checked against the same chain worked out here.
  task automatic test_rub_rounds(int v, int nr);
    int cyc, tot = 0, n = v * v;
    logic [63:0] t = 64'(cfg.t);
    logic [27:0] x[], k[], rc[], y[];
    x = new[n]; k = new[n]; rc = new[n]; y = new[n];
    cfg.v = 4'(v);
    for (int j = 0; j < VMAX; j++) cfg.m0[j] = 28'($urandom % cfg.t);
    for (int j = 0; j < n; j++) begin x[j] = 28'($urandom % cfg.t); k[j] = 28'($urandom % cfg.t); end
    for (int e = 0; e < n / 2; e++) begin
      mem.poke(B_RF0, e, 64'({x[2*e+1], x[2*e]}));
      mem.poke(B_RF1, e, 64'({k[2*e+1], k[2*e]}));
    end
    for (int rd = 0; rd < nr; rd++) begin
      for (int j = 0; j < n; j++) rc[j] = 28'($urandom % cfg.t);
      for (int e = 0; e < n / 2; e++) mem.poke(B_RF2, e, 64'({rc[2*e+1], rc[2*e]}));
      // reference: RF = ARK o MixColumns o MixRows o Feistel (Feistel first); the
      // final round function Fin has no Feistel (its truncation is a read of l words)
      if (rd != nr - 1)
        for (int j = n - 1; j > 0; j--) x[j] = 28'((64'(x[j]) + 64'(x[j-1]) * 64'(x[j-1])) % t);
      for (int r = 0; r < v; r++)
        for (int c = 0; c < v; c++) begin
          logic [63:0] s;
          s = 0;
          for (int i = 0; i < v; i++) s = (s + 64'(cfg.m0[(c - i + v) % v]) * 64'(x[r * v + i])) % t;
          y[r * v + c] = 28'(s);
        end
      for (int r = 0; r < v; r++)
        for (int c = 0; c < v; c++) begin
          logic [63:0] s;
          s = 0;
          for (int i = 0; i < v; i++) s = (s + 64'(cfg.m0[(r - i + v) % v]) * 64'(y[i * v + c])) % t;
          x[r * v + c] = 28'(s);
        end
      for (int j = 0; j < n; j++) x[j] = 28'((64'(x[j]) + 64'(k[j]) * 64'(rc[j])) % t);
      // the unit
      if (rd != nr - 1) begin
        run(mk(OP_UCU_FEISTEL, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, 0), cyc); tot += cyc;
      end
      run(mk(OP_UCU_MIXROW, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, 0), cyc); tot += cyc;
      run(mk(OP_UCU_MIXCOL, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, 0), cyc); tot += cyc;
      run(mk(OP_UCU_PWMUL, F_RUB, B_RF1, B_RF2, B_RF2, 0, 0, 0, n / 2), cyc); tot += cyc;
      run(mk(OP_UCU_PWADD, F_RUB, B_RF0, B_RF2, B_RF0, 0, 0, 0, n / 2), cyc); tot += cyc;
    end
    $display("Rubato v=%0d: %0d round functions in %0d cycles", v, nr, tot);
    for (int e = 0; e < n / 2; e++) begin
      checks++;
      if (mem.peek(B_RF0, e) != 64'({x[2*e+1], x[2*e]})) begin
        failures++;
        if (failures < 5) $display("Rubato rounds mismatch v=%0d e=%0d got %h exp %h", v, e, mem.peek(B_RF0, e), {x[2*e+1], x[2*e]});
      end
    end
  endtask

  initial begin
    cfg = '0;
    cfg.bnd[1] = 10'd66;   // q = 2^54 - 66*2^14 + 1 is prime
    q = 56'((128'(1) << 54) - (128'(66) << 14) + 1);
    qq = 128'(q);
    cfg.q[1] = q;
    cfg.dprime[1] = 12'((((128'(1) << 108) / qq) - (128'(1) << 54) + 1) >> 12);
    cfg.k_t = 5'd26; cfg.t = 28'd50331653; cfg.mu_t = 30'((64'(1) << 52) / 64'(cfg.t));
    cfg.v = 4'd4;
    tk = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    test_ntt(16);
    test_ntt(64);
    test_ntt(128);
    test_fft(32);
    test_fft(64);
    test_pw(OP_UCU_PWMUL, B_RAM0A, B_RAM3, B_RAM2, 64, F_CKKS);
    test_pw(OP_UCU_PWADD, B_RAM3, B_RAM4, B_RAM3, 33, F_CKKS);
    test_pw(OP_UCU_PWSUB, B_RAM0A, B_RAM2, B_RAM0A, 20, F_CKKS);
    test_pw(OP_UCU_PWMUL, B_RF1, B_RF2, B_RF2, 16, F_RUB);
    test_pw(OP_UCU_PWADD, B_RF0, B_RF2, B_RF0, 16, F_RUB);
    for (int v = 4; v <= 8; v += 2) begin
      test_rub(v, OP_UCU_MIXCOL);
      test_rub(v, OP_UCU_MIXROW);
      test_rub(v, OP_UCU_FEISTEL);
    end
    test_rub_rounds(4, 6);   // Par-128S: r = 5 rounds plus the final round function
    test_rub_rounds(6, 4);   // Par-128M: r = 3
    test_rub_rounds(8, 3);   // Par-128L: r = 2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
