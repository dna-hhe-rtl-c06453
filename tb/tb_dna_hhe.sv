// tb_dna_hhe: end-to-end and full-size testbench of the accelerator (top with
// its default parameters, N = 8192).
// A behavioural system memory answers the DMA channel (random request stalls,
// read data three cycles later), a network model takes packets from the tx tap
// (random backpressure) and offers one packet on the rx tap. The instruction
// program covers the paper's data flow for one RNS domain and one Rubato block:
//  - configuration (moduli, Barrett constants, Rubato t and matrix, nonce, sizes);
//  - DMA loads of the public key, NTT/FFT twiddles, the message and a header;
//  - ternary sampling, NTT (13 ping-pong stages), point-wise product with the key,
//    INTT, and IFFT/FFT of the message in the complex field;
//  - Rubato: rc sampling, ARK (PW-Mul, PW-Add), MixColumns, MixRows, Feistel;
//  - header + ciphertext segment and Rubato block sent on the network tap, one
//    packet received and moved to a buffer; results written back over DMA.
// Checks: NTT values at sample points against direct evaluation, the point-wise
// product on every coefficient, INTT(NTT(v)) == v, FFT(IFFT(m)) == m within the
// fixed-point error, the Rubato block against a reference, both sent packets
// and the received packet. It counts out-of-order dispatches, busy stalls, UCU
// field (mode) switches, ping-pong transforms, cycles with several units busy,
// DMA reads and writes, and network flits sent and received, and fails if any
// of them never happened.
module tb_dna_hhe;
  import dna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int N  = 8192;
  localparam int L  = N / 2;        // complex slots
  localparam int HW = 4;            // header words
  localparam int SW = 64;           // ciphertext segment words
  localparam int V  = 4;            // Rubato Par-128S
  localparam int NS = V * V;

  logic         inst_valid = 1'b0, inst_ready;
  logic [127:0] inst_data = '0;
  logic         dma_req_valid, dma_req_ready, dma_req_we, dma_rsp_valid;
  logic [39:0]  dma_req_addr;
  logic [63:0]  dma_req_wdata, dma_rsp_data;
  logic         tx_valid, tx_ready, tx_last, rx_valid, rx_ready, rx_last;
  logic [63:0]  tx_data, rx_data;
  logic [7:0]   tx_keep, rx_keep;
  logic         idle, ucu_busy;
  logic [15:0]  rx_count;
  logic [31:0]  n_disp, n_ooo, n_stall;
  int checks = 0, failures = 0;

  dna_hhe dut (.*);

  initial begin
    #200000000;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  // ---------------- system memory (word addressed)
  logic [63:0] smem [logic [36:0]];
  logic [63:0] rsp_q [$];
  int          rsp_t [$];
  int          cyc = 0, n_dma_rd = 0, n_dma_wr = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) dma_req_ready <= ($urandom_range(0, 7) != 0);
  always @(posedge clk) if (rst_n) begin
    if (dma_req_valid && dma_req_ready) begin
      if (dma_req_we) begin smem[dma_req_addr[39:3]] = dma_req_wdata; n_dma_wr++; end
      else begin
        rsp_q.push_back(smem.exists(dma_req_addr[39:3]) ? smem[dma_req_addr[39:3]] : 64'd0);
        rsp_t.push_back(cyc + 3);
        n_dma_rd++;
      end
    end
  end
  always @(posedge clk) begin
    dma_rsp_valid <= 1'b0;
    if (rsp_t.size() != 0 && rsp_t[0] <= cyc) begin
      void'(rsp_t.pop_front());
      dma_rsp_valid <= 1'b1;
      dma_rsp_data  <= rsp_q.pop_front();
    end
  end

  // ---------------- network
  logic [63:0] txw [$];
  int          tx_pkts = 0, tx_flits = 0, rx_flits = 0;
  int          pkt_len [$];
  always @(posedge clk) tx_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    txw.push_back(tx_data);
    tx_flits++;
    if (tx_last) begin tx_pkts++; pkt_len.push_back(tx_flits); end
  end
  localparam int RXN = 8;
  logic [63:0] rxw [RXN];
  int          rx_i = 0;
  assign rx_valid = (rx_i < RXN);
  assign rx_data  = rxw[(rx_i < RXN) ? rx_i : 0];
  assign rx_keep  = 8'hFF;
  assign rx_last  = (rx_i == RXN - 1);
  always @(posedge clk) if (rst_n && rx_valid && rx_ready) begin rx_i <= rx_i + 1; rx_flits++; end

  // ---------------- mechanism counters
  int n_mode_sw = 0, n_transforms = 0, n_parallel = 0, n_ucu_tasks = 0;
  field_e last_field = F_CKKS;
  always @(posedge clk) if (rst_n) begin
    if (dut.start[2]) begin
      n_ucu_tasks++;
      if (n_ucu_tasks > 1 && dut.task_q.field != last_field) n_mode_sw++;
      last_field = dut.task_q.field;
      if (dut.task_q.op == OP_UCU_NTT || dut.task_q.op == OP_UCU_INTT) n_transforms++;
    end
    if ($countones(dut.u_tm.unit_busy) >= 2) n_parallel++;
  end

  // ---------------- arithmetic helpers
  logic [127:0] qq;
  logic [127:0] tt;
  function automatic logic [63:0] mmul(logic [63:0] a, logic [63:0] b);
    return 64'((128'(a) * 128'(b)) % qq);
  endfunction
  function automatic logic [63:0] mpow(logic [63:0] a, logic [127:0] e);
    logic [63:0] r;
    r = 64'd1;
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
  function automatic logic [63:0] cpack(real re, real im);
    logic signed [28:0] r, i;
    r = 29'($rtoi(re * 67108864.0));
    i = 29'($rtoi(im * 67108864.0));
    return 64'({r, i});
  endfunction

  // ---------------- instruction helpers
  inst_t prog [$];
  function automatic void cfgw(logic [4:0] idx, logic [63:0] val);
    inst_t t = '0;
    t.unit = U_CFG; t.op = idx;
    t.buf_a = B_NONE; t.buf_b = B_NONE; t.buf_c = B_NONE;
    t.addr_b = val[63:48]; t.addr_c = val[47:32]; t.imm = 40'(val[31:0]);
    prog.push_back(t);
  endfunction
  function automatic void ins(unit_e u, logic [4:0] op, field_e f, buf_id_e a, buf_id_e b, buf_id_e c,
                              int aa, int ab, int ac, int len, logic [39:0] imm);
    inst_t t = '0;
    t.unit = u; t.op = op; t.field = f; t.dom = 2'd0;
    t.buf_a = a; t.buf_b = b; t.buf_c = c;
    t.addr_a = 16'(aa); t.addr_b = 16'(ab); t.addr_c = 16'(ac); t.len = 16'(len); t.imm = imm;
    prog.push_back(t);
  endfunction
  function automatic logic [39:0] ba(int w);
    return 40'(w) << 3;
  endfunction

  // system memory map (word addresses)
  localparam int A_PK = 'h00000, A_TWN = 'h10000, A_TWF = 'h20000, A_MSG = 'h30000, A_HDR = 'h38000,
                 A_KEY = 'h39000, A_ST = 'h39100, A_VOUT = 'h40000, A_NOUT = 'h50000, A_COUT = 'h60000,
                 A_ROUT = 'h70000, A_FOUT = 'h80000, A_RCOUT = 'h90000, A_RBOUT = 'h91000, A_RXOUT = 'h92000;

  logic [63:0] psi, psii;
  logic [27:0] m0 [V];
  logic [27:0] key [NS], st0 [NS];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [63:0] q, mu, pw, pwi;
    logic [9:0]  bnd;
    logic [11:0] dp;
    int          t_cycles;
    bnd = 10'd66;                                     // q = 2^54 - 66*2^14 + 1 (prime)
    q   = 64'((128'(1) << 54) - (128'(bnd) << 14) + 1);
    qq  = 128'(q);
    dp  = 12'((((128'(1) << 108) / qq) - (128'(1) << 54) + 1) >> 12);
    tt  = 128'(50331653);
    // 2N-th root of unity
    psi = 0;
    for (int g = 2; g < 100 && psi == 0; g++) begin
      logic [63:0] x;
      x = mpow(64'(g), (qq - 1) / 128'(2 * N));
      if (mpow(x, 128'(N)) == q - 1) psi = x;
    end
    psii = mpow(psi, 128'(2 * N - 1));
    chk(psi != 0, "root of unity");
    // twiddles: bit-reversed powers, forward then inverse
    pw = 1; pwi = 1;
    for (int k = 0; k < N; k++) begin
      smem[37'(A_TWN + brv(k, 13))]     = pw;
      smem[37'(A_TWN + N + brv(k, 13))] = pwi;
      pw = mmul(pw, psi); pwi = mmul(pwi, psii);
    end
    for (int k = 0; k < L; k++) begin
      real ang;
      ang = 3.14159265358979323846 * real'(brv(k, 12)) / real'(L);
      smem[37'(A_TWF + k)]     = cpack($cos(ang), $sin(ang));
      smem[37'(A_TWF + L + k)] = cpack($cos(ang), -$sin(ang));
      smem[37'(A_MSG + k)]     = 64'({29'(signed'($urandom_range(0, 1 << 25)) - (1 << 24)),
                                      29'(signed'($urandom_range(0, 1 << 25)) - (1 << 24))});
    end
    for (int k = 0; k < N; k++) smem[37'(A_PK + k)] = 64'({$urandom, $urandom}) % q;
    for (int k = 0; k < HW; k++) smem[37'(A_HDR + k)] = 64'hABCD_0000_0000_0000 | 64'(k);
    for (int k = 0; k < V; k++) m0[k] = 28'($urandom_range(1, 1000));
    for (int k = 0; k < NS; k++) begin key[k] = 28'($urandom % 50331653); st0[k] = 28'(k + 1); end
    for (int e = 0; e < NS / 2; e++) begin
      smem[37'(A_KEY + e)] = 64'({key[2*e+1], key[2*e]});
      smem[37'(A_ST + e)]  = 64'({st0[2*e+1], st0[2*e]});
    end
    for (int k = 0; k < RXN; k++) rxw[k] = 64'h5A5A_0000_0000_0000 | 64'(k * 7);

    // ---------------- program
    cfgw(CR_Q, 64'(q));  cfgw(CR_BND, 64'(bnd)); cfgw(CR_DP, 64'(dp));
    cfgw(CR_T, 64'(tt)); cfgw(CR_MUT, (64'(1) << 52) / 64'(tt)); cfgw(CR_KT, 64'd26);
    cfgw(CR_V, 64'(V));
    for (int k = 0; k < V; k++) cfgw(5'(CR_M0 + k), 64'(m0[k]));
    cfgw(CR_NONCE_LO, 64'h0123_4567_89AB_CDEF); cfgw(CR_NONCE_HI, 64'h0F1E_2D3C_4B5A_6978);
    cfgw(CR_HDR, 64'(HW)); cfgw(CR_SEG, 64'(SW)); cfgw(CR_LOGN, 64'd13);
    // CKKS encryption path for one domain
    // CKKS encryption path for one domain. The DMA unit reaches BUF0, BUF1, BUF3
    // and BUF4 only, so twiddles and results pass through RAM2/RAM1 and the DTU.
    ins(U_DAU, OP_DAU_RD, F_CKKS, B_NONE, B_NONE, B_RAM0A, 0, 0, 0, N, ba(A_PK));
    ins(U_DAU, OP_DAU_RD, F_CKKS, B_NONE, B_NONE, B_RAM2, 0, 0, 0, N, ba(A_TWN));
    ins(U_DTU, OP_DTU_COPY, F_CKKS, B_RAM2, B_NONE, B_RAM6, 0, 0, 0, N, 0);
    ins(U_DAU, OP_DAU_RD, F_CKKS, B_NONE, B_NONE, B_RAM2, 0, 0, 0, N, ba(A_TWN + N));
    ins(U_DTU, OP_DTU_COPY, F_CKKS, B_RAM2, B_NONE, B_RAM6, 0, 0, N, N, 0);
    ins(U_RSU, OP_RSU_TER, F_CKKS, B_NONE, B_NONE, B_RAM3, 0, 0, 0, N, 40'd1);
    ins(U_DTU, OP_DTU_COPY, F_CKKS, B_RAM3, B_NONE, B_RAM2, 0, 0, 0, N, 0);
    ins(U_UCU, OP_UCU_NTT, F_CKKS, B_RAM3, B_RAM6, B_RAM4, 0, 0, 0, N, 0);
    ins(U_UCU, OP_UCU_PWMUL, F_CKKS, B_RAM0A, B_RAM4, B_RAM0B, 0, 0, 0, N, 0);
    ins(U_DAU, OP_DAU_WR, F_CKKS, B_RAM2, B_NONE, B_NONE, 0, 0, 0, N, ba(A_VOUT));
    ins(U_DTU, OP_DTU_COPY, F_CKKS, B_RAM4, B_NONE, B_RAM1A, 0, 0, 0, N, 0);
    ins(U_DAU, OP_DAU_WR, F_CKKS, B_RAM1A, B_NONE, B_NONE, 0, 0, 0, N, ba(A_NOUT));
    ins(U_DAU, OP_DAU_WR, F_CKKS, B_RAM0B, B_NONE, B_NONE, 0, 0, 0, N, ba(A_COUT));
    ins(U_UCU, OP_UCU_INTT, F_CKKS, B_RAM4, B_RAM6, B_RAM3, 0, N, 0, N, 0);
    ins(U_DTU, OP_DTU_COPY, F_CKKS, B_RAM3, B_NONE, B_RAM1A, 0, 0, 0, N, 0);
    ins(U_DAU, OP_DAU_WR, F_CKKS, B_RAM1A, B_NONE, B_NONE, 0, 0, 0, N, ba(A_ROUT));
    ins(U_DAU, OP_DAU_RD, F_CKKS, B_NONE, B_NONE, B_RAM7, 0, 0, 0, HW, ba(A_HDR));
    ins(U_DTU, OP_DTU_COPY, F_CKKS, B_RAM0B, B_NONE, B_RAM7, 0, 0, HW, SW, 0);
    ins(U_NIU, OP_NIU_SEND, F_CKKS, B_RAM7, B_NONE, B_NONE, 0, 0, 0, 0, 0);
    // Rubato block (Par-128S)
    ins(U_DAU, OP_DAU_RD, F_RUB, B_NONE, B_NONE, B_RF1, 0, 0, 0, NS / 2, ba(A_KEY));
    ins(U_DAU, OP_DAU_RD, F_RUB, B_NONE, B_NONE, B_RF0, 0, 0, 0, NS / 2, ba(A_ST));
    ins(U_RSU, OP_RSU_UNI, F_RUB, B_NONE, B_NONE, B_RF2, 0, 0, 0, NS, 40'd7);
    ins(U_DAU, OP_DAU_WR, F_RUB, B_RF2, B_NONE, B_NONE, 0, 0, 0, NS / 2, ba(A_RCOUT));
    ins(U_UCU, OP_UCU_PWMUL, F_RUB, B_RF1, B_RF2, B_RF2, 0, 0, 0, NS / 2, 0);
    ins(U_UCU, OP_UCU_PWADD, F_RUB, B_RF0, B_RF2, B_RF0, 0, 0, 0, NS / 2, 0);
    ins(U_UCU, OP_UCU_MIXCOL, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, 0, 0);
    ins(U_UCU, OP_UCU_MIXROW, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, 0, 0);
    ins(U_UCU, OP_UCU_FEISTEL, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, 0, 0);
    ins(U_DAU, OP_DAU_WR, F_RUB, B_RF0, B_NONE, B_NONE, 0, 0, 0, NS / 2, ba(A_RBOUT));
    ins(U_DTU, OP_DTU_COPY, F_RUB, B_RF0, B_NONE, B_RAM7, 0, 0, 100, NS / 2, 0);
    ins(U_NIU, OP_NIU_SEND, F_RUB, B_RAM7, B_NONE, B_NONE, 100, 0, 0, NS / 2, 0);
    // receive one packet and write it out
    ins(U_NIU, OP_NIU_RECV, F_CKKS, B_NONE, B_NONE, B_RAM7, 0, 0, 200, 16, 0);
    ins(U_DAU, OP_DAU_WR, F_CKKS, B_RAM7, B_NONE, B_NONE, 200, 0, 0, RXN, ba(A_RXOUT));
    // message encoding (IFFT) and decoding (FFT) in the complex field
    ins(U_DAU, OP_DAU_RD, F_CPLX, B_NONE, B_NONE, B_RAM1B, 0, 0, 0, N, ba(A_TWF));
    ins(U_DTU, OP_DTU_COPY, F_CPLX, B_RAM1B, B_NONE, B_RAM5, 0, 0, 0, N, 0);
    ins(U_DAU, OP_DAU_RD, F_CPLX, B_NONE, B_NONE, B_RAM2, 0, 0, 0, L, ba(A_MSG));
    ins(U_DTU, OP_DTU_COPY, F_CPLX, B_RAM2, B_NONE, B_RAM3, 0, 0, 0, L, 0);
    ins(U_UCU, OP_UCU_INTT, F_CPLX, B_RAM3, B_RAM5, B_RAM4, 0, L, 0, L, 0);
    ins(U_UCU, OP_UCU_NTT, F_CPLX, B_RAM3, B_RAM5, B_RAM4, 0, 0, 0, L, 0);
    ins(U_DTU, OP_DTU_COPY, F_CPLX, B_RAM3, B_NONE, B_RAM1B, 0, 0, 0, L, 0);
    ins(U_DAU, OP_DAU_WR, F_CPLX, B_RAM1B, B_NONE, B_NONE, 0, 0, 0, L, ba(A_FOUT));

    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    t_cycles = cyc;
    foreach (prog[i]) begin
      inst_valid = 1'b1; inst_data = prog[i];
      @(posedge clk);
      while (!inst_ready) @(posedge clk);
      #1;
    end
    inst_valid = 1'b0;
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (10) @(posedge clk);
    $display("program of %0d instructions ran in %0d cycles", prog.size(), cyc - t_cycles);

    // ---------------- checks: CKKS path
    begin
      int nz = 0;
      for (int k = 0; k < N; k++) begin
        logic [63:0] v;
        v = smem[37'(A_VOUT + k)];
        if (v != 0) nz++;
        chk(v == 0 || v == 1 || v == q - 1, "ternary sample");
        chk(smem[37'(A_ROUT + k)] == v, "INTT(NTT(v)) == v");
        chk(smem[37'(A_COUT + k)] == mmul(smem[37'(A_PK + k)], smem[37'(A_NOUT + k)]), "pk * NTT(v)");
      end
      chk(nz > N / 2, "ternary samples not mostly zero");
      for (int s = 0; s < 4; s++) begin
        int k;
        logic [63:0] ev, x;
        k = (s == 0) ? 0 : $urandom_range(1, N - 1);
        ev = 0;
        x = mpow(psi, 128'(2 * brv(k, 13) + 1));
        for (int j = N - 1; j >= 0; j--) ev = 64'((128'(mmul(ev, x)) + 128'(smem[37'(A_VOUT + j)])) % qq);
        chk(smem[37'(A_NOUT + k)] == ev, "NTT point");
      end
    end
    // packets
    chk(tx_pkts == 2, "two packets sent");
    if (txw.size() == HW + SW + NS / 2) begin
      for (int k = 0; k < HW; k++) chk(txw[k] == smem[37'(A_HDR + k)], "packet header");
      for (int k = 0; k < SW; k++) chk(txw[HW + k] == smem[37'(A_COUT + k)], "packet ciphertext");
      for (int k = 0; k < NS / 2; k++) chk(txw[HW + SW + k] == smem[37'(A_RBOUT + k)], "Rubato packet");
    end else chk(0, "sent word count");
    // received packet
    chk(rx_count == 16'(RXN), "received word count");
    for (int k = 0; k < RXN; k++) chk(smem[37'(A_RXOUT + k)] == rxw[k], "received packet");
    // Rubato
    begin
      logic [27:0] x [NS], y [NS], rc [NS];
      logic [63:0] s;
      for (int e = 0; e < NS / 2; e++) begin
        rc[2*e] = smem[37'(A_RCOUT + e)][27:0]; rc[2*e+1] = smem[37'(A_RCOUT + e)][55:28];
      end
      for (int k = 0; k < NS; k++) begin
        chk(64'(rc[k]) < 64'(tt), "rc below t");
        x[k] = 28'((64'(st0[k]) + 64'(key[k]) * 64'(rc[k])) % 64'(tt));
      end
      for (int r = 0; r < V; r++) for (int c = 0; c < V; c++) begin
        s = 0;
        for (int i = 0; i < V; i++) s = (s + 64'(m0[(r - i + V) % V]) * 64'(x[i * V + c])) % 64'(tt);
        y[r * V + c] = 28'(s);
      end
      for (int r = 0; r < V; r++) for (int c = 0; c < V; c++) begin
        s = 0;
        for (int i = 0; i < V; i++) s = (s + 64'(m0[(c - i + V) % V]) * 64'(y[r * V + i])) % 64'(tt);
        x[r * V + c] = 28'(s);
      end
      for (int k = 0; k < NS; k++)
        y[k] = (k == 0) ? x[0] : 28'((64'(x[k]) + 64'(x[k-1]) * 64'(x[k-1])) % 64'(tt));
      for (int e = 0; e < NS / 2; e++)
        chk(smem[37'(A_RBOUT + e)] == 64'({y[2*e+1], y[2*e]}), "Rubato block");
    end
    // complex round trip
    begin
      int maxerr = 0;
      for (int k = 0; k < L; k++) begin
        logic [63:0] g, a;
        int er, ei;
        g = smem[37'(A_FOUT + k)]; a = smem[37'(A_MSG + k)];
        er = int'(signed'(g[57:29])) - int'(signed'(a[57:29]));
        ei = int'(signed'(g[28:0])) - int'(signed'(a[28:0]));
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (er > maxerr) maxerr = er;
        if (ei > maxerr) maxerr = ei;
      end
      $display("FFT(IFFT(m)) max error %0d LSB of 2^-26", maxerr);
      chk(maxerr < 16384, "FFT(IFFT(m)) == m");
    end
    // mechanisms
    $display("dispatched %0d, out-of-order %0d, stall cycles %0d, UCU mode switches %0d, transforms %0d",
             n_disp, n_ooo, n_stall, n_mode_sw, n_transforms);
    $display("cycles with >=2 units busy %0d, DMA reads %0d, DMA writes %0d, tx flits %0d, rx flits %0d",
             n_parallel, n_dma_rd, n_dma_wr, tx_flits, rx_flits);
    chk(n_disp == prog.size(), "all instructions dispatched");
    chk(n_ooo > 0, "out-of-order dispatch happened");
    chk(n_stall > 0, "busy stall happened");
    chk(n_mode_sw >= 2, "UCU mode switches happened");
    chk(n_transforms == 4, "ping-pong transforms ran");
    chk(n_parallel > 0, "units ran in parallel");
    chk(n_dma_rd > 0 && n_dma_wr > 0, "DMA reads and writes happened");
    chk(tx_flits > 0 && rx_flits > 0, "network send and receive happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
