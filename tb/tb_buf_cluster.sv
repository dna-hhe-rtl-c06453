// tb_buf_cluster: a Compute-BUF2-like cluster (two parity-split buffers and two
// plain ones, four request ports). Random writes, each checked later by a read,
// are issued on all ports at once, including the four-word butterfly pattern
// (i, i+1, i+h, i+1+h) that must fall two per bank. Reads are compared with a
// reference array one cycle after the request.
// The cluster layout mirrors the paper's Compute BUF2; the parity split it tests
// is this design's choice.
module tb_buf_cluster;
  import dna_pkg::*;
  localparam int NREQ = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t [NREQ-1:0] req;
  logic [NREQ-1:0][63:0] rdata;
  int checks = 0, failures = 0;

  buf_cluster #(.NREQ(NREQ), .NBUF_C(4), .ID_BASE(5), .NP(2), .DEPTH0(64), .DEPTH1(64),
                .DEPTH2(32), .DEPTH3(64), .SPLIT(4'b0011)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] ref_m [4][64];
  logic [NREQ-1:0]       chk_v;
  logic [NREQ-1:0][63:0] chk_e;

  always @(posedge clk) begin
    for (int r = 0; r < NREQ; r++) if (chk_v[r]) begin
      checks++;
      if (rdata[r] !== chk_e[r]) begin failures++; if (failures < 10) $display("port %0d got %h exp %h", r, rdata[r], chk_e[r]); end
    end
  end

  function automatic mem_req_t mk(logic we, int b, int a, logic [63:0] d);
    mem_req_t m;
    m.en = 1; m.we = we; m.id = 4'(5 + b); m.addr = ADDR_W'(a); m.wdata = d;
    return m;
  endfunction

  initial begin
    int d, h;
    req = '0; chk_v = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // fill all four buffers, one word per port and cycle, one buffer per port
    for (int a = 0; a < 64; a++) begin
      for (int b = 0; b < 4; b++) begin
        d = (b == 2) ? 32 : 64;
        if (a < d) begin
          ref_m[b][a] = {$urandom, $urandom};
          req[b] = mk(1, b, a, ref_m[b][a]);
        end else req[b] = '0;
      end
      chk_v = '0;
      @(posedge clk); #1;
    end
    // butterfly access pattern on buffer 0 (parity split): i, i+1, i+h, i+h+1
    for (int rep = 0; rep < 200; rep++) begin
      int i;
      h = 1 << $urandom_range(1, 5);
      i = 2 * $urandom_range(0, 31);
      i = ((i / (2*h)) * 2*h) + (i % h);
      if ((i % 2) == 1) i--;
      req[0] = mk(0, 0, i, 0); req[1] = mk(0, 0, i + 1, 0);
      req[2] = mk(0, 0, (i + h) % 64, 0); req[3] = mk(0, 0, (i + h + 1) % 64, 0);
      chk_e[0] = ref_m[0][i]; chk_e[1] = ref_m[0][i+1];
      chk_e[2] = ref_m[0][(i+h)%64]; chk_e[3] = ref_m[0][(i+h+1)%64];
      @(posedge clk); #1;
      chk_v = '1;
      // same cycle: write a new value to buffer 1 on two ports while reading back
      req[0] = mk(1, 1, rep % 64, {32'(rep), 32'hA5A5}); ref_m[1][rep % 64] = {32'(rep), 32'hA5A5};
      req[1] = mk(0, 3, (rep * 7) % 64, 0);
      req[2] = mk(0, 2, rep % 32, 0);
      req[3] = '0;
      @(posedge clk); #1;
      chk_v = 4'b0110; chk_e[1] = ref_m[3][(rep * 7) % 64]; chk_e[2] = ref_m[2][rep % 32];
      req[0] = mk(0, 1, rep % 64, 0); req[1] = '0; req[2] = '0;
      @(posedge clk); #1;
      chk_v = 4'b0001; chk_e[0] = ref_m[1][rep % 64];
      req = '0;
      @(posedge clk); #1;
      chk_v = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
