// tb_dtu: copies between two clusters (Key BUF0 to NIC BUF4, behind a header),
// inside one cluster (RAM3 to RAM4) and between register files, and checks the
// destination words, that nothing beyond the copy was written, and the cycle
// counts: len+2 cycles across clusters, 2*len+1 inside one cluster.
// The copy kinds come from the paper's architecture figure; the expected cycle
// counts are this design's.
module tb_dtu;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  inst_t task_i;
  mem_req_t [4:0] port;
  logic [4:0][63:0] rdata;
  int checks = 0, failures = 0;
  dtu dut (.*);
  tb_mem_model #(.NP(5)) u_mem (.clk, .req(port), .rdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic copy(input int sa, input int sb, input int da, input int db, input int len, input int exp_cyc);
    inst_t t; int n;
    t = '0; t.unit = U_DTU; t.op = OP_DTU_COPY; t.buf_a = 4'(sa); t.addr_a = 16'(sb);
    t.buf_c = 4'(da); t.addr_c = 16'(db); t.len = 16'(len);
    u_mem.poke(da, db + len, 64'h5555);
    task_i = t; start = 1; @(posedge clk); #1; start = 0; n = 1;
    while (!done) begin @(posedge clk); #1; n++; end
    for (int i = 0; i < len; i++) begin
      checks++;
      if (u_mem.peek(da, db + i) !== u_mem.peek(sa, sb + i)) begin failures++; if (failures < 5) $display("word %0d", i); end
    end
    checks++; if (u_mem.peek(da, db + len) !== 64'h5555) failures++;
    checks++; if (n != exp_cyc) begin failures++; $display("cycles %0d exp %0d", n, exp_cyc); end
  endtask

  initial begin
    for (int i = 0; i < 300; i++) begin
      u_mem.poke(B_RAM0A, i, {$urandom, $urandom});
      u_mem.poke(B_RAM3, i, {$urandom, $urandom});
      u_mem.poke(B_RF0, i % 32, {$urandom, $urandom});
    end
    task_i = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    copy(B_RAM0A, 10, B_RAM7, 4, 200, 202);
    copy(B_RAM3, 0, B_RAM4, 50, 100, 201);
    copy(B_RF0, 0, B_RF1, 0, 32, 65);
    copy(B_RF0, 0, B_RAM3, 256, 16, 18);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
