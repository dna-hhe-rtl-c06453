// tb_dau: a system-memory model with random request stalls and a 3-cycle read
// response delay serves the DMA unit. A Reader task loads words into a buffer
// and a Writer task copies another buffer back to memory; both are compared
// word by word with the source data, and the Reader must never have more than
// four reads outstanding.
// The memory model stands in for the paper's TileLink system bus; its timing is
// this testbench's choice.
module tb_dau;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  inst_t task_i;
  logic bus_req_valid, bus_req_ready, bus_rsp_valid;
  dma_req_t bus_req;
  logic [63:0] bus_rsp_data;
  mem_req_t mem;
  logic [63:0] mem_rdata;
  int checks = 0, failures = 0;

  dau dut (.*);
  tb_mem_model #(.NP(1)) u_mem (.clk, .req(mem), .rdata(mem_rdata));

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // system memory with random ready and 3-cycle in-order read latency
  logic [63:0] sysmem [logic [39:0]];
  logic [63:0] rsp_pipe [3];
  logic        rsp_v [3];
  int          outst = 0, max_out = 0;
  always @(posedge clk) begin
    bus_req_ready <= ($urandom_range(0, 3) != 0);
    rsp_pipe[1] <= rsp_pipe[0]; rsp_v[1] <= rsp_v[0];
    rsp_pipe[2] <= rsp_pipe[1]; rsp_v[2] <= rsp_v[1];
    rsp_v[0] <= 0;
    if (bus_req_valid && bus_req_ready) begin
      if (bus_req.we) sysmem[bus_req.addr] = bus_req.wdata;
      else begin rsp_v[0] <= 1; rsp_pipe[0] <= sysmem.exists(bus_req.addr) ? sysmem[bus_req.addr] : 64'h0; end
    end
    outst = outst + ((bus_req_valid && bus_req_ready && !bus_req.we) ? 1 : 0) - (bus_rsp_valid ? 1 : 0);
    if (outst > max_out) max_out = outst;
  end
  assign bus_rsp_valid = rsp_v[2];
  assign bus_rsp_data  = rsp_pipe[2];

  task automatic go(input inst_t t);
    task_i = t; start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  initial begin
    inst_t t;
    rsp_v[0] = 0; rsp_v[1] = 0; rsp_v[2] = 0; bus_req_ready = 0;
    for (int i = 0; i < 100; i++) sysmem[40'h1000 + 40'(8*i)] = {$urandom, $urandom};
    for (int i = 0; i < 50; i++) u_mem.poke(B_RAM7, 20 + i, {$urandom, $urandom});
    task_i = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    t = '0; t.unit = U_DAU; t.op = OP_DAU_RD; t.buf_c = B_RAM0A; t.addr_c = 16'd7; t.len = 16'd100; t.imm = 40'h1000;
    go(t);
    for (int i = 0; i < 100; i++) begin
      checks++;
      if (u_mem.peek(B_RAM0A, 7 + i) !== sysmem[40'h1000 + 40'(8*i)]) begin failures++; if (failures < 5) $display("rd %0d", i); end
    end
    checks++; if (max_out > 4 || max_out < 2) begin failures++; $display("outstanding %0d", max_out); end
    t = '0; t.unit = U_DAU; t.op = OP_DAU_WR; t.buf_a = B_RAM7; t.addr_a = 16'd20; t.len = 16'd50; t.imm = 40'h8000;
    go(t);
    for (int i = 0; i < 50; i++) begin
      checks++;
      if (!sysmem.exists(40'h8000 + 40'(8*i)) || sysmem[40'h8000 + 40'(8*i)] !== u_mem.peek(B_RAM7, 20 + i)) begin failures++; if (failures < 5) $display("wr %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
