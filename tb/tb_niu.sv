// tb_niu: sends a packet whose length comes from the configured header size and
// segment length while the NIC side stalls at random, and checks each flit's
// data, keep and last; then receives packets with random gaps, one ended by
// last and one cut at the task length, and checks the stored words and the
// received count.
// Packet = header plus segment, sizes set by configuration, as in the paper; the
// flit format is this design's.
module tb_niu;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  inst_t task_i;
  cfg_t cfg;
  logic [15:0] rx_count;
  logic tx_valid, tx_ready, rx_valid, rx_ready;
  nic_flit_t tx_flit, rx_flit;
  mem_req_t mem;
  logic [63:0] mem_rdata;
  int checks = 0, failures = 0;
  niu dut (.*);
  tb_mem_model #(.NP(1)) u_mem (.clk, .req(mem), .rdata(mem_rdata));

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int txn = 0;
  always @(posedge clk) begin
    tx_ready <= ($urandom_range(0, 2) != 0);
    if (tx_valid && tx_ready) begin
      checks++;
      if (tx_flit.data !== u_mem.peek(B_RAM7, 100 + txn) || tx_flit.keep !== 8'hFF ||
          tx_flit.last !== (txn == 22)) begin failures++; $display("tx flit %0d", txn); end
      txn++;
    end
  end

  task automatic go(input inst_t t);
    task_i = t; start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin
      if (t.op == OP_NIU_RECV) begin
        // rx driver handled below
      end
      @(posedge clk); #1;
    end
  endtask

  logic [63:0] pkt [40];
  int rxi = 0, rx_len = 0;
  always @(posedge clk) begin
    if (rx_valid && rx_ready) rxi <= rxi + 1;
  end
  always_comb begin
    rx_flit = '{data: pkt[rxi % 40], keep: 8'hFF, last: (rxi == rx_len - 1)};
  end

  initial begin
    inst_t t;
    rx_valid = 0;
    cfg = '0; cfg.hdr_words = 16'd3; cfg.seg_words = 16'd20;
    for (int i = 0; i < 40; i++) begin u_mem.poke(B_RAM7, 100 + i, {$urandom, $urandom}); pkt[i] = {$urandom, $urandom}; end
    task_i = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    t = '0; t.unit = U_NIU; t.op = OP_NIU_SEND; t.buf_a = B_RAM7; t.addr_a = 16'd100; t.len = 16'd0;
    go(t);
    checks++; if (txn != 23) begin failures++; $display("sent %0d", txn); end
    // receive a 15-flit packet ended by last
    @(posedge clk); #1;
    rx_len = 15; rxi = 0;
    fork
      begin
        t = '0; t.unit = U_NIU; t.op = OP_NIU_RECV; t.buf_c = B_RAM7; t.addr_c = 16'd500; t.len = 16'd64;
        go(t);
      end
      begin
        while (!done) begin rx_valid = ($urandom_range(0, 1) == 1); @(posedge clk); #1; end
        rx_valid = 0;
      end
    join
    checks++; if (rx_count != 15) begin failures++; $display("rx_count %0d", rx_count); end
    for (int i = 0; i < 15; i++) begin checks++; if (u_mem.peek(B_RAM7, 500 + i) !== pkt[i]) failures++; end
    // a packet longer than the task length is cut
    @(posedge clk); #1;
    rx_len = 40; rxi = 0;
    fork
      begin
        t = '0; t.unit = U_NIU; t.op = OP_NIU_RECV; t.buf_c = B_RAM7; t.addr_c = 16'd600; t.len = 16'd10;
        go(t);
      end
      begin
        while (!done) begin rx_valid = 1; @(posedge clk); #1; end
        rx_valid = 0;
      end
    join
    checks++; if (rx_count != 10) begin failures++; $display("rx_count %0d", rx_count); end
    for (int i = 0; i < 10; i++) begin checks++; if (u_mem.peek(B_RAM7, 600 + i) !== pkt[i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
