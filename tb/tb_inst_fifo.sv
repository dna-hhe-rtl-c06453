// tb_inst_fifo: pushes random task words with random valid/ready patterns,
// fills the FIFO to check in_ready drops at DEPTH entries, and compares the
// output order with a reference queue.
// The FIFO is named in the paper's architecture figure; the depth under test is
// this design's choice. No ports; a watchdog ends a hung run.
module tb_inst_fifo;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  inst_t in_data, out_data;
  int checks = 0, failures = 0;
  inst_fifo dut (.*);
  inst_t refq[$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) refq.push_back(in_data);
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== refq[0]) failures++;
      void'(refq.pop_front());
    end
  end

  initial begin
    in_data = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // fill without reading
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; in_data = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk); #1;
    end
    in_valid = 0;
    checks++; if (in_ready !== 1'b0 || refq.size() != 16) begin failures++; $display("full check %0d", refq.size()); end
    for (int i = 0; i < 3000; i++) begin
      in_valid = $urandom_range(0, 1); in_data = {$urandom, $urandom, $urandom, $urandom};
      out_ready = $urandom_range(0, 1);
      @(posedge clk); #1;
    end
    in_valid = 0; out_ready = 1;
    repeat (20) @(posedge clk); #1;
    checks++; if (out_valid || refq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
