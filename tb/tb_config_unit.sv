// tb_config_unit: writes every register of the map with random values and
// checks each field of cfg, including that other fields keep their values.
// The register map under test is this design's own; the paper only names the
// parameters. No ports; a watchdog ends a hung run.
module tb_config_unit;
  import dna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [4:0] wr_idx;
  logic [63:0] wr_data;
  cfg_t cfg, exp_c;
  int checks = 0, failures = 0;
  config_unit dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input logic [4:0] i, input logic [63:0] d);
    wr_en = 1; wr_idx = i; wr_data = d;
    @(posedge clk); #1; wr_en = 0;
    checks++;
    if (cfg !== exp_c) begin failures++; $display("reg %0d mismatch", i); end
  endtask

  initial begin
    logic [63:0] d;
    wr_idx = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    exp_c = '0; exp_c.v = 4'd4; exp_c.log_n = 4'd13;
    checks++; if (cfg !== exp_c) failures++;
    for (int rep = 0; rep < 5; rep++) begin
      for (int i = 0; i < 29; i++) begin
        d = {$urandom, $urandom};
        if (i < 4) exp_c.q[i] = d[55:0];
        else if (i < 8) exp_c.bnd[i-4] = d[9:0];
        else if (i < 12) exp_c.dprime[i-8] = d[11:0];
        else if (i == 12) exp_c.t = d[27:0];
        else if (i == 13) exp_c.mu_t = d[29:0];
        else if (i == 14) exp_c.k_t = d[4:0];
        else if (i == 15) exp_c.v = d[3:0];
        else if (i < 24) exp_c.m0[i-16] = d[27:0];
        else if (i == 24) exp_c.nonce[63:0] = d;
        else if (i == 25) exp_c.nonce[127:64] = d;
        else if (i == 26) exp_c.hdr_words = d[15:0];
        else if (i == 27) exp_c.seg_words = d[15:0];
        else exp_c.log_n = d[3:0];
        wr(5'(i), d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
