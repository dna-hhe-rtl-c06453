// tb_keccak_f1600: checks the permutation against two published FIPS 202 test
// values, SHAKE128("") and SHA3-256("") (first 32 output bytes), by padding the
// empty message into one block, permuting, and comparing the leading lanes.
// It also checks that done comes 25 cycles after start.
// The paper only names SHA3/SHAKE; the test values are the standard FIPS 202 ones.
module tb_keccak_f1600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [1599:0] state_in, state_out;
  int checks = 0, failures = 0;
  keccak_f1600 dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic perm(input logic [1599:0] s, input logic [255:0] expect_bytes);
    int n;
    logic [255:0] got;
    state_in = s; start = 1;
    @(posedge clk); #1; start = 0; n = 1;
    while (!done) begin @(posedge clk); #1; n++; end
    checks++;
    if (n != 25) begin failures++; $display("latency %0d", n); end
    // output bytes in order: lane 0 byte 0 first
    for (int i = 0; i < 32; i++) got[255 - 8*i -: 8] = state_out[8*i +: 8];
    checks++;
    if (got !== expect_bytes) begin failures++; $display("got %h\nexp %h", got, expect_bytes); end
  endtask

  initial begin
    logic [1599:0] s;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    s = '0; s[7:0] = 8'h1F; s[167*8 +: 8] = 8'h80;   // SHAKE128, rate 168 bytes
    perm(s, 256'h7f9c2ba4e88f827d616045507605853ed73b8093f6efbc88eb1a6eacfa66ef26);
    s = '0; s[7:0] = 8'h06; s[135*8 +: 8] = 8'h80;   // SHA3-256, rate 136 bytes
    perm(s, 256'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
