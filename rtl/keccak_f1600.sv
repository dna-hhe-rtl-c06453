// keccak_f1600: the Keccak-f[1600] permutation of FIPS 202, the core of the
// SHAKE extendable-output function used for random number generation.
//
// The 1600-bit state is 25 lanes of 64 bits, lane (x, y) at bits
// [64*(x+5y) +: 64], bytes in little-endian order as in FIPS 202. One round
// (theta, rho, pi, chi, iota) is computed per cycle.
// Interface/timing: pulse start with state_in; busy is high for 24 cycles and
// done pulses for one cycle when state_out holds the permuted state. state_out
// keeps its value until the next start. The round-per-cycle structure is this
// design's choice; the paper only names SHA3/SHAKE.
module keccak_f1600 (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1599:0] state_in,
  output logic [1599:0] state_out,
  output logic          busy,
  output logic          done
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008
  };
  // rotation offsets, index x + 5*y
  localparam int ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  function automatic logic [63:0] rotl(logic [63:0] v, int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic logic [1599:0] round_f(logic [1599:0] s, logic [63:0] rc);
    logic [63:0] a [25];
    logic [63:0] b [25];
    logic [63:0] c [5];
    logic [63:0] d [5];
    logic [1599:0] o;
    for (int i = 0; i < 25; i++) a[i] = s[64*i +: 64];
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    // rho and pi: B[y, 2x+3y] = rot(A[x, y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    a[0] = a[0] ^ rc;
    for (int i = 0; i < 25; i++) o[64*i +: 64] = a[i];
    return o;
  endfunction

  logic [4:0] rnd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rnd <= '0; state_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        state_out <= state_in;
        busy      <= 1'b1;
        rnd       <= '0;
      end else if (busy) begin
        state_out <= round_f(state_out, RC[rnd]);
        rnd       <= rnd + 5'd1;
        if (rnd == 5'd23) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
