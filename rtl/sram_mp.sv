// sram_mp: memory bank with NP independent ports (NP = 2 is a true dual-port
// SRAM bank; the register files use more). Each port reads or writes one 64-bit
// word per cycle; read data appears on the next cycle. When two ports write
// the same word in one cycle the higher-numbered port wins (the units never do
// this). The array stands in for a compiled SRAM macro.
// The paper uses compiled SRAM macros (dual-port banks); this array and its
// write-collision rule are this design's choices.
module sram_mp #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NP    = 2,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic [NP-1:0]         en,
  input  logic [NP-1:0]         we,
  input  logic [NP-1:0][AW-1:0] addr,
  input  logic [NP-1:0][63:0]   wdata,
  output logic [NP-1:0][63:0]   rdata
);
  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (en[p] && we[p]) mem[addr[p]] <= wdata[p];
      if (en[p] && !we[p]) rdata[p] <= mem[addr[p]];
    end
  end
endmodule
