// inst_fifo: instruction FIFO between the system bus and the Task Manager.
// A synchronous first-in first-out queue of DEPTH task words with valid/ready
// handshakes on both sides; a word is taken when valid and ready are both high.
// out_valid rises the cycle after the first write; a full FIFO drops in_ready.
// The depth is this design's choice.
module inst_fifo
  import dna_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  inst_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output inst_t out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  inst_t       mem [DEPTH];
  logic [AW:0] wp, rp;

  assign in_ready  = (wp - rp) != (AW+1)'(DEPTH);
  assign out_valid = (wp != rp);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end
endmodule
