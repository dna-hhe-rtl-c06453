// tb_mem_model: behavioural buffer store for unit testbenches. Serves NP
// mem_req_t ports against one shared store of all buffer ids (read data one
// cycle after the request, like the buffer clusters) and offers poke/peek for
// the testbench to preload and inspect words.
// Not part of the paper's design; a testbench helper only.
module tb_mem_model
  import dna_pkg::*;
#(
  parameter int NP = 1
) (
  input  logic                 clk,
  input  mem_req_t [NP-1:0]    req,
  output logic [NP-1:0][63:0]  rdata
);
  logic [63:0] store [16][logic [15:0]];
  int          n_wr = 0, n_rd = 0;

  function automatic void poke(int id, int a, logic [63:0] d);
    store[id][16'(a)] = d;
  endfunction
  function automatic logic [63:0] peek(int id, int a);
    if (store[id].exists(16'(a))) return store[id][16'(a)];
    return 64'hDEAD_BEEF_DEAD_BEEF;
  endfunction

  always @(posedge clk) begin
    logic [NP-1:0][63:0] rd;
    rd = rdata;
    for (int p = 0; p < NP; p++) if (req[p].en) begin
      if (req[p].we) begin store[req[p].id][req[p].addr] = req[p].wdata; n_wr++; end
      else begin rd[p] = peek(int'(req[p].id), int'(req[p].addr)); n_rd++; end
    end
    rdata <= rd;
  end
endmodule
