// buf_cluster: one buffer cluster: a crossbar in front of up to four buffers.
//
// Each unit that uses the cluster owns one or more request ports (mem_req_t:
// enable, write, global buffer id, word address, data). The crossbar sends each
// request to the bank that its buffer id and address select and returns read
// data one cycle later on the same request port. A buffer is one bank, or, when
// SPLIT is set, two banks interleaved by address parity (bank = XOR of all
// address bits, local address = address >> 1). Parity interleaving lets the two
// butterfly units fetch four operands per cycle from two dual-port banks.
// Every bank has NP ports; requests are given bank ports in the order of the
// request ports. More than NP requests to one bank in one cycle is an error
// caught by an assertion; the Task Manager's buffer busy table and the units'
// access patterns keep it from happening.
// The cluster contents and port counts follow the paper's architecture figure;
// the parity interleaving and the address map are this design's choices.
module buf_cluster
  import dna_pkg::*;
#(
  parameter int unsigned NREQ    = 4,
  parameter int unsigned NBUF_C  = 2,
  parameter int unsigned ID_BASE = 0,
  parameter int unsigned NP      = 2,
  parameter int unsigned DEPTH0  = 1024,
  parameter int unsigned DEPTH1  = 1024,
  parameter int unsigned DEPTH2  = 1024,
  parameter int unsigned DEPTH3  = 1024,
  parameter bit [3:0]    SPLIT   = 4'b0000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  mem_req_t [NREQ-1:0]     req,
  output logic [NREQ-1:0][63:0]   rdata
);
  localparam int unsigned NPB = 2 * NBUF_C;       // physical bank slots
  localparam int unsigned RW  = (NREQ > 1) ? $clog2(NREQ) : 1;

  function automatic int unsigned depth_of(int unsigned b);
    case (b)
      0: return DEPTH0;
      1: return DEPTH1;
      2: return DEPTH2;
      default: return DEPTH3;
    endcase
  endfunction

  // physical bank targeted by each request: {buffer, half}
  logic [NREQ-1:0][2:0] pb_of;
  logic [NREQ-1:0][ADDR_W-1:0]      la_of;
  logic [NREQ-1:0]                  hit;
  always_comb begin
    for (int r = 0; r < NREQ; r++) begin
      logic [3:0] lb;
      lb = req[r].id - 4'(ID_BASE);
      hit[r]   = req[r].en && ((5'(req[r].id) - 5'(ID_BASE)) < 5'(NBUF_C));   // wraps high below ID_BASE
      pb_of[r] = '0;
      la_of[r] = req[r].addr;
      if (SPLIT[lb[1:0]]) begin
        pb_of[r] = {lb[1:0], ^req[r].addr};
        la_of[r] = req[r].addr >> 1;
      end else begin
        pb_of[r] = {lb[1:0], 1'b0};
      end
    end
  end

  // crossbar: per bank, first NP hitting requests get ports 0..NP-1
  logic [NPB-1:0][NP-1:0]             b_en, b_we;
  logic [NPB-1:0][NP-1:0][ADDR_W-1:0] b_addr;
  logic [NPB-1:0][NP-1:0][63:0]       b_wdata, b_rdata;
  logic [NREQ-1:0][$clog2(NP)-1:0]    port_of;
  logic [NPB-1:0]                     overflow;
  always_comb begin
    b_en = '0; b_we = '0; b_addr = '0; b_wdata = '0; port_of = '0; overflow = '0;
    for (int b = 0; b < NPB; b++) begin
      int unsigned used;
      used = 0;
      for (int r = 0; r < NREQ; r++) begin
        if (hit[r] && 32'(pb_of[r]) == b) begin
          if (used < NP) begin
            b_en[b][used]    = 1'b1;
            b_we[b][used]    = req[r].we;
            b_addr[b][used]  = la_of[r];
            b_wdata[b][used] = req[r].wdata;
            port_of[r]       = ($clog2(NP))'(used);
          end else begin
            overflow[b] = 1'b1;
          end
          used++;
        end
      end
    end
  end

  for (genvar g = 0; g < NPB; g++) begin : g_bank
    localparam int unsigned BUFI = g / 2;
    localparam bit          SPL  = SPLIT[BUFI];
    localparam int unsigned D    = SPL ? depth_of(BUFI) / 2 : depth_of(BUFI);
    localparam int unsigned AWB  = (D > 1) ? $clog2(D) : 1;
    if (SPL || (g % 2 == 0)) begin : g_mem
      logic [NP-1:0][AWB-1:0] a;
      for (genvar p = 0; p < NP; p++) begin : g_a
        assign a[p] = b_addr[g][p][AWB-1:0];
      end
      sram_mp #(.DEPTH(D), .NP(NP), .AW(AWB)) u_ram (
        .clk, .en(b_en[g]), .we(b_we[g]), .addr(a), .wdata(b_wdata[g]), .rdata(b_rdata[g])
      );
    end else begin : g_none
      assign b_rdata[g] = '0;
    end
  end

  // read-data return path
  logic [NREQ-1:0][2:0] pb_q;
  logic [NREQ-1:0][$clog2(NP)-1:0]  port_q;
  always_ff @(posedge clk) begin
    pb_q   <= pb_of;
    port_q <= port_of;
  end
  for (genvar r = 0; r < NREQ; r++) begin : g_ret
    assign rdata[r] = (32'(pb_q[r]) < NPB) ? b_rdata[pb_q[r]][port_q[r]] : '0;
  end

  // A bank can serve at most NP requests per cycle.
  a_ports: assert property (@(posedge clk) disable iff (!rst_n) overflow == '0)
    else $error("buf_cluster: more than %0d requests to one bank", NP);

  logic unused_rw;
  assign unused_rw = ^RW;
endmodule
