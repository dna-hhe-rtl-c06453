// dna_hhe: top level of the dual-mode near-network HHE accelerator.
//
// Structure: the host writes 128-bit task instructions into the instruction
// FIFO; the Task Manager dispatches them, out of order where unit and buffer
// busy tables allow, to six units: the configuration unit (moduli, Barrett
// constants, Rubato parameters, nonce, packet sizes), the DMA Access Unit
// (system bus), the Random Sampling Unit (SHAKE128 sampler), the Unified Crypto
// Unit (two multi-field butterfly units), the Data Transfer Unit (buffer to
// buffer) and the NIC Interface Unit (64-bit tap to the network interface).
// On-chip storage is five buffer clusters, each with its own crossbar:
//   BUF0: RAM0A/RAM0B/RAM1A/RAM1B (public key / ciphertext, N words each)
//         ports DAU, UCU, DTU
//   BUF1: RAM2 (message / encoded plaintext, N words)             ports DAU, DTU
//   BUF2: RAM3, RAM4 (ping-pong polynomial buffers, N words, two parity banks
//         each), RAM5 (FFT twiddles, N), RAM6 (NTT twiddles, forward and
//         inverse, 2N)                                             ports RSU, UCU, DTU
//   BUF3: RF0..RF2 (Rubato state, key, constants; 32 entries, 4 ports)
//                                                                  ports RSU, UCU, DTU, DAU
//   BUF4: RAM7 (NIC buffer, packets)                               ports DAU, DTU, NIU
// The unit-to-cluster links follow the paper's architecture figure. All ten
// UCU request lines reach BUF0, BUF2 and BUF3; each cluster serves only the
// requests whose buffer id it owns, and read data is routed back by the
// cluster of the buffer that was read, registered with the request.
//
// Interfaces (plain ports):
//   inst_*  : valid/ready instruction input (inst_t, 128 bits)
//   dma_*   : one outstanding-capable request channel (we, 40-bit byte address,
//             64-bit data) and a read response channel, in order
//   tx_*/rx_*: 64-bit network taps with byte keep and last
//   idle    : no instruction waiting and all units idle
//   n_*     : dispatch statistics (dispatched, out-of-order, stall cycles)
// Parameter N sets the polynomial buffer depth (paper: N = 8192).
module dna_hhe
  import dna_pkg::*;
#(
  parameter int unsigned N         = 8192,
  parameter int unsigned RF_DEPTH  = 32,
  parameter int unsigned NIC_DEPTH = 2048,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned WIN       = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  // instructions
  input  logic         inst_valid,
  output logic         inst_ready,
  input  logic [127:0] inst_data,
  // system bus (DMA)
  output logic         dma_req_valid,
  input  logic         dma_req_ready,
  output logic         dma_req_we,
  output logic [39:0]  dma_req_addr,
  output logic [63:0]  dma_req_wdata,
  input  logic         dma_rsp_valid,
  input  logic [63:0]  dma_rsp_data,
  // network taps
  output logic         tx_valid,
  input  logic         tx_ready,
  output logic [63:0]  tx_data,
  output logic [7:0]   tx_keep,
  output logic         tx_last,
  input  logic         rx_valid,
  output logic         rx_ready,
  input  logic [63:0]  rx_data,
  input  logic [7:0]   rx_keep,
  input  logic         rx_last,
  // status
  output logic         idle,
  output logic         ucu_busy,
  output logic [15:0]  rx_count,
  output logic [31:0]  n_disp,
  output logic [31:0]  n_ooo,
  output logic [31:0]  n_stall
);
  // ---------------- instruction path
  logic  f_valid, f_ready;
  inst_t f_data;
  inst_fifo #(.DEPTH (FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid (inst_valid), .in_ready (inst_ready), .in_data (inst_t'(inst_data)),
    .out_valid (f_valid), .out_ready (f_ready), .out_data (f_data)
  );

  logic [NUNIT-1:0] start, done;
  inst_t            task_q;
  logic             cfg_we;
  logic [4:0]       cfg_idx;
  logic [63:0]      cfg_data;
  task_manager #(.WIN (WIN)) u_tm (
    .clk, .rst_n, .in_valid (f_valid), .in_ready (f_ready), .in_data (f_data),
    .start, .task_o (task_q), .done,
    .cfg_we, .cfg_idx, .cfg_data, .idle, .n_ooo, .n_stall, .n_disp
  );

  cfg_t cfg;
  config_unit u_cfg (
    .clk, .rst_n, .wr_en (cfg_we), .wr_idx (cfg_idx), .wr_data (cfg_data), .cfg
  );

  // ---------------- units
  mem_req_t        dau_mem, niu_mem, rsu_wr;
  logic [63:0]     dau_rd, niu_rd;
  mem_req_t [4:0]  dtu_port;
  logic [4:0][63:0] dtu_rd;
  mem_req_t [9:0]  ucu_req;
  logic [9:0][63:0] ucu_rd;
  dma_req_t        dreq;
  nic_flit_t       txf, rxf;

  dau u_dau (
    .clk, .rst_n, .start (start[0]), .task_i (task_q), .done (done[0]),
    .bus_req_valid (dma_req_valid), .bus_req_ready (dma_req_ready), .bus_req (dreq),
    .bus_rsp_valid (dma_rsp_valid), .bus_rsp_data (dma_rsp_data),
    .mem (dau_mem), .mem_rdata (dau_rd)
  );
  assign dma_req_we    = dreq.we;
  assign dma_req_addr  = dreq.addr;
  assign dma_req_wdata = dreq.wdata;

  rsu u_rsu (
    .clk, .rst_n, .start (start[1]), .task_i (task_q), .cfg, .done (done[1]), .wr (rsu_wr)
  );

  ucu u_ucu (
    .clk, .rst_n, .start (start[2]), .task_i (task_q), .cfg, .busy (ucu_busy), .done (done[2]),
    .req (ucu_req), .rdata (ucu_rd)
  );

  dtu u_dtu (
    .clk, .rst_n, .start (start[3]), .task_i (task_q), .done (done[3]),
    .port (dtu_port), .rdata (dtu_rd)
  );

  assign rxf = '{data: rx_data, keep: rx_keep, last: rx_last};
  niu u_niu (
    .clk, .rst_n, .start (start[4]), .task_i (task_q), .cfg, .done (done[4]), .rx_count,
    .tx_valid, .tx_ready, .tx_flit (txf), .rx_valid, .rx_ready, .rx_flit (rxf),
    .mem (niu_mem), .mem_rdata (niu_rd)
  );
  assign tx_data = txf.data;
  assign tx_keep = txf.keep;
  assign tx_last = txf.last;

  // ---------------- buffer clusters
  // BUF0: {DAU, UCU x10, DTU}
  mem_req_t [11:0]  c0_req;
  logic [11:0][63:0] c0_rd;
  assign c0_req = {dtu_port[0], ucu_req, dau_mem};
  buf_cluster #(.NREQ (12), .NBUF_C (4), .ID_BASE (0), .NP (2),
                .DEPTH0 (N), .DEPTH1 (N), .DEPTH2 (N), .DEPTH3 (N), .SPLIT (4'b0000))
    u_buf0 (.clk, .rst_n, .req (c0_req), .rdata (c0_rd));

  // BUF1: {DAU, DTU}
  mem_req_t [1:0]   c1_req;
  logic [1:0][63:0] c1_rd;
  assign c1_req = {dtu_port[1], dau_mem};
  buf_cluster #(.NREQ (2), .NBUF_C (1), .ID_BASE (4), .NP (2),
                .DEPTH0 (N), .DEPTH1 (1), .DEPTH2 (1), .DEPTH3 (1), .SPLIT (4'b0000))
    u_buf1 (.clk, .rst_n, .req (c1_req), .rdata (c1_rd));

  // BUF2: {RSU, UCU x10, DTU}
  mem_req_t [11:0]  c2_req;
  logic [11:0][63:0] c2_rd;
  assign c2_req = {dtu_port[2], ucu_req, rsu_wr};
  buf_cluster #(.NREQ (12), .NBUF_C (4), .ID_BASE (5), .NP (2),
                .DEPTH0 (N), .DEPTH1 (N), .DEPTH2 (N), .DEPTH3 (2 * N), .SPLIT (4'b0011))
    u_buf2 (.clk, .rst_n, .req (c2_req), .rdata (c2_rd));

  // BUF3: {RSU, UCU x10, DTU, DAU}
  mem_req_t [12:0]  c3_req;
  logic [12:0][63:0] c3_rd;
  assign c3_req = {dau_mem, dtu_port[3], ucu_req, rsu_wr};
  buf_cluster #(.NREQ (13), .NBUF_C (3), .ID_BASE (9), .NP (4),
                .DEPTH0 (RF_DEPTH), .DEPTH1 (RF_DEPTH), .DEPTH2 (RF_DEPTH), .DEPTH3 (1),
                .SPLIT (4'b0000))
    u_buf3 (.clk, .rst_n, .req (c3_req), .rdata (c3_rd));

  // BUF4: {DAU, DTU, NIU}
  mem_req_t [2:0]   c4_req;
  logic [2:0][63:0] c4_rd;
  assign c4_req = {niu_mem, dtu_port[4], dau_mem};
  buf_cluster #(.NREQ (3), .NBUF_C (1), .ID_BASE (12), .NP (2),
                .DEPTH0 (NIC_DEPTH), .DEPTH1 (1), .DEPTH2 (1), .DEPTH3 (1), .SPLIT (4'b0000))
    u_buf4 (.clk, .rst_n, .req (c4_req), .rdata (c4_rd));

  // ---------------- read data return, by the cluster of the buffer read
  logic [2:0]       dau_cl;
  logic [9:0][2:0]  ucu_cl;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dau_cl <= '0; ucu_cl <= '0;
    end else begin
      dau_cl <= cluster_of(dau_mem.id);
      for (int k = 0; k < 10; k++) ucu_cl[k] <= cluster_of(ucu_req[k].id);
    end
  end

  always_comb begin
    case (dau_cl)
      3'd0:    dau_rd = c0_rd[0];
      3'd1:    dau_rd = c1_rd[0];
      3'd3:    dau_rd = c3_rd[12];
      default: dau_rd = c4_rd[0];
    endcase
    for (int k = 0; k < 10; k++)
      case (ucu_cl[k])
        3'd0:    ucu_rd[k] = c0_rd[1 + k];
        3'd2:    ucu_rd[k] = c2_rd[1 + k];
        default: ucu_rd[k] = c3_rd[1 + k];
      endcase
  end
  assign dtu_rd = {c4_rd[1], c3_rd[11], c2_rd[11], c1_rd[1], c0_rd[11]};
  assign niu_rd = c4_rd[2];
endmodule
