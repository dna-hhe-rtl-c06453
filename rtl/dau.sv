// dau: DMA Unit, the accelerator's only path to system memory.
//
// Reader (OP_DAU_RD): fetches len 64-bit words from system byte address imm,
// imm+8, ... and writes them to buffer buf_c from addr_c on. Up to MAXOUT reads
// are outstanding; responses arrive in order.
// Writer (OP_DAU_WR): reads len words of buffer buf_a from addr_a on and writes
// them to system memory from address imm on; writes need no response.
// Bus side: a generic request port (valid/ready, dma_req_t) and an in-order
// read-response port (valid, data). It stands for the SoC bus master port
// (TileLink in the evaluated system), whose protocol is outside this design.
// Buffer side: one mem_req_t port, read data one cycle after a read.
// done pulses one cycle after the last word has been written.
// The Reader/Writer split follows the paper's architecture figure; the request port, the
// number of reads in flight and the byte addressing are this design's choices.
module dau
  import dna_pkg::*;
#(
  parameter int unsigned MAXOUT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  inst_t       task_i,
  output logic        done,
  // system bus
  output logic        bus_req_valid,
  input  logic        bus_req_ready,
  output dma_req_t    bus_req,
  input  logic        bus_rsp_valid,
  input  logic [63:0] bus_rsp_data,
  // buffer port
  output mem_req_t    mem,
  input  logic [63:0] mem_rdata
);
  typedef enum logic [2:0] { S_IDLE, S_RD, S_WR_FETCH, S_WR_WAIT, S_WR_BUS, S_DONE } state_e;
  state_e st;
  inst_t       tk;
  logic [15:0] issued, finished;
  logic [3:0]  outst;
  logic [63:0] wdata_q;

  logic issue_rd;
  assign issue_rd = (st == S_RD) && (issued != tk.len) && (outst < 4'(MAXOUT));

  always_comb begin
    bus_req_valid = 1'b0;
    bus_req       = '0;
    mem           = MEM_IDLE;
    if (issue_rd) begin
      bus_req_valid = 1'b1;
      bus_req.we    = 1'b0;
      bus_req.addr  = tk.imm + SA_W'({issued, 3'b000});
    end
    if (st == S_WR_BUS) begin
      bus_req_valid = 1'b1;
      bus_req.we    = 1'b1;
      bus_req.addr  = tk.imm + SA_W'({finished, 3'b000});
      bus_req.wdata = wdata_q;
    end
    if (st == S_RD && bus_rsp_valid)
      mem = '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: tk.addr_c + finished, wdata: bus_rsp_data};
    if (st == S_WR_FETCH)
      mem = '{en: 1'b1, we: 1'b0, id: tk.buf_a, addr: tk.addr_a + finished, wdata: '0};
  end

  logic acc, rsp;   // request accepted / response received in this cycle
  assign acc = issue_rd && bus_req_ready;
  assign rsp = bus_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; tk <= '0; issued <= '0; finished <= '0; outst <= '0; wdata_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          tk <= task_i; issued <= '0; finished <= '0; outst <= '0;
          st <= (task_i.op == OP_DAU_WR) ? S_WR_FETCH : S_RD;
        end
        S_RD: begin
          if (acc) issued <= issued + 16'd1;
          if (rsp) finished <= finished + 16'd1;
          outst <= outst + 4'(acc) - 4'(rsp);
          if (rsp && finished + 16'd1 == tk.len) st <= S_DONE;
          if (tk.len == 0) st <= S_DONE;
        end
        S_WR_FETCH: st <= (finished == tk.len) ? S_DONE : S_WR_WAIT;
        S_WR_WAIT: begin
          wdata_q <= mem_rdata;
          st      <= S_WR_BUS;
        end
        S_WR_BUS: if (bus_req_ready) begin
          finished <= finished + 16'd1;
          st       <= S_WR_FETCH;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
