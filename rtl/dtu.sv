// dtu: Data Transfer Unit: copies len words from buffer buf_a (from addr_a on)
// to buffer buf_c (from addr_c on). It covers buffer-to-buffer, regfile-to-
// regfile and buffer-to-regfile moves alike, for example placing a ciphertext
// segment behind a packet header in the NIC buffer, or picking the received
// ciphertext out of a packet.
// The unit owns one port on each of the five clusters. A read is issued on the
// source cluster's port and its data written one cycle later on the
// destination cluster's port, so copies between clusters move one word per
// cycle; copies inside one cluster share the port and move one word every two
// cycles. done pulses one cycle after the last write. The port counts follow
// the paper's architecture figure (one DTU port per cluster, two for the
// regfiles, of which one is used here); the timing is this design's choice.
module dtu
  import dna_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  inst_t               task_i,
  output logic                done,
  output mem_req_t [4:0]      port,
  input  logic [4:0][63:0]    rdata
);
  inst_t       tk;
  logic        busy, rd_pend;
  logic [15:0] rd_cnt, wr_cnt;
  logic [2:0]  sc, dc;
  assign sc = cluster_of(tk.buf_a);
  assign dc = cluster_of(tk.buf_c);

  logic do_rd;
  assign do_rd = busy && (rd_cnt != tk.len) && !(sc == dc && rd_pend);

  always_comb begin
    port = {5{MEM_IDLE}};
    if (rd_pend)
      port[dc] = '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: tk.addr_c + wr_cnt, wdata: rdata[sc]};
    if (do_rd)
      port[sc] = '{en: 1'b1, we: 1'b0, id: tk.buf_a, addr: tk.addr_a + rd_cnt, wdata: '0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tk <= '0; busy <= 1'b0; rd_pend <= 1'b0; rd_cnt <= '0; wr_cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        tk <= task_i; busy <= 1'b1; rd_cnt <= '0; wr_cnt <= '0; rd_pend <= 1'b0;
      end else if (busy) begin
        rd_pend <= do_rd;
        if (do_rd) rd_cnt <= rd_cnt + 16'd1;
        if (rd_pend) wr_cnt <= wr_cnt + 16'd1;
        if ((rd_pend && wr_cnt + 16'd1 == tk.len) || tk.len == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
