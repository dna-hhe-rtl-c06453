// niu: NIC Interface Unit, the accelerator's direct 64-bit link to the network
// interface controller.
//
// Send (OP_NIU_SEND): streams a packet held in the NIC buffer from addr_a on to
// the NIC: len words, or, when len is 0, the configured header size plus
// ciphertext segment length. Each flit carries 64 data bits, a byte-keep mask
// (all ones) and last on the final word. Receive (OP_NIU_RECV): accepts flits
// from the NIC and stores them in the NIC buffer from addr_c on until a flit with
// last, or len words, arrived; the number received is kept in rx_count.
// Both directions use valid/ready. A send word is read from the buffer, then
// offered until taken (two cycles per word when the NIC is always ready); a
// received word is written in the cycle it is accepted. The flit format is
// generic; the paper gives only the 64-bit width and the send/receive roles.
module niu
  import dna_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  inst_t       task_i,
  input  cfg_t        cfg,
  output logic        done,
  output logic [15:0] rx_count,
  // to the NIC
  output logic        tx_valid,
  input  logic        tx_ready,
  output nic_flit_t   tx_flit,
  // from the NIC
  input  logic        rx_valid,
  output logic        rx_ready,
  input  nic_flit_t   rx_flit,
  // NIC buffer port
  output mem_req_t    mem,
  input  logic [63:0] mem_rdata
);
  typedef enum logic [2:0] { S_IDLE, S_TX_RD, S_TX_WAIT, S_TX_OUT, S_RX, S_DONE } state_e;
  state_e st;
  inst_t       tk;
  logic [15:0] total, cnt;
  logic [63:0] word_q;

  assign tx_valid = (st == S_TX_OUT);
  assign tx_flit  = '{data: word_q, keep: 8'hFF, last: (cnt + 16'd1 == total)};
  assign rx_ready = (st == S_RX);

  always_comb begin
    mem = MEM_IDLE;
    if (st == S_TX_RD)
      mem = '{en: 1'b1, we: 1'b0, id: tk.buf_a, addr: tk.addr_a + cnt, wdata: '0};
    if (st == S_RX && rx_valid)
      mem = '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: tk.addr_c + cnt, wdata: rx_flit.data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; tk <= '0; total <= '0; cnt <= '0; word_q <= '0; done <= 1'b0; rx_count <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          tk  <= task_i;
          cnt <= '0;
          if (task_i.op == OP_NIU_RECV) begin
            total <= task_i.len;
            st    <= S_RX;
          end else begin
            total <= (task_i.len != 0) ? task_i.len : cfg.hdr_words + cfg.seg_words;
            st    <= S_TX_RD;
          end
        end
        S_TX_RD:   st <= (cnt == total) ? S_DONE : S_TX_WAIT;
        S_TX_WAIT: begin word_q <= mem_rdata; st <= S_TX_OUT; end
        S_TX_OUT:  if (tx_ready) begin
          cnt <= cnt + 16'd1;
          st  <= S_TX_RD;
        end
        S_RX: if (rx_valid) begin
          cnt <= cnt + 16'd1;
          if (rx_flit.last || cnt + 16'd1 == total) begin
            rx_count <= cnt + 16'd1;
            st       <= S_DONE;
          end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^rx_flit.keep;
endmodule
