// rsu: RNG & Sampling Unit.
//
// Runs SHAKE128 on a one-block seed and turns the output stream into samples,
// which it writes to a buffer (Compute BUF2 for RNS-CKKS, Regfile BUF3 for
// Rubato). Seed block: the 128-bit nonce from the Config Unit, then the 2-bit
// domain and the task's 16-bit counter (imm[15:0]) as bytes 16-17, then SHAKE
// padding (0x1F ... 0x80) in the 168-byte rate. Each 64-bit lane of the
// squeezed output yields at most one sample, one lane per cycle; after 21 lanes
// the state is permuted again (24 cycles).
// Samplers (task op):
//   OP_RSU_UNI : uniform in [0, m) by rejection: low kb bits of the lane, kept
//                if below m. m = t and kb = k_t for Rubato, m = q_dom and kb = K
//                for RNS-CKKS. Used for the Rubato round constants rc_i.
//   OP_RSU_TER : ternary {0, 1, m-1} from two lane bits (value 3 rejected).
//   OP_RSU_ERR : small error: centered binomial, popcount of 21 bits minus
//                popcount of the next 21 (standard deviation about 3.2).
// Rubato samples are packed two per word ([27:0] first, [55:28] second), as the
// register file holds two state words per element. task.len counts samples and
// must be even for Rubato; they go to buf_c from addr_c on.
// SHAKE as the generator and rejection sampling for rc_i follow the paper; the
// seed layout, the error distribution and the ternary mapping are this design's
// choices because the paper does not give them.
module rsu
  import dna_pkg::*;
#(
  parameter int unsigned K = 54
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  inst_t    task_i,
  input  cfg_t     cfg,
  output logic     done,
  output mem_req_t wr
);
  typedef enum logic [1:0] { S_IDLE, S_PERM, S_SAMPLE } state_e;
  state_e st;

  logic          k_start, k_busy, k_done;
  logic [1599:0] k_in, k_out;
  keccak_f1600 u_keccak (
    .clk, .rst_n, .start(k_start), .state_in(k_in), .state_out(k_out), .busy(k_busy), .done(k_done)
  );

  inst_t       tk;
  logic [4:0]  lane;
  logic [15:0] cnt;          // samples produced
  logic [27:0] held;         // first sample of a Rubato pair
  logic [15:0] waddr;

  // modulus and bit count of the sampler
  logic [55:0] m;
  logic [5:0]  kb;
  assign m  = (tk.field == F_RUB) ? 56'(cfg.t) : cfg.q[tk.dom];
  assign kb = (tk.field == F_RUB) ? 6'(cfg.k_t) : 6'(K);

  // one candidate sample from the current lane
  logic [63:0] w;
  logic        acc;
  logic [55:0] smp;
  logic signed [6:0] e;   // centered binomial value, -21..21
  assign e = 7'($countones(w[20:0])) - 7'($countones(w[41:21]));
  always_comb begin
    w   = k_out[64*lane +: 64];
    acc = 1'b0;
    smp = '0;
    case (tk.op)
      OP_RSU_TER: begin
        acc = (w[1:0] != 2'd3);
        smp = (w[1:0] == 2'd2) ? m - 56'd1 : 56'(w[1:0]);
      end
      OP_RSU_ERR: begin
        acc = 1'b1;
        smp = (e < 0) ? m - 56'(-e) : 56'(e);
      end
      default: begin
        smp = 56'(w & ((64'd1 << kb) - 64'd1));
        acc = (smp < m);
      end
    endcase
  end

  logic [1599:0] seed;
  always_comb begin
    seed = '0;
    seed[127:0]       = cfg.nonce;
    seed[135:128]     = {6'd0, task_i.dom};
    seed[143:136]     = task_i.imm[7:0];
    seed[151:144]     = task_i.imm[15:8];
    seed[159:152]     = 8'h1F;
    seed[167*8 +: 8]  = 8'h80;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; k_start <= 1'b0; k_in <= '0; tk <= '0;
      lane <= '0; cnt <= '0; held <= '0; waddr <= '0; wr <= MEM_IDLE;
    end else begin
      done    <= 1'b0;
      k_start <= 1'b0;
      wr      <= MEM_IDLE;
      case (st)
        S_IDLE: if (start) begin
          tk      <= task_i;
          k_in    <= seed;
          k_start <= 1'b1;
          cnt     <= '0;
          waddr   <= task_i.addr_c;
          st      <= S_PERM;
        end
        S_PERM: if (k_done) begin
          lane <= '0;
          st   <= S_SAMPLE;
        end
        S_SAMPLE: begin
          if (cnt == tk.len) begin
            done <= 1'b1;
            st   <= S_IDLE;
          end else begin
            if (acc) begin
              cnt <= cnt + 16'd1;
              if (tk.field == F_RUB) begin
                if (!cnt[0]) held <= smp[27:0];
                else begin
                  wr <= '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: waddr, wdata: 64'({smp[27:0], held})};
                  waddr <= waddr + 16'd1;
                end
              end else begin
                wr <= '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: waddr, wdata: 64'(smp)};
                waddr <= waddr + 16'd1;
              end
            end
            if (lane == 5'd20) begin
              k_in    <= k_out;
              k_start <= 1'b1;
              st      <= S_PERM;
            end else begin
              lane <= lane + 5'd1;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = k_busy;
endmodule
