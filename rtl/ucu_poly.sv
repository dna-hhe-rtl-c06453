// ucu_poly: scheduler of the Unified Crypto Unit for polynomial work: NTT/INTT
// over Z_q, FFT/IFFT over the complex field, and point-wise Mul/Add/Sub over any
// field. It drives the two butterfly units and issues all buffer accesses.
//
// Transforms (OP_UCU_NTT / OP_UCU_INTT; field F_CPLX makes them FFT/IFFT): task.len
// points start in buffer buf_a; each stage reads one buffer and writes the
// other (buf_a and buf_c alternate, RAM3/RAM4 ping-pong), so after log2(len)
// stages the result is in buf_a for an even and in buf_c for an odd stage count.
// Twiddles come from buffer buf_b from addr_b on, stored as a bit-reversed
// power table: the forward transform is the iterative Cooley-Tukey loop
//   for m = 1, 2, .., len/2: t = len/(2m); butterfly (j, j+t) of group i uses w[m+i]
// and the inverse the Gentleman-Sande loop
//   for t = 1, 2, .., len/2: h = len/(2t); butterfly (j, j+t) of group i uses w[h+i]
// with the 1/2 of each GS stage giving the 1/len scaling. Two butterflies (b, b+1)
// run per cycle; their four operands fall two per bank of a parity-split buffer.
// A stage ends when all its writes are done, then the next stage starts.
// Point-wise ops: out[i] = a[i] op b[i] for i < len, a from buf_a/addr_a, b from
// buf_b/addr_b, result to buf_c/addr_c. Two elements per cycle, one when the
// result overwrites a single-bank source; for Rubato one element per cycle
// holding two words, BFU0 taking the low and BFU1 the high word.
//
// The transform loop structure, the twiddle order, the bank mapping and the
// stage-by-stage synchronisation are this design's choices: the paper states
// which operations the unit performs, that RAM3/RAM4 work in ping-pong and that
// two butterfly units run in parallel.
module ucu_poly
  import dna_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  inst_t             task_i,
  output logic              done,
  // butterfly units
  output logic              bf_valid,
  output bf_op_e            bf_op,
  output logic [1:0][63:0]  bf_in0, bf_in1, bf_in2,
  input  logic              bf_out_valid,
  input  logic [1:0][63:0]  bf_out0, bf_out1,
  // buffer requests: 0..5 reads, 6..9 writes
  output mem_req_t [9:0]    req,
  input  logic [9:0][63:0]  rdata
);
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DRAIN, S_DONE } state_e;
  state_e st;
  inst_t       tk;
  logic        is_tr, inv, rate2, rub;
  logic [3:0]  logn, s;
  logic [3:0]  src, dst;
  logic [15:0] cnt;          // butterflies (transform) or elements (point-wise) issued
  logic [15:0] wcnt;         // butterflies / elements written in this stage
  logic [15:0] total;        // per stage

  // ---------------- address generation for the issue cycle
  logic [15:0] j0, j1, tw0, tw1, tstep;
  always_comb begin
    logic [3:0]  tl;
    logic [15:0] b0, b1, i0, i1, base;
    b0 = cnt; b1 = cnt + 16'd1;
    tl = inv ? s : (logn - 4'd1 - s);
    tstep = 16'd1 << tl;
    i0 = b0 >> tl; i1 = b1 >> tl;
    j0 = (i0 << (tl + 4'd1)) + (b0 & (tstep - 16'd1));
    j1 = (i1 << (tl + 4'd1)) + (b1 & (tstep - 16'd1));
    base = inv ? (tk.len >> (s + 4'd1)) : (16'd1 << s);
    tw0 = tk.addr_b + base + i0;
    tw1 = tk.addr_b + base + i1;
  end

  logic issue;
  assign issue = (st == S_RUN) && (cnt < total);

  // one cycle after the reads: operands valid
  typedef struct packed {
    logic [15:0] a0, a1, a2, a3;
    logic        two;
  } tag_t;
  logic  d_v;
  tag_t  d_tag;
  tag_t        tq [16];          // write addresses of operations in flight
  logic [4:0]  tq_wp, tq_rp;
  tag_t        q_tag;

  always_comb begin
    req = {10{MEM_IDLE}};
    if (issue) begin
      if (is_tr) begin
        req[0] = '{en: 1'b1, we: 1'b0, id: src, addr: j0,         wdata: '0};
        req[1] = '{en: 1'b1, we: 1'b0, id: src, addr: j0 + tstep, wdata: '0};
        req[2] = '{en: 1'b1, we: 1'b0, id: src, addr: j1,         wdata: '0};
        req[3] = '{en: 1'b1, we: 1'b0, id: src, addr: j1 + tstep, wdata: '0};
        req[4] = '{en: 1'b1, we: 1'b0, id: tk.buf_b, addr: tw0,   wdata: '0};
        req[5] = '{en: 1'b1, we: 1'b0, id: tk.buf_b, addr: tw1,   wdata: '0};
      end else begin
        req[0] = '{en: 1'b1, we: 1'b0, id: tk.buf_a, addr: tk.addr_a + cnt, wdata: '0};
        req[1] = '{en: 1'b1, we: 1'b0, id: tk.buf_b, addr: tk.addr_b + cnt, wdata: '0};
        if (rate2) begin
          req[2] = '{en: 1'b1, we: 1'b0, id: tk.buf_a, addr: tk.addr_a + cnt + 16'd1, wdata: '0};
          req[3] = '{en: 1'b1, we: 1'b0, id: tk.buf_b, addr: tk.addr_b + cnt + 16'd1, wdata: '0};
        end
      end
    end
    // write-back
    if (bf_out_valid && (st == S_RUN || st == S_DRAIN)) begin
      if (is_tr) begin
        req[6] = '{en: 1'b1, we: 1'b1, id: dst, addr: q_tag.a0, wdata: bf_out0[0]};
        req[7] = '{en: 1'b1, we: 1'b1, id: dst, addr: q_tag.a1, wdata: bf_out1[0]};
        req[8] = '{en: 1'b1, we: 1'b1, id: dst, addr: q_tag.a2, wdata: bf_out0[1]};
        req[9] = '{en: 1'b1, we: 1'b1, id: dst, addr: q_tag.a3, wdata: bf_out1[1]};
      end else if (rub) begin
        req[6] = '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: q_tag.a0,
                   wdata: 64'({bf_out0[1][27:0], bf_out0[0][27:0]})};
      end else begin
        req[6] = '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: q_tag.a0, wdata: bf_out0[0]};
        if (q_tag.two)
          req[8] = '{en: 1'b1, we: 1'b1, id: tk.buf_c, addr: q_tag.a2, wdata: bf_out0[1]};
      end
    end
  end

  // ---------------- butterfly issue (operands arrive one cycle after the reads)
  always_comb begin
    bf_valid = d_v;
    bf_op    = is_tr ? (inv ? BF_GS : BF_CT)
             : (tk.op == OP_UCU_PWADD) ? BF_ADD : (tk.op == OP_UCU_PWSUB) ? BF_SUB : BF_MUL;
    if (is_tr) begin
      bf_in0[0] = rdata[0]; bf_in1[0] = rdata[1]; bf_in2[0] = rdata[4];
      bf_in0[1] = rdata[2]; bf_in1[1] = rdata[3]; bf_in2[1] = rdata[5];
    end else if (rub) begin
      bf_in0[0] = 64'(rdata[0][27:0]);  bf_in1[0] = 64'(rdata[1][27:0]);  bf_in2[0] = '0;
      bf_in0[1] = 64'(rdata[0][55:28]); bf_in1[1] = 64'(rdata[1][55:28]); bf_in2[1] = '0;
    end else begin
      bf_in0[0] = rdata[0]; bf_in1[0] = rdata[1]; bf_in2[0] = '0;
      bf_in0[1] = rdata[2]; bf_in1[1] = rdata[3]; bf_in2[1] = '0;
    end
  end

  // ---------------- tag FIFO: write addresses of operations in flight
  assign q_tag = tq[tq_rp[3:0]];
  always_ff @(posedge clk) if (d_v) tq[tq_wp[3:0]] <= d_tag;

  function automatic logic split_buf(logic [3:0] id);
    return (id == B_RAM3) || (id == B_RAM4);
  endfunction

  // start decode and write count including this cycle's write-back
  logic        tr;
  logic [3:0]  ln;
  logic [15:0] wnext;
  always_comb begin
    tr = (task_i.op == OP_UCU_NTT) || (task_i.op == OP_UCU_INTT);
    ln = '0;
    for (int k = 1; k < 16; k++) if (task_i.len == (16'd1 << k)) ln = 4'(k);
    wnext = wcnt + ((bf_out_valid) ? ((is_tr || q_tag.two) ? 16'd2 : 16'd1) : 16'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; tk <= '0; is_tr <= 1'b0; inv <= 1'b0; rate2 <= 1'b0; rub <= 1'b0;
      logn <= '0; s <= '0; src <= '0; dst <= '0; cnt <= '0; wcnt <= '0; total <= '0;
      d_v <= 1'b0; d_tag <= '0; tq_wp <= '0; tq_rp <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      d_v  <= issue;
      if (issue) begin
        if (is_tr) d_tag <= '{a0: j0, a1: j0 + tstep, a2: j1, a3: j1 + tstep, two: 1'b1};
        else       d_tag <= '{a0: tk.addr_c + cnt, a1: '0, a2: tk.addr_c + cnt + 16'd1, a3: '0, two: rate2};
        cnt <= cnt + ((is_tr || rate2) ? 16'd2 : 16'd1);
      end
      if (d_v) tq_wp <= tq_wp + 5'd1;
      if (bf_out_valid && (st == S_RUN || st == S_DRAIN)) begin
        tq_rp <= tq_rp + 5'd1;
        wcnt  <= wcnt + ((is_tr || q_tag.two) ? 16'd2 : 16'd1);
      end
      case (st)
        S_IDLE: if (start) begin
          tk    <= task_i;
          is_tr <= tr;
          inv   <= (task_i.op == OP_UCU_INTT);
          rub   <= (task_i.field == F_RUB);
          rate2 <= (task_i.field != F_RUB) &&
                   !(((task_i.buf_c == task_i.buf_a) || (task_i.buf_c == task_i.buf_b)) && !split_buf(task_i.buf_c));
          logn  <= ln;
          s     <= '0;
          src   <= task_i.buf_a;
          dst   <= task_i.buf_c;
          cnt   <= '0;
          wcnt  <= '0;
          total <= tr ? (task_i.len >> 1) : task_i.len;
          st    <= S_RUN;
        end
        S_RUN: if (!(cnt < total) || (issue && cnt + ((is_tr || rate2) ? 16'd2 : 16'd1) >= total)) st <= S_DRAIN;
        S_DRAIN: begin
          if (wnext >= total) begin
            if (is_tr && (s + 4'd1 < logn)) begin
              s    <= s + 4'd1;
              src  <= dst;
              dst  <= src;
              cnt  <= '0;
              wcnt <= '0;
              st   <= S_RUN;
            end else begin
              st <= S_DONE;
            end
          end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
