// ucu_rubato: scheduler of the Unified Crypto Unit for the Rubato linear and
// non-linear layers. The state (n = v*v words, word x(r,c) at index r*v+c) sits in
// a register file, two words per 64-bit entry: entry e holds word 2e in bits [27:0]
// and word 2e+1 in bits [55:28]. The entry base is task.buf_a / task.addr_a and
// the result overwrites the state.
//
//  MixColumns (OP_UCU_MIXCOL): y(r,c) = sum_i M[r][i]*x(i,c), M the circulant
//    matrix with first column m0 (M[r][i] = m0[(r-i) mod v]). Columns are taken in
//    pairs: BFU0 processes column 2p and BFU1 column 2p+1. For each source row i the
//    entry (i,p) is read once and v multiply-accumulates (one per output row r)
//    follow; the accumulation of the last source row writes straight back to the
//    state entry (r,p).
//  MixRows (OP_UCU_MIXROW): y(r,c) = sum_j M[c][j]*x(r,j); BFU0 processes row 2p and
//    BFU1 row 2p+1, two entries are read for every two source columns and two
//    result entries are written for every two output columns.
//  Feistel (OP_UCU_FEISTEL): y_i = x_i + x_{i-1}^2 (y_0 = x_0), one entry per cycle:
//    BFU0 forms x_{2e} + x_{2e-1}^2, BFU1 forms x_{2e+1} + x_{2e}^2.
//
// The column-wise schedule with two butterfly units, the MAC accumulation and the
// pipelined Feistel follow the paper's description of the Rubato dataflow; the
// entry packing, the extra read cycle per source row/column pair and the
// accumulator registers are this design's choices. The round key addition is done
// with the point-wise ops of ucu_poly (key*rc with PW-Mul, then PW-Add).
module ucu_rubato
  import dna_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  inst_t             task_i,
  input  logic [3:0]        v,          // 4, 6 or 8
  input  logic [VMAX-1:0][27:0] m0,
  output logic              done,
  output logic              bf_valid,
  output logic [1:0][63:0]  bf_in0, bf_in1, bf_in2,
  input  logic              bf_out_valid,
  input  logic [1:0][63:0]  bf_out0,
  output mem_req_t [1:0]    rd,
  output mem_req_t [1:0]    wr,
  input  logic [1:0][63:0]  rdata
);
  typedef enum logic [2:0] { S_IDLE, S_READ, S_MAC, S_FEI, S_DRAIN, S_DONE } state_e;
  state_e st;
  logic        mixcol;
  logic [3:0]  id;
  logic [15:0] base;
  logic [3:0]  hv;                       // v/2 entries per state row
  logic [3:0]  p, i, r;                  // pair, source index, output index
  logic [15:0] fe, fn;                   // Feistel entry counter, entry count
  logic        fd_v;                     // Feistel operands valid
  logic [27:0] prev;                     // x_{2e-1}
  logic [1:0][63:0] xh;                  // entries held for the current source index
  logic [1:0][VMAX-1:0][27:0] acc;
  logic [1:0][27:0] held;                // even output words waiting for their pair
  logic [4:0]  outst;                    // operations in flight
  logic        fe_mode;                  // Feistel task
  logic        fresh;                    // entries read in the previous cycle
  logic [3:0]  hv_n;
  assign hv_n = v >> 1;

  // ------- tags of operations in flight: output index and "last source" flag
  typedef struct packed { logic [3:0] r; logic [3:0] p; logic last; } tag_t;
  tag_t tq [8];
  logic [2:0] tq_wp, tq_rp;
  tag_t qt;
  assign qt = tq[tq_rp];

  function automatic logic [27:0] coef(logic [3:0] rr, logic [3:0] ii, logic [3:0] vv,
                                       logic [VMAX-1:0][27:0] m);
    logic [3:0] d;
    d = (rr >= ii) ? (rr - ii) : (rr + vv - ii);
    return m[d[2:0]];
  endfunction

  // current operands of the MAC cycle (the first cycle uses the read data directly)
  logic [1:0][63:0] xcur;
  assign xcur = fresh ? rdata : xh;

  logic mac_issue;
  assign mac_issue = (st == S_MAC);
  logic [27:0] w0, w1;
  always_comb begin
    if (mixcol) begin
      w0 = xcur[0][27:0];  w1 = xcur[0][55:28];
    end else begin
      w0 = i[0] ? xcur[0][55:28] : xcur[0][27:0];
      w1 = i[0] ? xcur[1][55:28] : xcur[1][27:0];
    end
  end

  always_comb begin
    bf_valid = 1'b0;
    bf_in0 = '0; bf_in1 = '0; bf_in2 = '0;
    if (mac_issue) begin
      bf_valid  = 1'b1;
      bf_in0[0] = 64'(w0); bf_in1[0] = 64'(coef(r, i, v, m0));
      bf_in0[1] = 64'(w1); bf_in1[1] = 64'(coef(r, i, v, m0));
      bf_in2[0] = (i == 4'd0) ? '0 : 64'(acc[0][r]);
      bf_in2[1] = (i == 4'd0) ? '0 : 64'(acc[1][r]);
    end else if (fd_v) begin
      bf_valid  = 1'b1;
      bf_in0[0] = 64'(prev);           bf_in1[0] = 64'(prev);           bf_in2[0] = 64'(rdata[0][27:0]);
      bf_in0[1] = 64'(rdata[0][27:0]); bf_in1[1] = 64'(rdata[0][27:0]); bf_in2[1] = 64'(rdata[0][55:28]);
    end
  end

  // ------- buffer requests
  always_comb begin
    rd = {2{MEM_IDLE}};
    wr = {2{MEM_IDLE}};
    if (st == S_READ) begin
      if (mixcol)
        rd[0] = '{en: 1'b1, we: 1'b0, id: id, addr: base + 16'(i * hv + p), wdata: '0};
      else begin
        rd[0] = '{en: 1'b1, we: 1'b0, id: id, addr: base + 16'((2*p) * hv + {1'b0, i[3:1]}), wdata: '0};
        rd[1] = '{en: 1'b1, we: 1'b0, id: id, addr: base + 16'((2*p + 1) * hv + {1'b0, i[3:1]}), wdata: '0};
      end
    end
    if (st == S_FEI && fe < fn)
      rd[0] = '{en: 1'b1, we: 1'b0, id: id, addr: base + fe, wdata: '0};
    if (bf_out_valid) begin
      if (fe_mode)
        wr[0] = '{en: 1'b1, we: 1'b1, id: id, addr: base + 16'(qt.r) + 16'({qt.p, 4'd0}),
                  wdata: 64'({bf_out0[1][27:0], bf_out0[0][27:0]})};
      else if (qt.last && mixcol)
        wr[0] = '{en: 1'b1, we: 1'b1, id: id, addr: base + 16'(qt.r * hv + qt.p),
                  wdata: 64'({bf_out0[1][27:0], bf_out0[0][27:0]})};
      else if (qt.last && qt.r[0]) begin
        wr[0] = '{en: 1'b1, we: 1'b1, id: id, addr: base + 16'((2*qt.p) * hv + {1'b0, qt.r[3:1]}),
                  wdata: 64'({bf_out0[0][27:0], held[0]})};
        wr[1] = '{en: 1'b1, we: 1'b1, id: id, addr: base + 16'((2*qt.p + 1) * hv + {1'b0, qt.r[3:1]}),
                  wdata: 64'({bf_out0[1][27:0], held[1]})};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; mixcol <= 1'b0; fe_mode <= 1'b0; id <= '0; base <= '0; hv <= '0;
      p <= '0; i <= '0; r <= '0; fe <= '0; fn <= '0; fd_v <= 1'b0; prev <= '0; xh <= '0;
      acc <= '0; held <= '0; outst <= '0; tq_wp <= '0; tq_rp <= '0; done <= 1'b0; fresh <= 1'b0;
    end else begin
      done <= 1'b0;
      fd_v <= 1'b0;
      outst <= outst + 5'(bf_valid) - 5'(bf_out_valid);
      if (bf_valid) begin
        tq[tq_wp] <= fd_v ? '{r: 4'(fe - 16'd1), p: 4'((fe - 16'd1) >> 4), last: 1'b1}
                          : '{r: r, p: p, last: (i == v - 4'd1)};
        tq_wp <= tq_wp + 3'd1;
      end
      if (bf_out_valid) begin
        tq_rp <= tq_rp + 3'd1;
        if (!fe_mode) begin
          acc[0][qt.r] <= bf_out0[0][27:0];
          acc[1][qt.r] <= bf_out0[1][27:0];
          if (!qt.r[0]) held <= {bf_out0[1][27:0], bf_out0[0][27:0]};
        end
      end
      case (st)
        S_IDLE: if (start) begin
          mixcol  <= (task_i.op == OP_UCU_MIXCOL);
          fe_mode <= (task_i.op == OP_UCU_FEISTEL);
          id <= task_i.buf_a; base <= task_i.addr_a; hv <= hv_n;
          p <= '0; i <= '0; r <= '0; fe <= '0; prev <= '0;
          fn <= 16'((v * v) >> 1);
          st <= (task_i.op == OP_UCU_FEISTEL) ? S_FEI : S_READ;
        end
        S_READ: begin
          r  <= '0;
          fresh <= 1'b1;
          st <= S_MAC;
        end
        S_MAC: begin
          fresh <= 1'b0;
          if (fresh) xh <= rdata;
          if (r == v - 4'd1) begin
            r <= '0;
            if (i == v - 4'd1) begin
              i <= '0;
              if (p == hv - 4'd1) st <= S_DRAIN;
              else begin p <= p + 4'd1; st <= S_READ; end
            end else begin
              i <= i + 4'd1;
              // MixRows reads two new entries every second source column
              st <= (mixcol || i[0]) ? S_READ : S_MAC;
            end
          end else
            r <= r + 4'd1;
        end
        S_FEI: begin
          if (fe < fn) begin
            fe   <= fe + 16'd1;
            fd_v <= 1'b1;
          end else st <= S_DRAIN;
          if (fd_v) prev <= rdata[0][55:28];
        end
        S_DRAIN: if (!bf_valid && (outst == 5'd0 || (outst == 5'd1 && bf_out_valid))) st <= S_DONE;
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
