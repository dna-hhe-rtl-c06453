// ucu: Unified Crypto Unit. Two compact multi-field butterfly units (cm_bfu)
// shared by two schedulers: ucu_poly (NTT/INTT, FFT/IFFT, point-wise Mul/Add/Sub)
// and ucu_rubato (MixColumns, MixRows, Feistel). One task runs at a time.
//
// Interface: start/task_i accept a task when the unit is idle (busy low), done
// pulses for one cycle at the end. The unit has ten buffer request lines:
// req[0..5] are reads and req[6..9] writes, each carrying the buffer id; the
// read data for line k comes back on rdata[k] one cycle after the request. The
// field of the butterfly units follows task.field, the Z_q modulus follows the
// task's RNS domain (task.dom selects q, bnd and d' from the configuration), and
// Rubato uses t, mu_t and k_t from the configuration. Rubato ops use lines 0,1
// (reads) and 6,7 (writes); the round key addition ARK is issued as PW-Mul and
// PW-Add tasks with field F_RUB.
//
// Two BFUs and the set of operations follow the paper; the split into two
// schedulers and the numbering of the request lines are this design's choices.
module ucu
  import dna_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  inst_t             task_i,
  input  cfg_t              cfg,
  output logic              busy,
  output logic              done,
  output mem_req_t [9:0]    req,
  input  logic [9:0][63:0]  rdata
);
  logic    rub_sel;          // the running task belongs to ucu_rubato
  field_e  mode;
  logic [1:0] dom;
  logic    run;

  logic is_rub_op;
  assign is_rub_op = (task_i.op == OP_UCU_MIXCOL) || (task_i.op == OP_UCU_MIXROW) ||
                     (task_i.op == OP_UCU_FEISTEL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rub_sel <= 1'b0; mode <= F_CKKS; dom <= '0; run <= 1'b0;
    end else begin
      if (start && !run) begin
        rub_sel <= is_rub_op;
        mode    <= is_rub_op ? F_RUB : field_e'(task_i.field);
        dom     <= task_i.dom;
        run     <= 1'b1;
      end else if (done) run <= 1'b0;
    end
  end
  assign busy = run;

  // --- schedulers
  logic              p_done, r_done;
  logic              p_bv, r_bv;
  bf_op_e            p_op;
  logic [1:0][63:0]  p_in0, p_in1, p_in2, r_in0, r_in1, r_in2;
  mem_req_t [9:0]    p_req;
  mem_req_t [1:0]    r_rd, r_wr;
  logic              bf_ov;
  logic [1:0]        ov;
  logic [1:0][63:0]  o0, o1;
  assign bf_ov = ov[0];

  ucu_poly u_poly (
    .clk, .rst_n,
    .start (start && !run && !is_rub_op), .task_i, .done (p_done),
    .bf_valid (p_bv), .bf_op (p_op), .bf_in0 (p_in0), .bf_in1 (p_in1), .bf_in2 (p_in2),
    .bf_out_valid (bf_ov && !rub_sel), .bf_out0 (o0), .bf_out1 (o1),
    .req (p_req), .rdata
  );

  ucu_rubato u_rub (
    .clk, .rst_n,
    .start (start && !run && is_rub_op), .task_i, .v (cfg.v), .m0 (cfg.m0), .done (r_done),
    .bf_valid (r_bv), .bf_in0 (r_in0), .bf_in1 (r_in1), .bf_in2 (r_in2),
    .bf_out_valid (bf_ov && rub_sel), .bf_out0 (o0),
    .rd (r_rd), .wr (r_wr), .rdata (rdata[1:0])
  );

  assign done = p_done || r_done;

  always_comb begin
    if (rub_sel) begin
      req = {10{MEM_IDLE}};
      req[0] = r_rd[0]; req[1] = r_rd[1];
      req[6] = r_wr[0]; req[7] = r_wr[1];
    end else
      req = p_req;
  end

  // --- two butterfly units
  for (genvar g = 0; g < 2; g++) begin : g_bfu
    cm_bfu u_bfu (
      .clk, .rst_n,
      .in_valid (rub_sel ? r_bv : p_bv),
      .op       (rub_sel ? BF_MAC : p_op),
      .mode     (mode),
      .in0      (rub_sel ? r_in0[g] : p_in0[g]),
      .in1      (rub_sel ? r_in1[g] : p_in1[g]),
      .in2      (rub_sel ? r_in2[g] : p_in2[g]),
      .q        (cfg.q[dom]),
      .bnd      (cfg.bnd[dom]),
      .dprime   (cfg.dprime[dom]),
      .t_se     (cfg.t),
      .mu_se    (cfg.mu_t),
      .k_se     (cfg.k_t),
      .out_valid(ov[g]),
      .out0     (o0[g]),
      .out1     (o1[g])
    );
  end

  // both units always run in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) ov[0] == ov[1])
    else $error("ucu: butterfly units out of step");
endmodule
