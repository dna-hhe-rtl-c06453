// task_manager: issues task instructions to the functional units out of order.
//
// Instructions enter a window of WIN entries (oldest first) from the instruction
// FIFO, one per cycle. Every cycle the oldest entry that may start is dispatched:
//  - its unit is idle in the Unit Busy Table (set at dispatch, cleared by the
//    unit's done pulse);
//  - none of its buffers (buf_a, buf_b, buf_c other than B_NONE) is held by a
//    running task in the BUF Busy Table (set at dispatch with the buffers of the
//    task, cleared by the unit's done);
//  - no older entry still in the window names one of its buffers (keeps
//    read/write order on every buffer) or is a configuration write;
//  - a configuration write (unit U_CFG) is a barrier: it goes only when it is the
//    oldest entry and all units are idle, and it completes in the dispatch cycle.
// An entry that starts while an older one waits counts as an out-of-order
// dispatch; a cycle with waiting entries and no dispatch counts as a stall.
//
// Outputs: start[u] pulses for one cycle together with task_o (registered) for
// unit u+1 (DAU, RSU, UCU, DTU, NIU); cfg_we/cfg_idx/cfg_data write a
// configuration register. idle is high when the window is empty, no instruction
// waits and no unit is busy.
//
// The Unit and BUF Busy Tables and out-of-order dispatch follow the paper; the
// window size, the ordering rule between waiting entries and the configuration
// barrier are this design's choices.
module task_manager
  import dna_pkg::*;
#(
  parameter int unsigned WIN = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  inst_t              in_data,
  output logic [NUNIT-1:0]   start,
  output inst_t              task_o,
  input  logic [NUNIT-1:0]   done,
  output logic               cfg_we,
  output logic [4:0]         cfg_idx,
  output logic [63:0]        cfg_data,
  output logic               idle,
  output logic [31:0]        n_ooo,
  output logic [31:0]        n_stall,
  output logic [31:0]        n_disp
);
  inst_t                 win   [WIN];
  logic [WIN-1:0]        wv;
  logic [NUNIT-1:0]      unit_busy;
  logic [15:0]           buf_busy;
  logic [NUNIT-1:0][15:0] unit_bufs;

  function automatic logic [15:0] bufmask(inst_t t);
    logic [15:0] m = '0;
    if (t.unit == U_CFG) return '0;
    if (t.buf_a != B_NONE) m[t.buf_a] = 1'b1;
    if (t.buf_b != B_NONE) m[t.buf_b] = 1'b1;
    if (t.buf_c != B_NONE) m[t.buf_c] = 1'b1;
    return m;
  endfunction

  // ---------------- selection
  logic [WIN-1:0] ok;
  logic           sel_v;
  logic [$clog2(WIN)-1:0] sel;
  always_comb begin
    logic [15:0] older;
    logic        older_cfg;
    older = '0; older_cfg = 1'b0;
    for (int k = 0; k < WIN; k++) begin
      ok[k] = 1'b0;
      if (wv[k]) begin
        if (win[k].unit == U_CFG)
          ok[k] = (k == 0) && (unit_busy == '0);
        else
          ok[k] = !older_cfg && (int'(win[k].unit) >= 1) && (int'(win[k].unit) <= NUNIT) &&
                  !unit_busy[int'(win[k].unit) - 1] &&
                  ((bufmask(win[k]) & (buf_busy | older)) == '0);
        older     = older | bufmask(win[k]);
        older_cfg = older_cfg | (win[k].unit == U_CFG);
      end
    end
    sel_v = 1'b0; sel = '0;
    for (int k = WIN - 1; k >= 0; k--) if (ok[k]) begin sel_v = 1'b1; sel = k[$clog2(WIN)-1:0]; end
  end

  logic [$clog2(WIN):0] cnt;
  always_comb begin
    cnt = '0;
    for (int k = 0; k < WIN; k++) cnt += {{$clog2(WIN){1'b0}}, wv[k]};
  end
  // accept when a slot is free after this cycle's dispatch
  assign in_ready = (cnt < ($clog2(WIN)+1)'(WIN)) || sel_v;
  assign idle     = (wv == '0) && (unit_busy == '0) && !in_valid;

  // next window, busy tables and dispatch outputs
  inst_t                  nwin [WIN];
  logic [WIN-1:0]         nwv;
  logic [15:0]            bb;
  logic [NUNIT-1:0]       ub;
  inst_t                  t_sel;
  logic [2:0]             u_sel;          // unit index (unit - 1) of the selected entry
  always_comb begin
    int n;
    bb = buf_busy; ub = unit_busy;
    for (int u = 0; u < NUNIT; u++) if (done[u]) begin
      ub[u] = 1'b0;
      bb    = bb & ~unit_bufs[u];
    end
    // remove the dispatched entry and compact the window
    n = 0; nwv = '0;
    for (int k = 0; k < WIN; k++) nwin[k] = '0;
    for (int k = 0; k < WIN; k++)
      if (wv[k] && !(sel_v && k == int'(sel))) begin nwin[n] = win[k]; nwv[n] = 1'b1; n++; end
    t_sel = win[sel];
    u_sel = 3'(int'(t_sel.unit) - 1);
    if (sel_v && t_sel.unit != U_CFG) begin
      ub[u_sel] = 1'b1;
      bb        = bb | bufmask(t_sel);
    end
    if (in_valid && in_ready) begin nwin[n] = in_data; nwv[n] = 1'b1; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < WIN; k++) win[k] <= '0;
      wv <= '0; unit_busy <= '0; buf_busy <= '0; unit_bufs <= '0;
      start <= '0; task_o <= '0; cfg_we <= 1'b0; cfg_idx <= '0; cfg_data <= '0;
      n_ooo <= '0; n_stall <= '0; n_disp <= '0;
    end else begin
      start  <= '0;
      cfg_we <= 1'b0;
      if (sel_v) begin
        n_disp <= n_disp + 32'd1;
        if (sel != '0) n_ooo <= n_ooo + 32'd1;
        if (t_sel.unit == U_CFG) begin
          cfg_we   <= 1'b1;
          cfg_idx  <= t_sel.op;
          cfg_data <= {t_sel.addr_b, t_sel.addr_c, t_sel.imm[31:0]};
        end else begin
          start[u_sel]     <= 1'b1;
          task_o           <= t_sel;
          unit_bufs[u_sel] <= bufmask(t_sel);
        end
      end else if (wv != '0) n_stall <= n_stall + 32'd1;
      for (int k = 0; k < WIN; k++) win[k] <= nwin[k];
      wv        <= nwv;
      buf_busy  <= bb;
      unit_busy <= ub;
    end
  end

  a_done_busy: assert property (@(posedge clk) disable iff (!rst_n) (done & ~unit_busy) == '0)
    else $error("task_manager: done from an idle unit");
endmodule
