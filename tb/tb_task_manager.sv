// tb_task_manager: self-checking testbench of the Task Manager.
// A random stream of task instructions (sequence number in imm) for the five
// units plus configuration writes is fed in; behavioural units stay busy for a
// random time after start. On every dispatch the testbench checks that
//  - the unit was idle and none of the task's buffers is used by a running task;
//  - every older instruction sharing a buffer, and every older configuration
//    write, was already dispatched; a configuration write goes only when all
//    older instructions are dispatched and all units are idle;
//  - each instruction is dispatched exactly once, with its fields intact.
// It also requires out-of-order dispatches and stall cycles to have happened.
// Busy tables and out-of-order dispatch follow the paper; the window size and
// ordering rule checked here are this design's choices.
module tb_task_manager;
  import dna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid = 1'b0, in_ready;
  inst_t            in_data;
  logic [NUNIT-1:0] start, done;
  inst_t            task_o;
  logic             cfg_we, idle;
  logic [4:0]       cfg_idx;
  logic [63:0]      cfg_data;
  logic [31:0]      n_ooo, n_stall, n_disp;
  int checks = 0, failures = 0;

  task_manager #(.WIN (4)) dut (.*);

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  localparam int NI = 300;
  inst_t prog [NI];
  bit    dispatched [NI];
  int    busy_left [NUNIT];
  int    run_seq   [NUNIT];

  function automatic logic [15:0] bm(inst_t t);
    logic [15:0] m = '0;
    if (t.unit == U_CFG) return '0;
    if (t.buf_a != 4'(B_NONE)) m[t.buf_a] = 1'b1;
    if (t.buf_b != 4'(B_NONE)) m[t.buf_b] = 1'b1;
    if (t.buf_c != 4'(B_NONE)) m[t.buf_c] = 1'b1;
    return m;
  endfunction

  function automatic logic [3:0] rbuf();
    int r = $urandom_range(0, 9);
    return (r >= 7) ? 4'(B_NONE) : 4'(r);
  endfunction

  // behavioural units
  always @(posedge clk) begin
    done <= '0;
    for (int u = 0; u < NUNIT; u++)
      if (busy_left[u] > 0) begin
        busy_left[u]--;
        if (busy_left[u] == 0) done[u] <= 1'b1;
      end
  end

  // dispatch checks
  always @(posedge clk) if (rst_n) begin
    if (start != '0) begin
      int u, s;
      checks++;
      if ($countones(start) != 1) failures++;
      u = $clog2(start);
      s = int'(task_o.imm[15:0]);
      if (s >= NI || dispatched[s] || task_o != prog[s] || int'(prog[s].unit) != u + 1) begin
        failures++; $display("bad dispatch seq %0d", s);
      end else begin
        checks++;
        if (busy_left[u] != 0) begin failures++; $display("unit %0d busy at %0d", u, s); end
        for (int v = 0; v < NUNIT; v++)
          if (busy_left[v] != 0 && (bm(prog[run_seq[v]]) & bm(prog[s])) != 0) begin
            failures++; $display("buffer in use at %0d", s);
          end
        for (int o = 0; o < s; o++)
          if (!dispatched[o] && (((bm(prog[o]) & bm(prog[s])) != 0) || prog[o].unit == U_CFG)) begin
            failures++; $display("order violated: %0d before %0d", s, o);
          end
        dispatched[s] = 1'b1;
        run_seq[u]    = s;
        busy_left[u]  = $urandom_range(1, 12);
      end
    end
    if (cfg_we) begin
      int s;
      s = int'(cfg_data[15:0]);
      checks++;
      if (s >= NI || dispatched[s] || prog[s].unit != U_CFG || cfg_idx != prog[s].op) begin failures++; $display("bad cfg %0d data %h idx %0d", s, cfg_data, cfg_idx); end
      else begin
        for (int o = 0; o < s; o++) if (!dispatched[o]) begin failures++; $display("cfg %0d before %0d", s, o); end
        for (int v = 0; v < NUNIT; v++) if (busy_left[v] != 0) begin failures++; $display("cfg %0d while unit %0d busy", s, v); end
        dispatched[s] = 1'b1;
      end
    end
  end

  initial begin
    int ooo_seen;
    done = '0;
    for (int u = 0; u < NUNIT; u++) begin busy_left[u] = 0; run_seq[u] = 0; end
    for (int i = 0; i < NI; i++) begin
      inst_t t = '0;
      if ($urandom_range(0, 19) == 0) begin
        t.unit = U_CFG; t.op = 5'($urandom_range(0, 28));
      end else begin
        t.unit = unit_e'($urandom_range(1, 5));
        t.op = 5'($urandom_range(0, 11));
      end
      t.buf_a = rbuf(); t.buf_b = rbuf(); t.buf_c = rbuf();
      t.len = 16'($urandom);
      t.imm = 40'(i);
      prog[i] = t;
      dispatched[i] = 1'b0;
    end
    in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < NI; i++) begin
      in_valid = 1'b1; in_data = prog[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int i = 0; i < NI; i++) begin checks++; if (!dispatched[i]) failures++; end
    checks++; if (n_disp != NI) failures++;
    checks++; if (n_ooo == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    $display("dispatched %0d, out of order %0d, stall cycles %0d", n_disp, n_ooo, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
