// tb_shp_thread_ctrl: self-checking test of the thread controller.
// The testbench stands in for the rest of the SHP block: a state memory with
// two asynchronous read ports, a datapath that returns (start state + 1) C-1
// cycles after issue, and a comparator registered once. So every committed
// thread cycle adds one to all copies of that thread, and the expected state
// of a thread is its initial value plus the commits counted here. Covered:
// host load and read-back, round-robin and priority issue, stall/resume/kill,
// the write-back latency, a single upset in one copy (detect, vote, repair,
// repeat), a double upset (no majority, then a software reload), and that no
// thread is issued faster than once per C cycles.
module tb_shp_thread_ctrl;
  import shp_pkg::*;
  localparam int unsigned D = 16, C = 4, R = 3, W = 32, AW = 4, RW = 2, S = D / R;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_red = 0, cmd_prio = 0;
  tc_op_e cmd_op = TC_INSERT;
  logic [AW-1:0] cmd_tid = '0;
  logic iss_valid, iss_red, cmp_en, cmp_valid, cmp_mismatch, we;
  logic [AW-1:0] iss_tid, rd_ptr, cmp_ptr, wr_ptr;
  logic [RW-1:0] iss_copy, seu_copy;
  logic [W-1:0] rd_data, res_data, wdata;
  logic host_we = 0, host_re = 0, host_wready, host_rready;
  logic [AW-1:0] host_waddr = '0, host_raddr = '0;
  logic [W-1:0] host_wdata = '0;
  logic wb_valid, wb_commit, seu_detect, seu_recover, seu_fatal;
  logic [AW-1:0] wb_tid;
  logic [D-1:0] thr_active, thr_busy;
  int checks = 0, failures = 0;

  shp_thread_ctrl #(.D(D), .C(C), .R(R), .W(W)) dut (.*);
  always #5 clk = ~clk;

  // ------------------------------------------------------------ environment
  logic [W-1:0] mem [D];
  logic [W-1:0] pipe_val [C-1];
  logic [W-1:0] cmp_data;
  logic         inj_en = 0;
  logic [AW-1:0] inj_addr = '0;
  logic [W-1:0] inj_mask = '0;

  assign rd_data  = mem[rd_ptr];
  assign cmp_data = mem[cmp_ptr];
  assign res_data = pipe_val[C-2];

  logic         cv;
  logic         cm;
  assign cmp_valid    = cv;
  assign cmp_mismatch = cm;

  always_ff @(posedge clk) begin
    if (we) mem[wr_ptr] <= wdata;
    if (inj_en) mem[inj_addr] <= (we && wr_ptr == inj_addr ? wdata : mem[inj_addr]) ^ inj_mask;
    pipe_val[0] <= rd_data + 1;
    for (int i = 1; i < C - 1; i++) pipe_val[i] <= pipe_val[i-1];
    cv <= cmp_en;
    cm <= cmp_en && (rd_data != cmp_data);
  end

  // ------------------------------------------------------------ bookkeeping
  logic [W-1:0] init_val [D];
  int commits [D];
  int issues [D];
  int last_issue [D];
  int cyc = 0;
  int n_detect = 0, n_recover = 0, n_fatal = 0, n_host_wwait = 0, n_host_rwait = 0;
  int issue_q [$];    // cycle of each issued single/first copy, per tid order

  function automatic int addr_of(int tid, int k);
    return (tid + k * S) % D;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cycle %0d)", what, got, exp, cyc);
    end
  endtask

  int iss_cycle [D];
  int seu_copy_seen = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (iss_valid && iss_copy == 0) begin
      if (issues[iss_tid] > 0) begin
        checks++;
        if (cyc - last_issue[iss_tid] < int'(C)) begin
          failures++;
          $display("FAIL thread %0d reissued after %0d cycles", iss_tid, cyc - last_issue[iss_tid]);
        end
      end
      issues[iss_tid]++;
      last_issue[iss_tid] = int'(cyc);
      iss_cycle[iss_tid] = int'(cyc);
    end
    if (wb_valid) begin
      // a single thread ends C-1 cycles after issue, a redundant one R-1 later
      check("write-back latency", cyc - iss_cycle[wb_tid],
            (wb_tid == 0 || wb_tid == 1) ? int'(C + R - 2) : int'(C - 1));
      if (wb_commit) commits[wb_tid]++;
    end
    if (seu_detect) n_detect++;
    if (seu_recover) begin
      n_recover++;
      seu_copy_seen = int'(seu_copy);
    end
    if (seu_fatal) n_fatal++;
    if (host_we && !host_wready) n_host_wwait++;
    if (host_re && !host_rready) n_host_rwait++;
  end

  task automatic cmd(tc_op_e op, int tid, bit r = 0, bit p = 0);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_tid = AW'(tid); cmd_red = r; cmd_prio = p;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic host_write(int a, logic [W-1:0] v);
    @(negedge clk);
    host_we = 1; host_waddr = AW'(a); host_wdata = v;
    while (!host_wready) @(negedge clk);
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(int a, output logic [W-1:0] v);
    @(negedge clk);
    host_re = 1; host_raddr = AW'(a);
    #1;
    while (!host_rready) begin @(negedge clk); #1; end
    v = cmp_data;           // the block registers this word in this cycle
    @(negedge clk);
    host_re = 0;
  endtask

  task automatic drain();
    for (int t = 0; t < D; t++) cmd(TC_KILL, t);
    repeat (2 * C + R) @(negedge clk);
    check("all threads idle", int'(thr_busy), 0);
  endtask

  task automatic check_states(string what);
    logic [W-1:0] v;
    foreach (used_any[t]) if (used_any[t]) cmd(TC_STALL, t);
    repeat (2 * C + R) @(negedge clk);
    foreach (used[t]) begin
      for (int k = 0; k < (used[t] ? R : 1); k++) begin
        host_read(addr_of(t, k), v);
        if (used_any[t]) check(what, v, init_val[t] + commits[t]);
      end
    end
    foreach (used_any[t]) if (used_any[t]) cmd(TC_RESUME, t);
  endtask

  bit used [D];       // 1 = redundant thread
  bit used_any [D];
  int extra [3] = '{7, 8, 9};   // single threads added for the priority test
  int ix [3];   // their issue counts at the window start

  initial begin
    logic [W-1:0] v;
    int c15, c2;
    foreach (used[t]) begin used[t] = 0; used_any[t] = 0; commits[t] = 0; issues[t] = 0; end
    used[0] = 1; used[1] = 1;
    used_any[0] = 1; used_any[1] = 1; used_any[2] = 1; used_any[3] = 1; used_any[15] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load states: redundant threads 0 and 1, single threads 2, 3 and 15
    foreach (used_any[t]) if (used_any[t]) begin
      init_val[t] = 1000 * (t + 1);
      for (int k = 0; k < (used[t] ? R : 1); k++) host_write(addr_of(t, k), init_val[t]);
    end
    cmd(TC_INSERT, 0, 1); cmd(TC_INSERT, 1, 1);
    cmd(TC_INSERT, 2); cmd(TC_INSERT, 3); cmd(TC_INSERT, 15);
    // host writes compete with write-backs
    host_write(12, 32'h5555); host_write(13, 32'h6666);
    host_read(12, v); check("host read 12", v, 32'h5555);
    repeat (200) @(negedge clk);
    check_states("states after normal run");

    // single upset in copy 1 of thread 0
    // (upsets are placed while the thread is stalled, so that no write-back
    // overwrites them before they are compared)
    cmd(TC_STALL, 0);
    repeat (2 * C + R) @(negedge clk);
    @(negedge clk); inj_en = 1; inj_addr = AW'(addr_of(0, 1)); inj_mask = 32'h0400;
    @(negedge clk); inj_en = 0;
    cmd(TC_RESUME, 0);
    repeat (100) @(negedge clk);
    check("single upset detected", n_detect >= 1, 1);
    check("single upset repaired", n_recover, 1);
    check("repaired copy", seu_copy_seen, 1);
    check("no fatal on single upset", n_fatal, 0);
    check_states("states after repair");

    // double upset in thread 1: no majority
    cmd(TC_STALL, 1);
    repeat (2 * C + R) @(negedge clk);
    @(negedge clk); inj_en = 1; inj_addr = AW'(addr_of(1, 0)); inj_mask = 32'h1;
    @(negedge clk); inj_addr = AW'(addr_of(1, 2)); inj_mask = 32'h2;
    @(negedge clk); inj_en = 0;
    cmd(TC_RESUME, 1);
    repeat (60) @(negedge clk);
    check("double upset fatal", n_fatal > 0, 1);
    check("double upset not repaired", n_recover, 1);
    c2 = commits[1];
    repeat (40) @(negedge clk);
    check("thread with no majority makes no progress", commits[1], c2);
    // software reload of thread 1
    cmd(TC_STALL, 1);
    repeat (2 * C + R) @(negedge clk);
    for (int k = 0; k < R; k++) host_write(addr_of(1, k), init_val[1] + commits[1]);
    cmd(TC_RESUME, 1);
    c2 = commits[1];
    repeat (60) @(negedge clk);
    check("thread 1 runs again", commits[1] > c2, 1);
    check_states("states after reload");

    // stall: thread 2 must not be issued
    cmd(TC_STALL, 2);
    repeat (C) @(negedge clk);
    c2 = issues[2];
    repeat (100) @(negedge clk);
    check("stalled thread not issued", issues[2], c2);
    cmd(TC_RESUME, 2);
    repeat (20) @(negedge clk);
    check("resumed thread issued", issues[2] > c2, 1);

    // priority: with six single threads competing, thread 15 still gets
    // (nearly) every C-th cycle
    foreach (extra[i]) begin
      init_val[extra[i]] = 1000 * (extra[i] + 1);
      host_write(extra[i], init_val[extra[i]]);
      used_any[extra[i]] = 1;
      cmd(TC_INSERT, extra[i]);
    end
    cmd(TC_INSERT, 15, 0, 1);
    repeat (C) @(negedge clk);
    c15 = commits[15];
    c2  = commits[3];
    foreach (extra[i]) ix[i] = issues[extra[i]];
    repeat (40 * C) @(negedge clk);
    // it waits at most for the R-1 remaining copies of a redundant thread
    check("priority thread near full rate", commits[15] - c15 >= 40 * C / (C + R - 1), 1);
    check("priority thread ahead of round robin", commits[15] - c15 > 2 * (commits[3] - c2), 1);
    // priority issues must not reset the round robin of the other threads
    foreach (extra[i]) check("single thread served beside priority", issues[extra[i]] - ix[i] > 3, 1);
    $display("priority window: t15 %0d commits, t3 %0d, t%0d %0d issues", commits[15] - c15, commits[3] - c2,
             extra[2], issues[extra[2]] - ix[2]);

    drain();
    check_states("final states");
    check("host waited for the write port", n_host_wwait > 0, 1);
    foreach (used_any[t]) if (used_any[t]) check("thread progressed", commits[t] > 5, 1);
    $display("commits t0=%0d t1=%0d t2=%0d t3=%0d t15=%0d detect=%0d recover=%0d fatal=%0d",
             commits[0], commits[1], commits[2], commits[3], commits[15], n_detect, n_recover, n_fatal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
