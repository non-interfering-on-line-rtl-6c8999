// shp_top_scenario.svh: body shared by the end-to-end testbenches of shp_top.
// The including module defines D and instantiates shp_top as `dut` with
// parameters D, C = 4, R = 3. Threads: NRED = floor(D/R) redundant threads
// (tids 0..NRED-1, their copies fill words 0..R*NRED-1) and the remaining
// words as single threads; the last one joins late as a priority thread.
// The including module prints the result line when run_done fires and
// provides the watchdog.
  localparam int unsigned C = 4, R = 3, W = 32, RW = 2, S = D / R;
  localparam int unsigned AW = $clog2(D);
  localparam int NRED = S;
  localparam int NSGL = D - R * S;
  localparam int NT = NRED + NSGL;
  localparam int LAST = D - 1;
  localparam int DBL = NRED - 1;           // thread that gets the double upset
  localparam int NB = 16;                  // body bytes per frame
  localparam int STEPS = 1 + 2 * (NB + 4); // Initialize + nibbles of body and FCS
  localparam int FRAMES = 4;               // frames per thread

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_red = 0, cmd_prio = 0;
  tc_op_e cmd_op = TC_INSERT;
  logic [AW-1:0] cmd_tid = '0;
  logic iss_valid;
  logic [AW-1:0] iss_tid;
  logic [RW-1:0] iss_copy;
  crc_in_t iss_din;
  logic out_valid, out_crc_error;
  logic [AW-1:0] out_tid;
  logic [W-1:0] out_crc;
  logic host_we = 0, host_re = 0, host_wready, host_rready, host_rvalid;
  logic [AW-1:0] host_waddr = '0, host_raddr = '0;
  logic [W-1:0] host_wdata = '0, host_rdata;
  logic wb_valid, wb_commit, seu_detect, seu_recover, seu_fatal;
  logic [AW-1:0] wb_tid;
  logic [RW-1:0] seu_copy;
  logic [3:0] seu_diff;
  logic [D-1:0] thr_active, thr_busy;
  logic inj_en = 0;
  logic [AW-1:0] inj_addr = '0;
  logic [W-1:0] inj_mask = '0;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  event run_done;                         // the scenario has ended
  task automatic check(string what, int t, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s thread %0d: got %h expected %h", what, t, got, exp);
    end
  endtask

  // ------------------------------------------------------------ thread data
  int          tids [NT];
  bit          is_red [D];
  logic [7:0]  frame [D][NB+4];
  int          pos [D];
  int          fno [D];
  int          frames_done [D];

  function automatic logic [3:0] rev4(logic [3:0] n);
    return {n[0], n[1], n[2], n[3]};
  endfunction
  function automatic logic [31:0] rev32(logic [31:0] v);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = v[31-i];
    return r;
  endfunction
  function automatic logic [31:0] fcs_of(int t);
    logic [31:0] c;
    c = 32'hffff_ffff;
    for (int i = 0; i < NB; i++) begin
      c ^= 32'(frame[t][i]);
      for (int k = 0; k < 8; k++) c = (c >> 1) ^ (c[0] ? 32'hedb8_8320 : 32'h0);
    end
    return ~c;
  endfunction
  task automatic new_frame(int t);
    logic [31:0] f;
    for (int i = 0; i < NB; i++) frame[t][i] = 8'($urandom);
    f = fcs_of(t);
    for (int i = 0; i < 4; i++) frame[t][NB+i] = f[8*i +: 8];
  endtask
  function automatic int addr_of(int t, int k);
    return (t + k * S) % D;
  endfunction

  // input of the issued thread (same for all its copies)
  always_comb begin
    int p;
    logic [7:0] b;
    p = pos[iss_tid];
    b = frame[iss_tid][(p == 0) ? 0 : (p - 1) / 2];
    if (p == 0) iss_din = '{init: 1'b1, enable: 1'b0, data: 4'h0};
    else        iss_din = '{init: 1'b0, enable: 1'b1,
                            data: rev4(((p - 1) % 2 == 0) ? b[3:0] : b[7:4])};
  end

  // ------------------------------------------------------------ counters
  int n_frames = 0, n_detect = 0, n_recover = 0, n_fatal = 0, n_retry = 0;
  int n_logic_upset = 0;
  int n_inject = 0, n_bubble = 0, n_host_wait = 0, n_prio_issue = 0, n_stall = 0, n_kill = 0;
  bit prio_last = 0;
  int cyc = 0;
  logic [31:0] seen_crc [D];
  logic        seen_err [D];

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      seen_crc[out_tid] = out_crc;
      seen_err[out_tid] = out_crc_error;
      if (prio_last && out_tid == AW'(LAST)) n_prio_issue++;
    end
    if (!iss_valid && |thr_active) n_bubble++;
    if (wb_valid) begin
      int t, p;
      t = int'(wb_tid);
      p = pos[t];
      if (wb_commit) begin
        // the output shown at issue is trusted once the cycle commits
        if (p == 0 && fno[t] > 0) begin
          check("residue", t, seen_crc[t], CRC_MAGIC);
          check("CrcError", t, 32'(seen_err[t]), 0);
        end
        if (p == 1) check("initialize", t, seen_crc[t], CRC_INIT);
        if (p == 1 + 2 * NB) check("crc after body", t, seen_crc[t], rev32(~fcs_of(t)));
        pos[t]++;
        if (pos[t] == STEPS) begin
          pos[t] = 0;
          fno[t]++;
          frames_done[t]++;
          n_frames++;
          new_frame(t);
        end
      end else n_retry++;
    end
    if (seu_detect) n_detect++;
    if (seu_recover) n_recover++;
    if (seu_fatal) n_fatal++;
    if ((host_we && !host_wready) || (host_re && !host_rready)) n_host_wait++;
  end

  // ------------------------------------------------------------ host helpers
  task automatic cmd(tc_op_e op, int tid, bit r = 0, bit p = 0);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_tid = AW'(tid); cmd_red = r; cmd_prio = p;
    @(negedge clk);
    cmd_valid = 0;
  endtask
  task automatic host_write(int a, logic [W-1:0] v);
    @(negedge clk);
    host_we = 1; host_waddr = AW'(a); host_wdata = v;
    #1;
    while (!host_wready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_we = 0;
  endtask
  task automatic host_read(int a, output logic [W-1:0] v);
    @(negedge clk);
    host_re = 1; host_raddr = AW'(a);
    #1;
    while (!host_rready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_re = 0;
    #1;
    v = host_rdata;
  endtask
  task automatic inject(int a, logic [W-1:0] m);
    @(negedge clk);
    inj_en = 1; inj_addr = AW'(a); inj_mask = m;
    @(negedge clk);
    inj_en = 0;
    n_inject++;
  endtask

  function automatic bit all_done();
    foreach (tids[i]) if (frames_done[tids[i]] < FRAMES) return 0;
    return 1;
  endfunction

  // ------------------------------------------------------------ upsets
  bit upsets_on = 0;
  initial begin
    forever begin
      repeat (80 + $urandom % 40) @(negedge clk);
      if (upsets_on && n_logic_upset > 0 && ($urandom % 4) != 0) begin
        int t, k;
        t = $urandom % NRED;
        k = $urandom % R;
        inject(addr_of(t, k), 32'h1 << ($urandom % 32));
      end else if (upsets_on) begin
        // an upset in a section register of the logic, hitting a copy of a
        // redundant thread: its result differs and is voted out next cycle
        while (!(dut.u_tc.pipe[1].valid && dut.u_tc.pipe[1].red)) @(negedge clk);
        dut.u_logic.cr[1] = dut.u_logic.cr[1] ^ (32'h1 << ($urandom % 32));
        n_logic_upset++;
      end
    end
  end

  // ------------------------------------------------------------ sequence
  initial begin
    logic [W-1:0] v, good;
    foreach (pos[t]) begin
      pos[t] = 0; fno[t] = 0; frames_done[t] = 0; is_red[t] = 0;
      new_frame(t);
    end
    for (int i = 0; i < NRED; i++) begin tids[i] = i; is_red[i] = 1; end
    for (int i = 0; i < NSGL; i++) tids[NRED + i] = R * S + i;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load the thread states (any value; each frame starts with Initialize)
    foreach (tids[i]) begin
      v = $urandom;
      for (int k = 0; k < (is_red[tids[i]] ? R : 1); k++) host_write(addr_of(tids[i], k), v);
    end
    for (int i = 0; i < NRED; i++) cmd(TC_INSERT, tids[i], 1);
    for (int i = 0; i + 1 < NSGL; i++) cmd(TC_INSERT, tids[NRED + i]);
    upsets_on = 1;

    // read-back while running: host waits for the compare port
    host_read(addr_of(LAST, 0), v);

    // double upset in thread DBL: no majority, stall, reload from the good copy
    repeat (300) @(negedge clk);
    upsets_on = 0;
    repeat (200) @(negedge clk);
    cmd(TC_STALL, DBL); n_stall++;
    repeat (2 * C + R) @(negedge clk);
    inject(addr_of(DBL, 0), 32'h0000_0100);
    inject(addr_of(DBL, 2), 32'h0002_0000);
    cmd(TC_RESUME, DBL);
    fork
      begin : wait_fatal
        while (n_fatal == 0) @(negedge clk);
      end
      begin
        repeat (500) @(negedge clk);
      end
    join_any
    disable fork;
    check("no-majority flagged", DBL, 32'(n_fatal > 0), 1);
    cmd(TC_STALL, DBL); n_stall++;
    repeat (2 * C + R) @(negedge clk);
    host_read(addr_of(DBL, 1), good);
    host_write(addr_of(DBL, 0), good);
    host_write(addr_of(DBL, 2), good);
    cmd(TC_RESUME, DBL);
    upsets_on = 1;

    // the single thread joins later, with priority
    repeat (200) @(negedge clk);
    host_write(addr_of(LAST, 0), $urandom);
    cmd(TC_INSERT, LAST, 0, 1);
    prio_last = 1;

    // kill each thread as it finishes; in the end thread LAST runs alone (< C threads)
    while (!all_done()) begin
      @(negedge clk);
      foreach (tids[i])
        if (frames_done[tids[i]] >= FRAMES && thr_active[tids[i]] && !(tids[i] == LAST && !all_red_done()))
          begin cmd(TC_KILL, tids[i]); n_kill++; end
    end
    upsets_on = 0;
    repeat (2 * C + R) @(negedge clk);

    foreach (tids[i]) check("frames per thread", tids[i], 32'(frames_done[tids[i]] >= FRAMES), 1);
    check("single upsets detected", 0, 32'(n_detect > 0), 1);
    check("faulty copies repaired", 0, 32'(n_recover > 0), 1);
    check("cycles repeated", 0, 32'(n_retry > 0), 1);
    check("host waited", 0, 32'(n_host_wait > 0), 1);
    check("priority thread issued", 0, 32'(n_prio_issue > 0), 1);
    check("pipeline bubbles with few threads", 0, 32'(n_bubble > 0), 1);
    check("stalls", 0, 32'(n_stall > 0), 1);
    check("kills", 0, 32'(n_kill > 0), 1);
    check("upsets in the logic", 0, 32'(n_logic_upset > 0), 1);
    $display("cycles=%0d frames=%0d injected=%0d detected=%0d repaired=%0d no_majority=%0d retried=%0d",
             cyc, n_frames, n_inject, n_detect, n_recover, n_fatal, n_retry);
    $display("logic_upsets=%0d", n_logic_upset);
    $display("host_waits=%0d prio_issues=%0d bubbles=%0d stalls=%0d kills=%0d",
             n_host_wait, n_prio_issue, n_bubble, n_stall, n_kill);
    -> run_done;
  end

  function automatic bit all_red_done();
    for (int i = 0; i < NRED; i++) if (frames_done[tids[i]] < FRAMES) return 0;
    return 1;
  endfunction

