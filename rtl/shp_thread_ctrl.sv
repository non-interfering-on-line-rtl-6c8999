// shp_thread_ctrl: thread controller (TC) of the SHP block with SEU detection
// and recovery.
//
// Scheduling. Up to D threads live in the state memory. Every micro-cycle the
// TC may issue one thread into the C-stage retimed logic: it puts the thread's
// address on the read pointer, and C-1 cycles later it writes the result back
// through the write pointer. A thread is not issued again before its result is
// written, so at least C threads keep the pipeline full. Software shapes the
// load with commands: INSERT (with flags red and prio), KILL, STALL and RESUME.
// Ready threads with prio set are taken first (lowest index); then a ready
// redundant thread if no other redundant thread is in flight; then the single
// threads. Redundant and single threads each have a round-robin pointer; a
// priority issue leaves both pointers where they are.
//
// Redundant threads. A thread inserted with red=1 is kept as R copies at
// addresses tid, tid+S, ..., tid+(R-1)S (mod D), S = D/R, i.e. as far apart as
// the memory allows. Its R copies are issued in R consecutive cycles. When copy
// k is issued, the compare pointer reads copy (k+1) mod R and the comparator
// checks the two start states; the R results form a ring of pairwise compares.
// If all agree, the R results are written back (the state is written R times)
// and the thread cycle is committed. If any differ, none of the results is
// written and the cycle is repeated on the next turn. A single bad copy f is the
// one whose two ring compares both failed (majority vote): in the write-back
// slot of copy f the TC writes the captured start state of copy (f+1) mod R
// into copy f's word, so the repeated cycle starts from identical states. Any
// other pattern leaves the states alone; if every compare failed (no two
// copies agree) seu_fatal is raised and software must reload the thread. Only one redundant thread is in flight at a time. The
// verdict must be known when copy 0 is written back, C-1 cycles after its
// issue, while the last compare result arrives R cycles after it: hence C > R.
//
// Host port. Software loads and reads thread states (and may overwrite a state
// to force a defined value, as in-field self-tests need) through the write port
// when no write-back uses it, and through the compare port when no compare uses
// it. While a host access waits, no new thread is issued, so a free slot comes
// within C-1 cycles. Host read data appears in the cycle after host_rready.
//
// What follows the paper: the TC drives the write, read and compare pointers,
// compares start states of redundant threads, writes results R times only when
// they agreed, repeats the cycle otherwise and replaces faulty start states by a
// correct copy chosen by majority; the load-balancing operations insert, stall,
// kill and priority. This design's own choices: the copy addresses, the ring of
// compares, issuing copies back to back, one redundant thread in flight, the
// round-robin policy, what priority means, the command and host interfaces.
module shp_thread_ctrl
  import shp_pkg::*;
#(
  parameter int unsigned D = 16,   // thread contexts (memory depth)
  parameter int unsigned C = 4,    // pipeline sections (C-slow factor)
  parameter int unsigned R = 3,    // redundant copies of a redundant thread
  parameter int unsigned W = 32,   // state word width
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // load-balancing commands
  input  logic          cmd_valid,
  input  tc_op_e        cmd_op,
  input  logic [AW-1:0] cmd_tid,
  input  logic          cmd_red,
  input  logic          cmd_prio,
  // issue (read pointer)
  output logic          iss_valid,
  output logic [AW-1:0] iss_tid,
  output logic [RW-1:0] iss_copy,
  output logic          iss_red,
  output logic [AW-1:0] rd_ptr,
  input  logic [W-1:0]  rd_data,
  // compare (compare pointer) and comparator result, one cycle later
  output logic          cmp_en,
  output logic [AW-1:0] cmp_ptr,
  input  logic          cmp_valid,
  input  logic          cmp_mismatch,
  // write port (write pointer)
  input  logic [W-1:0]  res_data,     // result of the thread in its write-back slot
  output logic          we,
  output logic [AW-1:0] wr_ptr,
  output logic [W-1:0]  wdata,
  // host access to thread states
  input  logic          host_we,
  input  logic [AW-1:0] host_waddr,
  input  logic [W-1:0]  host_wdata,
  output logic          host_wready,
  input  logic          host_re,
  input  logic [AW-1:0] host_raddr,
  output logic          host_rready,
  // thread-cycle completion and SEU events
  output logic          wb_valid,     // a thread cycle ended this cycle
  output logic [AW-1:0] wb_tid,
  output logic          wb_commit,    // ... and its result was stored
  output logic          seu_detect,   // a redundant cycle found differing start states
  output logic          seu_recover,  // a faulty copy is being overwritten
  output logic [RW-1:0] seu_copy,     // which copy
  output logic          seu_fatal,    // more than one copy differs: no majority
  output logic [D-1:0]  thr_active,
  output logic [D-1:0]  thr_busy
);

  localparam int unsigned S = D / R;   // distance between copies

  typedef struct packed {
    logic          valid;
    logic          red;
    logic [AW-1:0] tid;
    logic [RW-1:0] copy;
  } slot_t;

  function automatic logic [AW-1:0] copy_addr(logic [AW-1:0] tid, logic [RW-1:0] k);
    return AW'((32'(tid) + 32'(k) * S) % D);
  endfunction

  function automatic logic [RW-1:0] next_copy(logic [RW-1:0] k);
    return (32'(k) == R - 1) ? '0 : k + 1'b1;
  endfunction

  // per-thread configuration and status
  logic [D-1:0] act, stl, red, pri, busy;
  logic [AW-1:0] rr_ptr, rr_red;

  // redundant thread in flight
  logic          grp_issuing;     // copies 1..R-1 still to issue
  logic [RW-1:0] grp_copy;        // next copy to issue
  logic [AW-1:0] grp_tid;
  logic          grp_busy;        // a redundant thread is between issue and last write-back
  logic [R-1:0]  m_acc;           // ring compare results received so far
  logic [W-1:0]  cap [R];         // captured start states of the copies

  slot_t pipe [C-1];              // pipe[0] issued last cycle, pipe[C-2] in write-back

  // ---------------------------------------------------------------- selection
  logic [D-1:0]  ready;
  logic          pick_valid;
  logic          pick_pri;        // picked as a priority thread
  logic [AW-1:0] pick;

  // round robin over the threads in `cand`, starting at `from`
  function automatic logic [AW:0] rr_pick(logic [D-1:0] cand, logic [AW-1:0] from);
    logic [AW:0] r;
    r = '0;
    for (int i = 2 * D - 1; i >= 0; i--) begin
      int unsigned idx;
      idx = 32'(i) % D;
      if (cand[idx] && ((i < D) ? (idx >= 32'(from)) : (idx < 32'(from))))
        r = {1'b1, AW'(idx)};
    end
    return r;
  endfunction

  always_comb begin
    logic [AW:0] rr;
    ready = act & ~stl & ~busy & ~(red & {D{grp_busy}});
    pick_valid = 1'b0;
    pick_pri   = 1'b0;
    pick       = '0;
    // priority threads first, lowest index wins
    for (int i = D - 1; i >= 0; i--)
      if (ready[i] && pri[i]) begin
        pick_valid = 1'b1;
        pick_pri   = 1'b1;
        pick       = AW'(i);
      end
    // then a redundant thread whenever the comparison logic is free,
    // then single threads; each kind has its own round-robin pointer
    rr = (|(ready & red)) ? rr_pick(ready & red, rr_red) : rr_pick(ready & ~red, rr_ptr);
    if (!pick_valid) {pick_valid, pick} = rr;
  end

  // ---------------------------------------------------------------- issue
  // A waiting host access holds back new issues, so that a free write-back
  // slot (C-1 cycles later) or a free compare port comes up.
  logic host_hold;
  assign host_hold = (host_we && !host_wready) || host_re;

  always_comb begin
    iss_valid = 1'b0;
    iss_tid   = '0;
    iss_copy  = '0;
    iss_red   = 1'b0;
    if (grp_issuing) begin
      iss_valid = 1'b1;
      iss_tid   = grp_tid;
      iss_copy  = grp_copy;
      iss_red   = 1'b1;
    end else if (pick_valid && !host_hold) begin
      iss_valid = 1'b1;
      iss_tid   = pick;
      iss_red   = red[pick];
    end
  end

  assign rd_ptr = copy_addr(iss_tid, iss_copy);

  // compare port: ring compare of a redundant copy, else host reads
  assign host_rready = host_re && !grp_issuing;
  assign cmp_en      = iss_valid && iss_red;
  assign cmp_ptr     = cmp_en ? copy_addr(iss_tid, next_copy(iss_copy)) : host_raddr;

  // ---------------------------------------------------------------- verdict
  slot_t         cs;           // slot whose compare result arrives now
  slot_t         ws;           // slot in write-back
  logic [R-1:0]  m_all;
  logic          all_ok;
  logic          single;
  logic          no_major;
  logic [RW-1:0] bad;
  int unsigned   nbad;

  assign cs = pipe[0];
  assign ws = pipe[C-2];

  always_comb begin
    m_all = m_acc;
    if (cs.valid && cs.red && cmp_valid && cmp_mismatch)
      m_all[cs.copy] = 1'b1;
    all_ok = (m_all == '0);
    nbad   = 0;
    bad    = '0;
    for (int unsigned f = 0; f < R; f++) begin
      logic [RW-1:0] prev;
      prev = (f == 0) ? RW'(R - 1) : RW'(f - 1);
      if (m_all[f] && m_all[prev]) begin
        nbad++;
        bad = RW'(f);
      end
    end
    // one bad copy fails exactly its two ring compares; if every compare
    // failed there is no majority. A lone failed compare means a copy changed
    // while the copies were being read: the cycle is simply repeated.
    single   = !all_ok && (nbad == 1) && ($countones(m_all) == 2);
    no_major = (m_all == '1);
  end

  // ---------------------------------------------------------------- write-back
  logic last_copy;
  assign last_copy = (32'(ws.copy) == R - 1);

  always_comb begin
    we          = 1'b0;
    wr_ptr      = copy_addr(ws.tid, ws.copy);
    wdata       = res_data;
    wb_valid    = 1'b0;
    wb_tid      = ws.tid;
    wb_commit   = 1'b0;
    seu_detect  = 1'b0;
    seu_recover = 1'b0;
    seu_copy    = bad;
    seu_fatal   = 1'b0;
    if (ws.valid && !ws.red) begin
      we        = 1'b1;
      wb_valid  = 1'b1;
      wb_commit = 1'b1;
    end else if (ws.valid && ws.red) begin
      if (all_ok) begin
        we = 1'b1;
      end else if (single && ws.copy == bad) begin
        we          = 1'b1;
        wdata       = cap[next_copy(bad)];
        seu_recover = 1'b1;
      end
      if (last_copy) begin
        wb_valid   = 1'b1;
        wb_commit  = all_ok;
        seu_detect = !all_ok;
        seu_fatal  = no_major;
      end
    end
    if (!we && host_we) begin
      we     = 1'b1;
      wr_ptr = host_waddr;
      wdata  = host_wdata;
    end
  end

  assign host_wready = host_we && !(ws.valid && (!ws.red || all_ok || (single && ws.copy == bad)));

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act         <= '0;
      stl         <= '0;
      red         <= '0;
      pri         <= '0;
      busy        <= '0;
      rr_ptr      <= '0;
      rr_red      <= '0;
      grp_issuing <= 1'b0;
      grp_copy    <= '0;
      grp_tid     <= '0;
      grp_busy    <= 1'b0;
      m_acc       <= '0;
      for (int unsigned i = 0; i < C - 1; i++) pipe[i] <= '0;
    end else begin
      // commands
      if (cmd_valid) begin
        unique case (cmd_op)
          TC_INSERT: begin
            act[cmd_tid] <= 1'b1;
            stl[cmd_tid] <= 1'b0;
            red[cmd_tid] <= cmd_red;
            pri[cmd_tid] <= cmd_prio;
          end
          TC_KILL:   act[cmd_tid] <= 1'b0;
          TC_STALL:  stl[cmd_tid] <= 1'b1;
          TC_RESUME: stl[cmd_tid] <= 1'b0;
          default: ;
        endcase
      end

      // issue bookkeeping
      if (grp_issuing) begin
        grp_copy <= next_copy(grp_copy);
        if (32'(grp_copy) == R - 1) grp_issuing <= 1'b0;
      end else if (pick_valid && !host_hold) begin
        // a priority issue leaves the round-robin pointers where they are
        if (!pick_pri) begin
          if (red[pick]) rr_red <= (32'(pick) == D - 1) ? '0 : pick + 1'b1;
          else           rr_ptr <= (32'(pick) == D - 1) ? '0 : pick + 1'b1;
        end
        busy[pick]  <= 1'b1;
        if (red[pick]) begin
          grp_issuing <= 1'b1;
          grp_copy    <= RW'(1);
          grp_tid     <= pick;
          grp_busy    <= 1'b1;
          m_acc       <= '0;
        end
      end

      // compare results of the redundant thread
      if (cs.valid && cs.red && cmp_valid && cmp_mismatch)
        m_acc[cs.copy] <= 1'b1;

      // end of a thread cycle
      if (ws.valid && (!ws.red || last_copy)) begin
        busy[ws.tid] <= 1'b0;
        if (ws.red) grp_busy <= 1'b0;
      end

      // slot tracking
      pipe[0] <= '{valid: iss_valid, red: iss_red, tid: iss_tid, copy: iss_copy};
      for (int unsigned i = 1; i < C - 1; i++) pipe[i] <= pipe[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (iss_valid && iss_red) cap[iss_copy] <= rd_data;
  end

  assign thr_active = act;
  assign thr_busy   = busy;

  // ---------------------------------------------------------------- rules
  initial begin
    assert (C > R) else $error("shp_thread_ctrl: needs C > R");
    assert (R >= 2 && D >= R) else $error("shp_thread_ctrl: needs 2 <= R <= D");
  end

  // a thread is never issued while its previous cycle is in flight
  assert property (@(posedge clk) disable iff (!rst_n)
    (iss_valid && !grp_issuing) |-> !busy[iss_tid]);
  // compare results arrive only for the redundant thread in flight
  assert property (@(posedge clk) disable iff (!rst_n)
    (cs.valid && cs.red) |-> (grp_busy && cs.tid == grp_tid));
  // a redundant result is written only when all start states agreed, or as a repair
  assert property (@(posedge clk) disable iff (!rst_n)
    (we && ws.valid && ws.red && !all_ok) |-> (seu_recover || (host_we && host_wready)));

endmodule
