// hwds_sync_unit: the synchronization unit of the MIOMU, a pool of
// hardware-driven semaphores (HWDS) and the engine that executes the six
// semaphore instructions on them.
//
// Each semaphore cell holds
//   - the mutex variable: the owner of the critical interval (empty or a TID)
//     and the queue of threads waiting to enter it;
//   - the event variable: the queue of threads that left the critical
//     interval with SemaphoreWait and wait to be passed back into it;
//   - the counter variable: loaded with the timeout operand of a
//     SemaphoreLock or SemaphoreWait that has to wait, decremented by hardware
//     every TICK_DIV clocks, and stopped by SemaphoreUnlock/SemaphorePass.
// Both queues are ordered by priority and, within one priority, by issue time.
//
// Operations (request -> replies; every reply carries the requester's tag):
//   GET    allocate a free cell; reply OK with the cell index, EMPTY if none
//   FREE   release a cell that has no waiters (FAULT otherwise)
//   LOCK   enter the critical interval now (OK) or join the mutex queue
//   UNLOCK leave; the head of the mutex queue, if any, enters (its LOCK completes)
//   WAIT   as UNLOCK, and the issuer joins the event queue
//   PASS   leave; the head of the event queue enters, else the head of the
//          mutex queue, else the interval becomes free
// When a counter reaches zero, every waiting LOCK completes with TIMEOUT and is
// dropped, and every waiting WAIT is moved to the mutex queue: it completes with
// TIMEOUT once it is back inside the critical interval. That second rule is
// this design's reading of the producer/consumer example, whose code keeps
// testing the shared buffer after a timed-out SemaphoreWait as if still in the
// critical interval.
//
// The semantics above follow the architecture description. The following
// are this design's choices: fixed-depth queues held inside each cell (the
// original keeps them as linked lists in a local memory swapped by hardware),
// one counter per cell shared by all its waiters, a timeout operand of 0
// meaning "no limit", FAULT replies for misuse (UNLOCK/WAIT/PASS by a thread
// that is not the owner, a recursive LOCK, a full queue, an operation on an
// unallocated cell), and a single engine that accepts one request per clock.
//
// Timing: a request is taken in the clock it is offered when the reply FIFO has
// room for two replies and no expiry is being processed; replies leave a
// four-entry FIFO, at most one per clock. One expired waiter is handled per
// clock. Reset is synchronous.
module hwds_sync_unit
  import vthm_pkg::*;
#(
  parameter int NSEM     = 8,
  parameter int QD       = 4,
  parameter int TICK_DIV = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // request
  input  logic                    req_valid,
  output logic                    req_ready,
  input  semop_e                  req_op,
  input  logic [$clog2(NSEM)-1:0] req_idx,
  input  tid_t                    req_tid,
  input  prio_t                   req_prio,
  input  tag_t                    req_tag,
  input  tmo_t                    req_timeout,
  // completion reply
  output logic                    rsp_valid,
  input  logic                    rsp_ready,
  output tag_t                    rsp_tag,
  output tid_t                    rsp_tid,
  output prio_t                   rsp_prio,
  output cc_e                     rsp_cc,
  output word_t                   rsp_data,
  // observation
  output logic [NSEM-1:0]         sem_allocated,
  output logic [NSEM-1:0]         sem_owned
);
  localparam int SW = $clog2(NSEM);
  localparam int QW = $clog2(QD+1);
  localparam int IW = (QD > 1) ? $clog2(QD) : 1;

  typedef struct packed {
    tid_t  tid;
    prio_t prio;
    tag_t  tag;
    logic  tflag;   // a WAIT whose time ran out; completes with TIMEOUT on entry
  } waiter_t;

  typedef struct packed {
    tag_t  tag;
    tid_t  tid;
    prio_t prio;
    cc_e   cc;
    word_t data;
  } reply_t;

  // ---- cell state --------------------------------------------------------
  logic            alloc [NSEM];
  logic            own_v [NSEM];
  tid_t            own   [NSEM];
  tmo_t            cnt   [NSEM];
  logic            expd  [NSEM];
  logic [QW-1:0]   mq_n  [NSEM];
  logic [QW-1:0]   eq_n  [NSEM];
  waiter_t         mq    [NSEM][QD];
  waiter_t         eq    [NSEM][QD];

  // ---- reply FIFO (2 writes, 1 read per clock) ----------------------------
  reply_t          rq    [4];
  logic [1:0]      rq_rd;
  logic [2:0]      rq_n;

  assign rsp_valid = (rq_n != 3'd0);
  assign rsp_tag   = rq[rq_rd].tag;
  assign rsp_tid   = rq[rq_rd].tid;
  assign rsp_prio  = rq[rq_rd].prio;
  assign rsp_cc    = rq[rq_rd].cc;
  assign rsp_data  = rq[rq_rd].data;

  always_comb begin
    for (int s = 0; s < NSEM; s++) begin
      sem_allocated[s] = alloc[s];
      sem_owned[s]     = own_v[s];
    end
  end

  // ---- tick prescaler -----------------------------------------------------
  logic [$clog2(TICK_DIV+1)-1:0] pre;
  wire tick = (pre == '0);

  // ---- expiry selection -----------------------------------------------------
  logic          any_exp;
  logic [SW-1:0] exp_s;
  always_comb begin
    any_exp = 1'b0;
    exp_s   = '0;
    for (int s = NSEM-1; s >= 0; s--) begin
      if (expd[s]) begin
        any_exp = 1'b1;
        exp_s   = SW'(s);
      end
    end
  end

  // first un-flagged (LOCK) waiter in the mutex queue of the expiring cell
  logic          exp_lock_found;
  logic [QW-1:0] exp_lock_pos;
  always_comb begin
    exp_lock_found = 1'b0;
    exp_lock_pos   = '0;
    for (int i = QD-1; i >= 0; i--) begin
      if (QW'(i) < mq_n[exp_s] && !mq[exp_s][i].tflag) begin
        exp_lock_found = 1'b1;
        exp_lock_pos   = QW'(i);
      end
    end
  end

  // first free cell for GET
  logic          free_found;
  logic [SW-1:0] free_s;
  always_comb begin
    free_found = 1'b0;
    free_s     = '0;
    for (int s = NSEM-1; s >= 0; s--) begin
      if (!alloc[s]) begin
        free_found = 1'b1;
        free_s     = SW'(s);
      end
    end
  end

  wire   rq_room2 = (rq_n <= 3'd2);
  wire   rq_room1 = (rq_n <= 3'd3);
  assign req_ready = rq_room2 && !any_exp;

  // insertion position in a priority-ordered queue: behind every waiter of
  // equal or higher priority
  function automatic logic [QW-1:0] ins_pos(input waiter_t q[QD], input logic [QW-1:0] n,
                                            input prio_t p);
    logic [QW-1:0] pos;
    pos = '0;
    for (int i = 0; i < QD; i++)
      if (QW'(i) < n && q[i].prio >= p) pos = QW'(i+1);
    return pos;
  endfunction

  always_ff @(posedge clk) begin
    reply_t r0, r1;
    logic   w0, w1;
    waiter_t nw, hd;
    logic [QW-1:0] pos;
    logic [SW-1:0] s;
    w0 = 1'b0; w1 = 1'b0;
    r0 = '0;   r1 = '0;

    if (!rst_n) begin
      for (int k = 0; k < NSEM; k++) begin
        alloc[k] <= 1'b0; own_v[k] <= 1'b0; own[k] <= '0; cnt[k] <= '0;
        expd[k]  <= 1'b0; mq_n[k]  <= '0;   eq_n[k] <= '0;
      end
      rq_rd <= '0;
      rq_n  <= '0;
      pre   <= '0;
    end else begin
      pre <= (pre == ($clog2(TICK_DIV+1))'(TICK_DIV-1)) ? '0 : pre + 1'b1;

      // hardware decrement of the counters
      for (int k = 0; k < NSEM; k++) begin
        if (tick && cnt[k] != '0) begin
          cnt[k] <= cnt[k] - 1'b1;
          if (cnt[k] == tmo_t'(1)) expd[k] <= 1'b1;
        end
      end

      if (any_exp && rq_room1) begin
        // ---- one step of timeout completion on cell exp_s ----------------
        s = exp_s;
        if (exp_lock_found) begin
          // a waiting LOCK completes with TIMEOUT and leaves the queue
          hd = mq[s][IW'(exp_lock_pos)];
          for (int i = 0; i < QD-1; i++)
            if (QW'(i) >= exp_lock_pos) mq[s][i] <= mq[s][i+1];
          mq_n[s] <= mq_n[s] - 1'b1;
          w0 = 1'b1; r0 = '{tag: hd.tag, tid: hd.tid, prio: hd.prio, cc: CC_TIMEOUT, data: '0};
        end else if (eq_n[s] != '0) begin
          // a waiting WAIT returns towards the critical interval
          hd = eq[s][0];
          for (int i = 0; i < QD-1; i++) eq[s][i] <= eq[s][i+1];
          eq_n[s] <= eq_n[s] - 1'b1;
          if (!own_v[s]) begin
            own_v[s] <= 1'b1; own[s] <= hd.tid;
            w0 = 1'b1; r0 = '{tag: hd.tag, tid: hd.tid, prio: hd.prio, cc: CC_TIMEOUT, data: '0};
          end else begin
            hd.tflag = 1'b1;
            pos = ins_pos(mq[s], mq_n[s], hd.prio);
            for (int i = QD-1; i > 0; i--)
              if (QW'(i) > pos) mq[s][i] <= mq[s][i-1];
            mq[s][IW'(pos)] <= hd;
            mq_n[s] <= mq_n[s] + 1'b1;
          end
        end else begin
          expd[s] <= 1'b0;
        end
      end else if (req_valid && req_ready) begin
        // ---- one semaphore instruction ----------------------------------
        s  = req_idx;
        nw = '{tid: req_tid, prio: req_prio, tag: req_tag, tflag: 1'b0};
        w0 = 1'b1;
        r0 = '{tag: req_tag, tid: req_tid, prio: req_prio, cc: CC_OK, data: '0};
        if (req_op == SEM_GET) begin
          if (free_found) begin
            alloc[free_s] <= 1'b1; own_v[free_s] <= 1'b0; cnt[free_s] <= '0;
            expd[free_s]  <= 1'b0; mq_n[free_s]  <= '0;   eq_n[free_s] <= '0;
            r0.data = word_t'(free_s);
          end else begin
            r0.cc = CC_EMPTY;
          end
        end else if (!alloc[s]) begin
          r0.cc = CC_FAULT;
        end else begin
          unique case (req_op)
            SEM_FREE: begin
              if (mq_n[s] != '0 || eq_n[s] != '0) r0.cc = CC_FAULT;
              else begin alloc[s] <= 1'b0; own_v[s] <= 1'b0; cnt[s] <= '0; end
            end
            SEM_LOCK: begin
              if (!own_v[s]) begin
                own_v[s] <= 1'b1; own[s] <= req_tid;
              end else if (own[s] == req_tid || mq_n[s] == QW'(QD)) begin
                r0.cc = CC_FAULT;
              end else begin
                w0 = 1'b0;                     // completes later
                pos = ins_pos(mq[s], mq_n[s], req_prio);
                for (int i = QD-1; i > 0; i--)
                  if (QW'(i) > pos) mq[s][i] <= mq[s][i-1];
                mq[s][IW'(pos)] <= nw;
                mq_n[s] <= mq_n[s] + 1'b1;
                if (req_timeout != '0) begin cnt[s] <= req_timeout; expd[s] <= 1'b0; end
              end
            end
            SEM_UNLOCK, SEM_WAIT, SEM_PASS: begin
              if (!own_v[s] || own[s] != req_tid ||
                  (req_op == SEM_WAIT && eq_n[s] == QW'(QD))) begin
                r0.cc = CC_FAULT;
              end else begin
                if (req_op == SEM_PASS && eq_n[s] != '0) begin
                  hd = eq[s][0];
                  for (int i = 0; i < QD-1; i++) eq[s][i] <= eq[s][i+1];
                  eq_n[s] <= eq_n[s] - 1'b1;
                  own[s] <= hd.tid;
                  w1 = 1'b1; r1 = '{tag: hd.tag, tid: hd.tid, prio: hd.prio, cc: CC_OK, data: '0};
                end else if (mq_n[s] != '0) begin
                  hd = mq[s][0];
                  for (int i = 0; i < QD-1; i++) mq[s][i] <= mq[s][i+1];
                  mq_n[s] <= mq_n[s] - 1'b1;
                  own[s] <= hd.tid;
                  w1 = 1'b1;
                  r1 = '{tag: hd.tag, tid: hd.tid, prio: hd.prio, cc: hd.tflag ? CC_TIMEOUT : CC_OK, data: '0};
                end else begin
                  own_v[s] <= 1'b0;
                end
                if (req_op == SEM_WAIT) begin
                  w0 = 1'b0;                   // completes when passed back in
                  pos = ins_pos(eq[s], eq_n[s], req_prio);
                  for (int i = QD-1; i > 0; i--)
                    if (QW'(i) > pos) eq[s][i] <= eq[s][i-1];
                  eq[s][IW'(pos)] <= nw;
                  eq_n[s] <= eq_n[s] + 1'b1;
                  if (req_timeout != '0) begin cnt[s] <= req_timeout; expd[s] <= 1'b0; end
                end else begin
                  cnt[s]  <= '0;               // Unlock/Pass stop the counter
                  expd[s] <= 1'b0;
                end
              end
            end
            default: r0.cc = CC_FAULT;
          endcase
        end
      end

      // ---- reply FIFO update ---------------------------------------------
      begin
        logic [2:0] n;
        logic [1:0] wp;
        n  = rq_n;
        wp = rq_rd + rq_n[1:0];
        if (rsp_valid && rsp_ready) begin
          rq_rd <= rq_rd + 1'b1;
          n = n - 1'b1;
        end
        if (w0) begin rq[wp] <= r0; wp = wp + 1'b1; n = n + 1'b1; end
        if (w1) begin rq[wp] <= r1; n = n + 1'b1; end
        rq_n <= n;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_rq_bound: assert (rq_n <= 3'd4);
  end
endmodule
