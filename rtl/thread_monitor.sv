// thread_monitor: the thread monitor, which holds the roots of the thread
// descriptors and turns each thread's instruction stream into transactions
// for the executive clusters.
//
// Sequencer. The operating registers block keeps one root per live thread:
// TID, priority, status, instruction counter and completion code, plus the
// queue it is in, "waiting for scheduling" or "waiting for the result" of a
// transaction already issued. The scheduler picks the highest-priority thread
// waiting for scheduling (rotating among equals), fetches TXN_LEN instruction
// words at its instruction counter, and forms a transaction: the instructions
// up to and including the first control instruction (branch, jump, halt), and
// the information dependency graph over them. Instruction i depends on an
// earlier j when i reads a register j writes, writes a register j reads or
// writes, when both reference memory or a semaphore, or when i is the control
// instruction (it closes the transaction).
//
// Transaction issuing unit. Formed transactions wait in a prioritized queues
// buffer pool; the dispatching unit sends the highest-priority one to the
// executive cluster over the network, and takes back the replies
// (TID, next instruction counter, completion code, halt). A reply puts the
// thread back in the scheduling queue at the new instruction counter, or
// frees its root if the thread halted.
//
// Threads are created through the create port, and one bootstrap thread
// (TID 0, hyper-privileged, highest priority, instruction counter BOOT_PC)
// is created by reset when BOOT is set. What the monitor keeps and does
// follows the architecture description; the root layout, the fetch of a fixed
// TXN_LEN words per transaction, the dependency rules (the architecture does
// not define an instruction set) and the creation port are this design's
// choices. Creating a thread does not ask the MIOMU for a process
// descriptor, and roots are not swapped out to the local memory.
//
// Timing: about 2 clocks per fetched word plus 2 clocks to form and queue a
// transaction; one transaction leaves per clock when the network accepts.
module thread_monitor
  import vthm_pkg::*;
#(
  parameter int    NTHR    = 8,
  parameter int    NPRIO   = 8,
  parameter int    PDEPTH  = 2,
  parameter bit    BOOT    = 1'b1,
  parameter word_t BOOT_PC = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  // thread creation
  input  logic     create_valid,
  output logic     create_ready,
  input  tid_t     create_tid,
  input  prio_t    create_prio,
  input  tstat_e   create_status,
  input  word_t    create_pc,
  // instruction fetch (memory and IO unit interface)
  output logic     fetch_valid,
  input  logic     fetch_ready,
  output pa_t      fetch_pa,
  input  logic     fetch_rvalid,
  input  word_t    fetch_rdata,
  // processor network port
  output logic     net_out_valid,
  input  logic     net_out_ready,
  output net_pkt_t net_out,
  input  logic     net_in_valid,
  output logic     net_in_ready,
  input  net_pkt_t net_in,
  // observation
  output logic [NTHR-1:0] live,
  output logic     txn_issued,      // pulse: a transaction left
  output logic     thread_halted    // pulse: a root was freed
);
  localparam int TW = (NTHR > 1) ? $clog2(NTHR) : 1;
  localparam int KW = $clog2(TXN_LEN + 1);

  typedef enum logic [1:0] {Q_NONE, Q_SCHED, Q_FETCH, Q_RESULT} q_e;
  typedef enum logic [1:0] {S_PICK, S_FETCH, S_FWAIT, S_PUSH} s_e;

  typedef struct packed {
    q_e     q;
    tid_t   tid;
    prio_t  prio;
    tstat_e status;
    word_t  pc;
    cc_e    cc;
  } root_t;

  root_t   roots [NTHR];
  s_e      st;
  logic [TW-1:0] cur, last;
  logic [KW-1:0] k;
  instr_t [TXN_LEN-1:0] words;

  // ---- scheduler choice ------------------------------------------------------
  logic          pick_any;
  logic [TW-1:0] pick;
  always_comb begin
    prio_t best;
    pick_any = 1'b0;
    pick     = '0;
    best     = '0;
    for (int j = 1; j <= NTHR; j++) begin
      int t;
      t = (int'(last) + j) % NTHR;
      if (roots[t].q == Q_SCHED && (!pick_any || roots[t].prio > best)) begin
        pick_any = 1'b1;
        pick     = TW'(t);
        best     = roots[t].prio;
      end
    end
  end

  // ---- free root for creation ------------------------------------------------
  logic          free_any;
  logic [TW-1:0] free_t;
  always_comb begin
    free_any = 1'b0;
    free_t   = '0;
    for (int t = NTHR-1; t >= 0; t--)
      if (roots[t].q == Q_NONE) begin free_any = 1'b1; free_t = TW'(t); end
    for (int t = 0; t < NTHR; t++) live[t] = (roots[t].q != Q_NONE);
  end
  assign create_ready = free_any;

  // ---- transaction forming: length and dependency graph ----------------------
  txn_req_t txn;
  always_comb begin
    logic [2:0] n;
    logic       closed;
    n      = 3'(TXN_LEN);
    closed = 1'b0;
    for (int i = 0; i < TXN_LEN; i++)
      if (!closed && is_ctrl(words[i].op)) begin n = 3'(i + 1); closed = 1'b1; end
    txn.tid    = roots[cur].tid;
    txn.prio   = roots[cur].prio;
    txn.status = roots[cur].status;
    txn.pc     = roots[cur].pc;
    txn.n      = n;
    txn.instr  = words;
    txn.graph  = '0;
    for (int i = 0; i < TXN_LEN; i++) begin
      for (int j = 0; j < i; j++) begin
        instr_t a, b;
        logic raw, waw, war, mem, ctl;
        a   = words[i];
        b   = words[j];
        raw = writes_rd(b.op) && ((reads_rs1(a.op) && a.rs1 == b.rd) || (reads_rs2(a.op) && a.rs2 == b.rd));
        waw = writes_rd(a.op) && writes_rd(b.op) && a.rd == b.rd;
        war = writes_rd(a.op) && ((reads_rs1(b.op) && b.rs1 == a.rd) || (reads_rs2(b.op) && b.rs2 == a.rd));
        mem = (a.op inside {OP_LD, OP_ST, OP_SEM}) && (b.op inside {OP_LD, OP_ST, OP_SEM});
        ctl = is_ctrl(a.op);
        txn.graph[i][j] = (i < int'(n)) && (raw || waw || war || mem || ctl);
      end
    end
  end

  // ---- transaction issuing unit -----------------------------------------------
  logic     pool_push_ready, pool_pop_valid, pool_pop_ready;
  logic [$clog2(NPRIO)-1:0] pool_pop_prio;
  logic [$bits(txn_req_t)-1:0] pool_pop_data;
  logic [NPRIO-1:0] pool_nonempty;

  wire push = (st == S_PUSH) && pool_push_ready;

  prio_queue_pool #(.W($bits(txn_req_t)), .NPRIO(NPRIO), .DEPTH(PDEPTH)) u_pool (
    .clk, .rst_n,
    .push_valid(st == S_PUSH), .push_ready(pool_push_ready),
    .push_prio($clog2(NPRIO)'(txn.prio)), .push_data(txn),
    .pop_valid(pool_pop_valid), .pop_ready(pool_pop_ready),
    .pop_prio(pool_pop_prio), .pop_data(pool_pop_data), .nonempty(pool_nonempty));

  // dispatching unit: one output register towards the network
  assign pool_pop_ready = !net_out_valid || net_out_ready;
  assign net_in_ready   = 1'b1;
  assign fetch_valid    = (st == S_FETCH);
  assign fetch_pa       = roots[cur].pc[PA_W-1:0] + pa_t'({k, 2'b00});

  txn_rsp_t rsp;
  assign rsp = txn_rsp_t'(net_in.body[$bits(txn_rsp_t)-1:0]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int t = 0; t < NTHR; t++) roots[t] <= '0;
      if (BOOT) roots[0] <= '{q: Q_SCHED, tid: '0, prio: '1, status: ST_HYPER, pc: BOOT_PC, cc: CC_OK};
      st <= S_PICK; cur <= '0; last <= TW'(NTHR-1); k <= '0; words <= '0;
      net_out_valid <= 1'b0; net_out <= '0; txn_issued <= 1'b0; thread_halted <= 1'b0;
    end else begin
      txn_issued    <= 1'b0;
      thread_halted <= 1'b0;
      // dispatching
      if (pool_pop_ready) begin
        net_out_valid <= pool_pop_valid;
        if (pool_pop_valid) begin
          net_out.kind <= K_TXN_REQ;
          net_out.src  <= P_TM;
          net_out.dst  <= P_DEC;
          net_out.prio <= prio_t'(pool_pop_prio);
          net_out.body <= BODY_W'(pool_pop_data);
          txn_issued   <= 1'b1;
        end
      end
      // scheduler
      unique case (st)
        S_PICK: if (pick_any) begin
          cur <= pick; last <= pick; k <= '0;
          roots[pick].q <= Q_FETCH;
          st <= S_FETCH;
        end
        S_FETCH: if (fetch_ready) st <= S_FWAIT;
        S_FWAIT: if (fetch_rvalid) begin
          words[k] <= instr_t'(fetch_rdata);
          if (k == KW'(TXN_LEN-1)) st <= S_PUSH;
          else begin k <= k + 1'b1; st <= S_FETCH; end
        end
        S_PUSH: if (push) begin
          roots[cur].q <= Q_RESULT;
          st <= S_PICK;
        end
        default: st <= S_PICK;
      endcase
      // transaction replies
      if (net_in_valid && net_in.kind == K_TXN_RSP) begin
        for (int t = 0; t < NTHR; t++) begin
          if (roots[t].q == Q_RESULT && roots[t].tid == rsp.tid) begin
            roots[t].pc <= rsp.next_pc;
            roots[t].cc <= rsp.cc;
            roots[t].q  <= rsp.halt ? Q_NONE : Q_SCHED;
            if (rsp.halt) thread_halted <= 1'b1;
          end
        end
      end
      // creation
      if (create_valid && free_any)
        roots[free_t] <= '{q: Q_SCHED, tid: create_tid, prio: create_prio, status: create_status,
                           pc: create_pc, cc: CC_OK};
    end
  end
endmodule
