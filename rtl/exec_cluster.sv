// exec_cluster: a domain executive cluster. It executes the transactions sent
// by the thread monitor, keeping the architectural registers of each thread
// in fine-grain blocks that are allocated only when a transaction needs them.
//
// Sequencer.
//  - Transactions are accepted into NSLOT waiting slots ("instruction waiting
//    queues"), one per transaction, each with its instructions, dependency
//    graph, and done/issued marks.
//  - The mapping unit then replaces architectural register numbers by
//    register-file addresses. The NREG architectural registers of a thread are
//    split into blocks of RBLK; for every block the transaction uses, the
//    mapping table is searched for (TID, block) and, if absent, a free
//    physical block is allocated and reads as zero. One block is handled per
//    clock. A transaction starts mapping only when all the new blocks it
//    needs are free; otherwise it is parked (a map stall) and retried once a
//    halting thread has released its blocks, so that other transactions go on
//    meanwhile and no thread holds part of what it needs.
//  - The scheduler moves one ready instruction per clock (all its
//    predecessors in the graph done) from the highest-priority mapped slot
//    into the prioritized buffer pool of the pipeline.
// Executive pipeline. The pool's head goes either to the functional unit
// (FEU: add, sub, and, or, xor, add-immediate, branch-if-non-zero, jump, halt,
// executed in the clock it leaves the pool) or to the load-store unit (LSU),
// which sends a memory or semaphore reference to the MIOMU tagged with
// {port, slot, instruction} and does not wait: the instruction stays
// in flight, possibly for a long time on a semaphore, while other slots go on.
// Its reply writes the destination register and marks it done.
// A taken jump whose target falls inside the transaction's own instruction
// block is a local jump: the instructions from the target on are re-armed
// and the transaction loops inside the cluster without a round trip to the
// thread monitor (local_jump pulses). A jump out of the block, or the last
// instruction finishing, ends the transaction.
// When all instructions of a slot are done, the reply
// (TID, priority, next instruction counter, completion code, halt, result)
// goes back to the thread monitor and the slot is freed; a halt also
// releases the thread's register blocks.
//
// The structure (mapping unit, waiting queues, scheduler using the
// dependency graph, prioritized buffer pool, FEU, LSU, fine-grain register
// file) follows the architecture description. The instruction set, the slot
// count, block size, single FEU and LSU, and one instruction scheduled per
// clock are this design's choices. Not built: forcing a lower-priority
// instruction back out of the pool, and swapping register blocks or waiting
// instructions to the local memory.
module exec_cluster
  import vthm_pkg::*;
#(
  parameter int NSLOT  = 4,
  parameter int NPBLK  = 16,
  parameter int NPRIO  = 8,
  parameter int PDEPTH = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     net_in_valid,
  output logic     net_in_ready,
  input  net_pkt_t net_in,
  output logic     net_out_valid,
  input  logic     net_out_ready,
  output net_pkt_t net_out,
  // observation
  output logic     map_stall,       // mapping unit waits for a free block
  output logic     txn_done,        // pulse: a transaction reply left
  output logic     local_jump,      // pulse: a jump stayed inside its transaction
  output logic [$clog2(NPBLK+1)-1:0] blocks_used
);
  localparam int SLW = $clog2(NSLOT);
  localparam int IXW = $clog2(TXN_LEN);
  localparam int PBW = $clog2(NPBLK);
  localparam int NPR = NPBLK * RBLK;
  localparam int ABW = $clog2(NABLK);

  typedef struct packed {
    logic                              valid;
    logic                              mapped;
    logic                              mwait;    // parked: no free block
    tid_t                              tid;
    prio_t                             prio;
    tstat_e                            status;
    word_t                             pc;
    logic [2:0]                        n;
    instr_t [TXN_LEN-1:0]              instr;
    logic [TXN_LEN-1:0][TXN_LEN-1:0]   graph;
    logic [TXN_LEN-1:0]                issued;
    logic [TXN_LEN-1:0]                done;
    logic [NABLK-1:0][PBW-1:0]         map;
    word_t                             next_pc;
    logic                              halt;
    cc_e                               cc;
    word_t                             result;
  } slot_t;

  slot_t         slot  [NSLOT];
  logic          mt_v  [NPBLK];     // mapping table
  tid_t          mt_tid[NPBLK];
  logic [ABW-1:0] mt_ab[NPBLK];
  word_t         rf    [NPR];       // fine-grain register file
  logic [NPR-1:0] rf_v;             // written since allocation

  // ---- helpers ------------------------------------------------------------------
  function automatic logic [NABLK-1:0] used_blocks(slot_t s);
    logic [NABLK-1:0] u;
    u = '0;
    for (int i = 0; i < TXN_LEN; i++) begin
      if (i < int'(s.n)) begin
        if (writes_rd(s.instr[i].op)) u[int'(s.instr[i].rd) / RBLK] = 1'b1;
        if (reads_rs1(s.instr[i].op)) u[int'(s.instr[i].rs1) / RBLK] = 1'b1;
        if (reads_rs2(s.instr[i].op)) u[int'(s.instr[i].rs2) / RBLK] = 1'b1;
      end
    end
    return u;
  endfunction

  function automatic logic [$clog2(NPR)-1:0] paddr(slot_t s, logic [3:0] r);
    return {s.map[int'(r) / RBLK], 2'(int'(r) % RBLK)};
  endfunction

  // ---- accept --------------------------------------------------------------------
  logic           free_any;
  logic [SLW-1:0] free_s;
  always_comb begin
    free_any = 1'b0;
    free_s   = '0;
    for (int s = NSLOT-1; s >= 0; s--) if (!slot[s].valid) begin free_any = 1'b1; free_s = SLW'(s); end
  end
  assign net_in_ready = (net_in.kind == K_MEM_RSP) || free_any;
  txn_req_t in_txn;
  mem_rsp_t in_mrsp;
  assign in_txn  = txn_req_t'(net_in.body);
  assign in_mrsp = mem_rsp_t'(net_in.body[$bits(mem_rsp_t)-1:0]);

  // ---- mapping unit ------------------------------------------------------------------
  logic           mp_any, mp_act, mp_cand_any;
  logic [SLW-1:0] mp_s, mp_cur, mp_cand;
  logic [ABW:0]   mp_b;            // block being mapped
  logic           mp_need, mp_hit, mp_free_any;
  logic [PBW-1:0] mp_hit_p, mp_free_p;
  always_comb begin
    mp_cand_any = 1'b0;
    mp_cand     = '0;
    for (int s = NSLOT-1; s >= 0; s--)
      if (slot[s].valid && !slot[s].mapped && !slot[s].mwait) begin mp_cand_any = 1'b1; mp_cand = SLW'(s); end
    mp_any = mp_act || mp_cand_any;
    mp_s   = mp_act ? mp_cur : mp_cand;
    mp_need = mp_any && (mp_b < (ABW+1)'(NABLK)) && used_blocks(slot[mp_s])[ABW'(mp_b)];
    mp_hit = 1'b0; mp_hit_p = '0; mp_free_any = 1'b0; mp_free_p = '0;
    for (int p = NPBLK-1; p >= 0; p--) begin
      if (mt_v[p] && mt_tid[p] == slot[mp_s].tid && mt_ab[p] == ABW'(mp_b)) begin mp_hit = 1'b1; mp_hit_p = PBW'(p); end
      if (!mt_v[p]) begin mp_free_any = 1'b1; mp_free_p = PBW'(p); end
    end
  end

  // all or nothing: a transaction starts mapping only if every block it
  // needs is either mapped already or can be taken from the free ones
  logic [NABLK-1:0]       mp_used, mp_present;
  logic [$clog2(NPBLK+1)-1:0] mp_new_cnt, mp_free_cnt;
  always_comb begin
    mp_used    = used_blocks(slot[mp_s]);
    mp_present = '0;
    mp_free_cnt = '0;
    for (int p = 0; p < NPBLK; p++) begin
      if (mt_v[p] && mt_tid[p] == slot[mp_s].tid) mp_present[mt_ab[p]] = 1'b1;
      mp_free_cnt += ($clog2(NPBLK+1))'(!mt_v[p]);
    end
    mp_new_cnt = '0;
    for (int b = 0; b < NABLK; b++) mp_new_cnt += ($clog2(NPBLK+1))'(mp_used[b] && !mp_present[b]);
  end
  assign map_stall = mp_any && mp_b == '0 && mp_new_cnt > mp_free_cnt;

  always_comb begin
    blocks_used = '0;
    for (int p = 0; p < NPBLK; p++) blocks_used += ($clog2(NPBLK+1))'(mt_v[p]);
  end

  // ---- scheduler -----------------------------------------------------------------------
  logic           sc_any;
  logic [SLW-1:0] sc_s;
  logic [IXW-1:0] sc_i;
  always_comb begin
    prio_t best;
    sc_any = 1'b0; sc_s = '0; sc_i = '0; best = '0;
    for (int s = 0; s < NSLOT; s++) begin
      for (int i = TXN_LEN-1; i >= 0; i--) begin
        if (slot[s].valid && slot[s].mapped && i < int'(slot[s].n) && !slot[s].issued[i] &&
            (slot[s].graph[i] & ~slot[s].done) == '0 && (!sc_any || slot[s].prio > best ||
            (slot[s].prio == best && SLW'(s) == sc_s))) begin
          sc_any = 1'b1; sc_s = SLW'(s); sc_i = IXW'(i); best = slot[s].prio;
        end
      end
    end
  end

  logic pool_push_ready, pool_pop_valid, pool_pop_ready;
  logic [$clog2(NPRIO)-1:0] pool_pop_prio;
  logic [SLW+IXW-1:0] pool_pop_data;
  logic [NPRIO-1:0] pool_nonempty;

  prio_queue_pool #(.W(SLW+IXW), .NPRIO(NPRIO), .DEPTH(PDEPTH)) u_pool (
    .clk, .rst_n,
    .push_valid(sc_any), .push_ready(pool_push_ready),
    .push_prio($clog2(NPRIO)'(slot[sc_s].prio)), .push_data({sc_s, sc_i}),
    .pop_valid(pool_pop_valid), .pop_ready(pool_pop_ready),
    .pop_prio(pool_pop_prio), .pop_data(pool_pop_data), .nonempty(pool_nonempty));

  // ---- pipeline head ---------------------------------------------------------------------
  wire [SLW-1:0] ex_s = pool_pop_data[IXW +: SLW];
  wire [IXW-1:0] ex_i = pool_pop_data[IXW-1:0];
  instr_t ex;
  word_t  a, b, imm_sx;
  assign ex     = slot[ex_s].instr[ex_i];
  assign a      = rf_v[paddr(slot[ex_s], ex.rs1)] ? rf[paddr(slot[ex_s], ex.rs1)] : '0;
  assign b      = rf_v[paddr(slot[ex_s], ex.rs2)] ? rf[paddr(slot[ex_s], ex.rs2)] : '0;
  assign imm_sx = word_t'(signed'(ex.imm));
  wire   ex_lsu = ex.op inside {OP_LD, OP_ST, OP_SEM};

  // completion candidate
  logic           cp_any;
  logic [SLW-1:0] cp_s;
  always_comb begin
    cp_any = 1'b0; cp_s = '0;
    for (int s = NSLOT-1; s >= 0; s--)
      if (slot[s].valid && slot[s].mapped && (slot[s].done | ~((TXN_LEN)'((1 << slot[s].n) - 1))) == '1) begin
        cp_any = 1'b1; cp_s = SLW'(s);
      end
  end

  wire out_free = !net_out_valid || net_out_ready;
  wire send_cp  = cp_any && out_free;
  assign pool_pop_ready = pool_pop_valid && (!ex_lsu || (out_free && !send_cp));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) slot[s] <= '0;
      for (int p = 0; p < NPBLK; p++) begin mt_v[p] <= 1'b0; mt_tid[p] <= '0; mt_ab[p] <= '0; end
      rf_v <= '0;
      mp_b <= '0; mp_act <= 1'b0; mp_cur <= '0;
      net_out_valid <= 1'b0; net_out <= '0; txn_done <= 1'b0;
      local_jump <= 1'b0;
    end else begin
      txn_done <= 1'b0;
      local_jump <= 1'b0;
      if (net_out_valid && net_out_ready) net_out_valid <= 1'b0;

      // accept a transaction
      if (net_in_valid && net_in.kind == K_TXN_REQ && free_any) begin
        slot[free_s] <= '{valid: 1'b1, mapped: 1'b0, mwait: 1'b0, tid: in_txn.tid, prio: in_txn.prio,
                          status: in_txn.status, pc: in_txn.pc, n: in_txn.n, instr: in_txn.instr,
                          graph: in_txn.graph, issued: '0, done: '0, map: '0,
                          next_pc: in_txn.pc + word_t'({in_txn.n, 2'b00}), halt: 1'b0, cc: CC_OK,
                          result: '0};
      end

      // mapping unit: one architectural block per clock
      if (mp_any) begin
        mp_act <= 1'b1;
        mp_cur <= mp_s;
        if (mp_b == (ABW+1)'(NABLK)) begin
          slot[mp_s].mapped <= 1'b1;
          mp_b   <= '0;
          mp_act <= 1'b0;
        end else if (map_stall) begin
          slot[mp_s].mwait <= 1'b1;   // retried after a thread releases blocks
          mp_b   <= '0;
          mp_act <= 1'b0;
        end else if (!mp_need) begin
          mp_b <= mp_b + 1'b1;
        end else if (mp_hit) begin
          slot[mp_s].map[ABW'(mp_b)] <= mp_hit_p;
          mp_b <= mp_b + 1'b1;
        end else if (mp_free_any) begin
          mt_v[mp_free_p] <= 1'b1; mt_tid[mp_free_p] <= slot[mp_s].tid; mt_ab[mp_free_p] <= ABW'(mp_b);
          for (int r = 0; r < RBLK; r++) rf_v[{mp_free_p, 2'(r)}] <= 1'b0;
          slot[mp_s].map[ABW'(mp_b)] <= mp_free_p;
          mp_b <= mp_b + 1'b1;
        end
      end

      // scheduler: ready instruction into the pool
      if (sc_any && pool_push_ready) slot[sc_s].issued[sc_i] <= 1'b1;

      // pipeline: FEU or LSU
      if (pool_pop_ready) begin
        if (ex_lsu) begin
          mem_req_t mr;
          mr.tag     = {P_DEC, (TAG_W-PORT_W-SLW-IXW)'(0), ex_s, ex_i};
          mr.tid     = slot[ex_s].tid;
          mr.prio    = slot[ex_s].prio;
          mr.status  = slot[ex_s].status;
          mr.acva    = (ex.op == OP_SEM) ? a : a + imm_sx;
          mr.mode    = (ex.op == OP_LD) ? 4'b1000 : (ex.op == OP_ST) ? 4'b0100 : 4'b0010;
          mr.semop   = (ex.op == OP_SEM) ? semop_e'(ex.imm[2:0]) : SEM_NONE;
          mr.wdata   = b;
          mr.timeout = tmo_t'(b);
          net_out_valid <= 1'b1;
          net_out <= '{kind: K_MEM_REQ, src: P_DEC, dst: P_MIOMU, prio: slot[ex_s].prio, body: BODY_W'(mr)};
        end else begin
          word_t y, tg, lo, hi;
          logic  wr, tk;
          y = '0; wr = 1'b1; tk = 1'b0;
          tg = word_t'(ex.imm);
          lo = slot[ex_s].pc;
          hi = slot[ex_s].pc + word_t'({slot[ex_s].n, 2'b00});
          unique case (ex.op)
            OP_ADD:  y = a + b;
            OP_SUB:  y = a - b;
            OP_AND:  y = a & b;
            OP_OR:   y = a | b;
            OP_XOR:  y = a ^ b;
            OP_ADDI: y = a + imm_sx;
            OP_BNZ:  begin wr = 1'b0; tk = (a != '0); end
            OP_JMP:  begin wr = 1'b0; tk = 1'b1; end
            OP_HALT: begin wr = 1'b0; slot[ex_s].halt <= 1'b1; end
            default: wr = 1'b0;
          endcase
          if (wr) begin
            rf[paddr(slot[ex_s], ex.rd)]   <= y;
            rf_v[paddr(slot[ex_s], ex.rd)] <= 1'b1;
            slot[ex_s].result <= y;
          end
          slot[ex_s].done[ex_i] <= 1'b1;
          // A taken jump whose target lies inside this transaction's own
          // instruction block re-arms the instructions from the target on
          // (the jump is always the last one, so all of them have finished)
          // and the transaction keeps running here. Any other taken jump
          // ends the transaction with the target as the thread's next pc.
          if (tk && tg >= lo && tg < hi && tg[1:0] == 2'b00) begin
            for (int i = 0; i < TXN_LEN; i++)
              if (IXW'(i) >= IXW'((tg - lo) >> 2)) begin
                slot[ex_s].issued[i] <= 1'b0;
                slot[ex_s].done[i]   <= 1'b0;
              end
            local_jump <= 1'b1;
          end else if (tk) begin
            slot[ex_s].next_pc <= tg;
          end
        end
      end

      // LSU replies
      if (net_in_valid && net_in.kind == K_MEM_RSP) begin
        logic [SLW-1:0] rs;
        logic [IXW-1:0] ri;
        instr_t         rin;
        word_t          v;
        rs  = in_mrsp.tag[IXW +: SLW];
        ri  = in_mrsp.tag[IXW-1:0];
        rin = slot[rs].instr[ri];
        v   = (rin.op == OP_SEM && semop_e'(rin.imm[2:0]) != SEM_GET) ? word_t'(in_mrsp.cc) : in_mrsp.rdata;
        if (rin.op != OP_ST) begin
          rf[paddr(slot[rs], rin.rd)]   <= v;
          rf_v[paddr(slot[rs], rin.rd)] <= 1'b1;
          slot[rs].result <= v;
        end
        if (rin.op != OP_SEM && in_mrsp.cc != CC_OK) slot[rs].cc <= in_mrsp.cc;
        slot[rs].done[ri] <= 1'b1;
      end

      // completion reply
      if (send_cp) begin
        txn_rsp_t tr;
        tr = '{tid: slot[cp_s].tid, prio: slot[cp_s].prio, next_pc: slot[cp_s].next_pc,
               cc: slot[cp_s].cc, halt: slot[cp_s].halt, result: slot[cp_s].result};
        net_out_valid <= 1'b1;
        net_out <= '{kind: K_TXN_RSP, src: P_DEC, dst: P_TM, prio: slot[cp_s].prio, body: BODY_W'(tr)};
        slot[cp_s].valid <= 1'b0;
        txn_done <= 1'b1;
        if (slot[cp_s].halt) begin
          for (int p = 0; p < NPBLK; p++) if (mt_v[p] && mt_tid[p] == slot[cp_s].tid) mt_v[p] <= 1'b0;
          for (int s = 0; s < NSLOT; s++) slot[s].mwait <= 1'b0;
        end
      end
    end
  end
endmodule
