// tb_vthm_full: end-to-end test of the whole processor with every parameter at its default.
//
// A small program in the local RAM is run by several threads, through the
// thread monitor, the router, the executive cluster and the MIOMU:
//   - the bootstrap thread (hyper-privileged) allocates two semaphores with
//     SemaphoreGet and leaves their addresses in memory, then halts;
//   - through the debugging-monitor port the test programs interruption
//     control block 0 on the second semaphore, raises interrupt line 0, starts
//     a block copy in the block processing unit and reads back the copy, and
//     reads a word beyond the local RAM, answered by a model of the external
//     memory;
//   - consumer thread B (priority 5) locks the first semaphore and waits on
//     it with a 30-clock timeout in a loop until a data word appears; it is
//     started alone so that at least one wait times out;
//   - producer thread A (priority 2) then locks, writes the word (0x5A) and
//     passes the interval to B, and finally makes a shared reference for
//     which no access right was granted (refused);
//   - threads C (priority 1) use all 16 registers, so need four register
//     blocks each, then count a register down to zero in a loop whose
//     branch jumps back inside its own transaction (two local jumps each). With the default sixteen blocks they fit beside A and B.
// The test checks the values left in memory, the debug-port replies, and
// counts how often each mechanism happened; one that never happened is a
// failure. Timing: everything is clocked by clk; requests on the debug and
// create ports are driven after the falling edge.
module tb_vthm_full;
  import vthm_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- DUT ----------------------------------------------------------------------
  logic        create_valid = 1'b0, create_ready;
  tid_t        create_tid = '0;
  prio_t       create_prio = '0;
  tstat_e      create_status = ST_NONPRIV;
  word_t       create_pc = '0;
  logic        dbg_in_valid = 1'b0, dbg_in_ready, dbg_out_valid;
  net_pkt_t    dbg_in = '0, dbg_out;
  logic        acd_wr_en = 1'b0, acd_wr_valid = 1'b0;
  logic [3:0]  acd_wr_idx = '0;
  pid_t        acd_wr_opid = '0, acd_wr_gntpid = '0;
  va_t         acd_wr_orva = '0, acd_wr_len = '0;
  mode_t       acd_wr_gntmode = '0;
  logic        atd_wr_en = 1'b0, atd_wr_valid = 1'b0;
  logic [3:0]  atd_wr_idx = '0;
  pid_t        atd_wr_pid = '0;
  va_t         atd_wr_va = '0, atd_wr_len = '0;
  pa_t         atd_wr_pha = '0;
  mode_t       atd_wr_rwsx = '0;
  logic        ext_valid, ext_we, ext_rvalid = 1'b0;
  pa_t         ext_pa;
  word_t       ext_wdata, ext_rdata = '0;
  logic [3:0]  irq = '0, irq_ack, irq_delivered;
  logic [7:0]  live, sem_allocated;
  logic        txn_issued, txn_done, local_jump, thread_halted, map_stall, bpu_done;
  logic [4:0]  blocks_used;

  vthm_processor u_dut (
    .clk, .rst_n,
    .create_valid, .create_ready, .create_tid, .create_prio, .create_status, .create_pc,
    .dbg_in_valid, .dbg_in_ready, .dbg_in, .dbg_out_valid, .dbg_out_ready(1'b1), .dbg_out,
    .acd_wr_en, .acd_wr_idx, .acd_wr_valid, .acd_wr_opid, .acd_wr_gntpid, .acd_wr_orva,
    .acd_wr_len, .acd_wr_gntmode,
    .atd_wr_en, .atd_wr_idx, .atd_wr_valid, .atd_wr_pid, .atd_wr_va, .atd_wr_len,
    .atd_wr_pha, .atd_wr_rwsx,
    .ext_valid, .ext_ready(1'b1), .ext_we, .ext_pa, .ext_wdata, .ext_rvalid, .ext_rdata,
    .irq, .irq_ack, .live, .txn_issued, .txn_done, .local_jump, .thread_halted, .map_stall, .blocks_used,
    .irq_delivered, .bpu_done, .sem_allocated);

  // external memory model: answers one clock after a request, data = ~address
  int n_ext = 0;
  always @(posedge clk) begin
    ext_rvalid <= ext_valid;
    ext_rdata  <= ~word_t'(ext_pa);
    if (ext_valid) n_ext++;
  end

  // ---- program ------------------------------------------------------------------
  function automatic word_t enc(op_e op, int rd, int rs1, int rs2, int imm);
    instr_t i;
    i.op = op; i.rd = 4'(rd); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2); i.imm = 16'(imm);
    return word_t'(i);
  endfunction

  task automatic put(int byte_addr, word_t w);
    u_dut.u_miomu.u_mem.u_ram.mem[byte_addr / 4] = w;
  endtask

  function automatic word_t peek(int byte_addr);
    return u_dut.u_miomu.u_mem.u_ram.mem[byte_addr / 4];
  endfunction

  task automatic load_program();
    // bootstrap thread, hyper-privileged, at 0x000
    put('h000, enc(OP_SEM, 1, 0, 0, SEM_GET));
    put('h004, enc(OP_SEM, 2, 0, 0, SEM_GET));
    put('h008, enc(OP_ST,  0, 0, 1, 'h1000));
    put('h00C, enc(OP_ST,  0, 0, 2, 'h1010));
    put('h010, enc(OP_HALT, 0, 0, 0, 0));
    // consumer B at 0x100
    put('h100, enc(OP_LD,   1, 0, 0, 'h1000));
    put('h104, enc(OP_SEM,  2, 1, 0, SEM_LOCK));
    put('h108, enc(OP_ADDI, 3, 0, 0, 30));
    put('h10C, enc(OP_ADDI, 7, 0, 0, 0));
    put('h110, enc(OP_SEM,  4, 1, 3, SEM_WAIT));
    put('h114, enc(OP_LD,   5, 0, 0, 'h1004));
    put('h118, enc(OP_ADDI, 7, 7, 0, 1));
    put('h11C, enc(OP_BNZ,  0, 5, 0, 'h124));
    put('h120, enc(OP_JMP,  0, 0, 0, 'h110));
    put('h124, enc(OP_SEM,  6, 1, 0, SEM_UNLOCK));
    put('h128, enc(OP_ST,   0, 0, 5, 'h1008));
    put('h12C, enc(OP_ST,   0, 0, 7, 'h100C));
    put('h130, enc(OP_HALT, 0, 0, 0, 0));
    // producer A at 0x200
    put('h200, enc(OP_LD,   1, 0, 0, 'h1000));
    put('h204, enc(OP_ADDI, 2, 0, 0, 'h5A));
    put('h208, enc(OP_SEM,  3, 1, 0, SEM_LOCK));
    put('h20C, enc(OP_ST,   0, 0, 2, 'h1004));
    put('h210, enc(OP_SEM,  4, 1, 0, SEM_PASS));
    put('h214, enc(OP_LD,   5, 0, 0, 'h8000));   // ACVA 0xFFFF8000: shared, not granted
    put('h218, enc(OP_HALT, 0, 0, 0, 0));
    // register-hungry threads C at 0x300
    put('h300, enc(OP_ADDI, 4, 0, 0, 1));
    put('h304, enc(OP_ADDI, 8, 4, 0, 1));
    put('h308, enc(OP_ADDI, 12, 8, 0, 1));
    put('h30C, enc(OP_ADD,  13, 12, 4, 0));
    put('h310, enc(OP_ST,   0, 0, 13, 'h1100));
    put('h314, enc(OP_ADDI, 5, 0, 0, 3));
    put('h318, enc(OP_ADDI, 5, 5, 0, 'hFFFF));  // count down
    put('h31C, enc(OP_BNZ,  0, 5, 0, 'h318));   // local jump, inside this transaction
    put('h320, enc(OP_ST,   0, 0, 5, 'h1104));
    put('h324, enc(OP_HALT, 0, 0, 0, 0));
  endtask

  // ---- debug port -----------------------------------------------------------------
  int dbg_n = 0;
  task automatic dbg(bit we, pa_t pa, word_t wd, output word_t rd, output cc_e cc);
    mem_req_t r;
    mem_rsp_t s;
    r = '0;
    r.tag = {P_DBG, 6'(dbg_n)}; r.tid = '0; r.prio = '1; r.status = ST_HYPER;
    r.acva = word_t'(pa); r.mode = we ? 4'b0100 : 4'b1000; r.semop = SEM_NONE; r.wdata = wd;
    dbg_n++;
    @(negedge clk);
    dbg_in = '{kind: K_MEM_REQ, src: P_DBG, dst: P_MIOMU, prio: '1, body: BODY_W'(r)};
    dbg_in_valid = 1'b1;
    do @(posedge clk); while (!dbg_in_ready);
    @(negedge clk);
    dbg_in_valid = 1'b0;
    while (!dbg_out_valid) @(negedge clk);
    s  = mem_rsp_t'(dbg_out.body[$bits(mem_rsp_t)-1:0]);
    rd = s.rdata;
    cc = s.cc;
    check(s.tag == r.tag && dbg_out.kind == K_MEM_RSP, "debug reply tag");
    @(negedge clk);
  endtask

  task automatic create(tid_t t, prio_t p, word_t pc);
    @(negedge clk);
    create_valid = 1'b1; create_tid = t; create_prio = p; create_status = ST_NONPRIV; create_pc = pc;
    do @(posedge clk); while (!create_ready);
    @(negedge clk);
    create_valid = 1'b0;
  endtask

  task automatic atd(int idx, pid_t pid, va_t va, va_t len, pa_t pha, mode_t m);
    @(negedge clk);
    atd_wr_en = 1'b1; atd_wr_idx = 4'(idx); atd_wr_valid = 1'b1; atd_wr_pid = pid;
    atd_wr_va = va; atd_wr_len = len; atd_wr_pha = pha; atd_wr_rwsx = m;
    @(negedge clk);
    atd_wr_en = 1'b0;
  endtask

  // ---- mechanism counters ------------------------------------------------------------
  int n_txn = 0, n_done = 0, n_halt = 0, n_stall = 0, n_irq = 0, n_bpu = 0, n_denied = 0;
  int n_get = 0, n_lock = 0, n_unlock = 0, n_wait = 0, n_pass = 0, n_timeout = 0;
  int n_prio = 0, n_live_max = 0, n_local = 0;
  mem_rsp_t mrsp;
  assign mrsp = mem_rsp_t'(u_dut.tx[P_MIOMU].body[$bits(mem_rsp_t)-1:0]);
  always @(posedge clk) if (rst_n) begin
    if (txn_issued) n_txn++;
    if (txn_done) n_done++;
    if (local_jump) n_local++;
    if (thread_halted) n_halt++;
    if (map_stall) n_stall++;
    if (irq_delivered[0]) n_irq++;
    if (bpu_done) n_bpu++;
    if (u_dut.in_valid[P_MIOMU] && u_dut.in_ready[P_MIOMU] &&
        u_dut.tx[P_MIOMU].kind == K_MEM_RSP && mrsp.cc == CC_DENIED) n_denied++;
    if (u_dut.u_miomu.u_hwds.req_valid && u_dut.u_miomu.u_hwds.req_ready)
      case (u_dut.u_miomu.u_hwds.req_op)
        SEM_GET:    n_get++;
        SEM_LOCK:   n_lock++;
        SEM_UNLOCK: n_unlock++;
        SEM_WAIT:   n_wait++;
        SEM_PASS:   n_pass++;
        default: ;
      endcase
    if (u_dut.u_miomu.u_hwds.rsp_valid && u_dut.u_miomu.u_hwds.rsp_ready &&
        u_dut.u_miomu.u_hwds.rsp_cc == CC_TIMEOUT) n_timeout++;
    // threads of different priorities compete for the scheduler or the pipeline
    begin
      int hi, lo;
      hi = -1; lo = 8;
      for (int t = 0; t < $size(u_dut.u_tm.roots); t++)
        if (u_dut.u_tm.roots[t].q == 2'd1) begin
          if (int'(u_dut.u_tm.roots[t].prio) > hi) hi = int'(u_dut.u_tm.roots[t].prio);
          if (int'(u_dut.u_tm.roots[t].prio) < lo) lo = int'(u_dut.u_tm.roots[t].prio);
        end
      if ((hi > lo) || (u_dut.u_dec.pool_pop_valid && u_dut.u_dec.pool_pop_ready &&
          $countones(u_dut.u_dec.pool_nonempty) > 1)) n_prio++;
    end
    if ($countones(live) > n_live_max) n_live_max = $countones(live);
  end

  // ---- watchdog -------------------------------------------------------------------
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- test -----------------------------------------------------------------------
  initial begin
    word_t rd;
    cc_e   cc;
    int    t0;
    repeat (3) @(posedge clk);
    load_program();
    repeat (5) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // directory of process 1: code and data, semaphore cells, no shared grants
    atd(0, 8'h01, 31'h0,      31'h10000, 24'h000000, 4'b1111);
    atd(1, 8'h01, 31'h400000, 31'h20,    24'hC00000, 4'b0010);

    // bootstrap thread
    wait (n_halt == 1);
    check(peek('h1000) == 32'h0040_0000, "first semaphore address");
    check(peek('h1010) == 32'h0040_0004, "second semaphore address");
    check(sem_allocated[1:0] == 2'b11, "two semaphores allocated");

    // interruption control block 0 on semaphore 1, then raise line 0
    dbg(1, ICU_BASE + 24'd0,  32'd1,     rd, cc);   // semaphore index
    dbg(1, ICU_BASE + 24'd4,  32'h0300,  rd, cc);   // TID
    dbg(1, ICU_BASE + 24'd8,  32'd1,     rd, cc);   // priority
    dbg(1, ICU_BASE + 24'd12, 32'd0,     rd, cc);   // counter: activate
    check(cc == CC_OK, "ICB write accepted");
    @(negedge clk) irq[0] = 1'b1;
    repeat (3) @(negedge clk);
    irq[0] = 1'b0;
    t0 = 0;
    while (n_irq == 0 && t0 < 200) begin @(posedge clk); t0++; end
    check(n_irq == 1, "interrupt delivered");
    dbg(0, ICU_BASE + 24'd12, 32'd0, rd, cc);
    check(rd == 32'd1, "ICB counter set by delivery");

    // block copy of two words 0x100C -> 0x1200
    dbg(1, BPU_BASE + 24'd0,  32'h100C, rd, cc);
    dbg(1, BPU_BASE + 24'd4,  32'h1200, rd, cc);
    dbg(1, BPU_BASE + 24'd8,  32'd2,    rd, cc);
    dbg(1, BPU_BASE + 24'd12, 32'd1,    rd, cc);
    t0 = 0;
    while (n_bpu == 0 && t0 < 200) begin @(posedge clk); t0++; end
    dbg(0, 24'h001204, 32'd0, rd, cc);
    check(rd == 32'h0040_0004 && cc == CC_OK, "block copy result");
    if (rd != 32'h0040_0004) $display("copy: rd=%h cc=%0d m1200=%h m1204=%h", rd, cc, peek('h1200), peek('h1204));
    // beyond the local RAM: external memory
    dbg(0, 24'h400000, 32'd0, rd, cc);
    check(rd == ~32'h0040_0000 && cc == CC_OK, "external read");

    // consumer alone until one of its waits has timed out
    create(16'h0102, 3'd5, 32'h100);
    t0 = 0;
    while (n_timeout == 0 && t0 < 5000) begin @(posedge clk); t0++; end
    check(n_timeout > 0, "consumer wait timed out while alone");
    create(16'h0101, 3'd2, 32'h200);
    create(16'h0110, 3'd1, 32'h300);
    create(16'h0111, 3'd1, 32'h300);

    // all threads halt
    t0 = 0;
    while ((live != '0 || n_halt < 5) && t0 < 40000) begin @(posedge clk); t0++; end
    check(live == '0 && n_halt == 5, "all threads halted");
    repeat (20) @(posedge clk);
    check(peek('h1004) == 32'h5A, "producer data");
    check(peek('h1008) == 32'h5A, "consumer received producer data");
    check(peek('h100C) >= 32'd2, "consumer looped after a timeout");
    check(peek('h1100) == 32'd4, "register-hungry thread result");
    check(peek('h1104) == 32'd0, "local loop ran to zero");
    check(blocks_used == '0, "all register blocks released");
    check(u_dut.u_miomu.u_hwds.sem_owned == '0, "no semaphore left owned");

    $display("mechanisms: txn=%0d done=%0d halt=%0d map_stall_clocks=%0d irq=%0d bpu=%0d ext=%0d denied=%0d",
             n_txn, n_done, n_halt, n_stall, n_irq, n_bpu, n_ext, n_denied);
    $display("semaphores: get=%0d lock=%0d unlock=%0d wait=%0d pass=%0d timeout=%0d prio_pick=%0d live_max=%0d local_jump=%0d",
             n_get, n_lock, n_unlock, n_wait, n_pass, n_timeout, n_prio, n_live_max, n_local);
    check(n_txn > 0 && n_txn == n_done, "every transaction completed");
    check(n_get == 2, "semaphore get");
    check(n_lock > 0, "semaphore lock");
    check(n_unlock > 0, "semaphore unlock");
    check(n_wait > 1, "semaphore wait");
    check(n_pass > 0, "semaphore pass");
    check(n_timeout > 0, "semaphore timeout");
    check(n_irq > 0, "interrupt delivery");
    check(n_bpu > 0, "block processing");
    check(n_ext > 0, "external reference");
    check(n_denied > 0, "refused shared reference");
    check(n_prio > 0, "priority choice in the pipeline");
    check(n_live_max >= 3, "threads live at once");
    check(n_local == 4, "local jumps inside a transaction (two per C thread)");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
