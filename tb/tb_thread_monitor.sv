// tb_thread_monitor: directed test of the thread monitor with the bootstrap
// thread disabled. A behavioural instruction memory answers fetches one
// clock later. Three threads are created (priority 2 at 0x00, then priorities 1
// and 6 at 0x40); the network is held busy until all transactions are formed,
// so of the last two the priority-6 one must leave first. The test checks each
// transaction's length and dependency graph against values worked out by
// hand, that a reply moves a thread to its next instruction counter, and that
// a halt reply frees the root.
module tb_thread_monitor;
  import vthm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic create_valid = 1'b0, create_ready;
  tid_t create_tid = '0;
  prio_t create_prio = '0;
  tstat_e create_status = ST_NONPRIV;
  word_t create_pc = '0;
  logic fetch_valid, fetch_rvalid = 1'b0;
  pa_t fetch_pa;
  word_t fetch_rdata = '0;
  logic net_out_valid, net_out_ready = 1'b0, net_in_valid = 1'b0, net_in_ready;
  net_pkt_t net_out, net_in = '0;
  logic [7:0] live;
  logic txn_issued, thread_halted;

  thread_monitor #(.BOOT(1'b0)) u_dut (.clk, .rst_n, .create_valid, .create_ready, .create_tid,
    .create_prio, .create_status, .create_pc, .fetch_valid, .fetch_ready(1'b1), .fetch_pa,
    .fetch_rvalid, .fetch_rdata, .net_out_valid, .net_out_ready, .net_out, .net_in_valid,
    .net_in_ready, .net_in, .live, .txn_issued, .thread_halted);

  word_t imem [64];
  always @(posedge clk) begin
    fetch_rvalid <= fetch_valid;
    fetch_rdata  <= imem[fetch_pa[7:2]];
  end

  function automatic word_t enc(op_e op, int rd, int rs1, int rs2, int imm);
    instr_t i;
    i.op = op; i.rd = 4'(rd); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2); i.imm = 16'(imm);
    return word_t'(i);
  endfunction

  task automatic create(tid_t t, prio_t p, word_t pc);
    @(negedge clk);
    create_valid = 1'b1; create_tid = t; create_prio = p; create_pc = pc;
    @(negedge clk);
    create_valid = 1'b0;
  endtask

  task automatic get_txn(output txn_req_t t);
    int n;
    n = 0;
    @(negedge clk) net_out_ready = 1'b1;
    while (!net_out_valid && n < 500) begin @(negedge clk); n++; end
    check(net_out_valid && net_out.kind == K_TXN_REQ && net_out.dst == P_DEC, "transaction packet");
    t = txn_req_t'(net_out.body);
    @(posedge clk);
    @(negedge clk) net_out_ready = 1'b0;
  endtask

  task automatic reply(tid_t tid, word_t pc, bit halt);
    txn_rsp_t r;
    r = '{tid: tid, prio: '0, next_pc: pc, cc: CC_OK, halt: halt, result: '0};
    @(negedge clk);
    net_in = '{kind: K_TXN_RSP, src: P_DEC, dst: P_TM, prio: '0, body: BODY_W'(r)};
    net_in_valid = 1'b1;
    @(negedge clk);
    net_in_valid = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_halted = 0;
  always @(posedge clk) if (rst_n && thread_halted) n_halted++;

  initial begin
    txn_req_t t;
    for (int i = 0; i < 64; i++) imem[i] = '0;
    imem[0]  = enc(OP_ADD, 1, 2, 3, 0);
    imem[1]  = enc(OP_ADD, 4, 1, 5, 0);
    imem[2]  = enc(OP_ST,  0, 0, 4, 'h100);
    imem[3]  = enc(OP_LD,  6, 0, 0, 'h104);
    imem[4]  = enc(OP_ADDI, 7, 7, 0, 1);
    imem[5]  = enc(OP_BNZ, 0, 7, 0, 'h0);
    imem[6]  = enc(OP_ADD, 1, 1, 1, 0);
    imem[16] = enc(OP_HALT, 0, 0, 0, 0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(live == '0, "no thread without bootstrap");
    create(16'h0101, 3'd2, 32'h00);
    create(16'h0103, 3'd1, 32'h40);
    create(16'h0102, 3'd6, 32'h40);
    check(live == 8'b0000_0111, "three roots live");
    repeat (80) @(posedge clk);
    // thread 1 was alone when scheduled and already sits in the output
    // register; of the other two the higher priority must leave first
    get_txn(t);
    check(t.tid == 16'h0101 && t.pc == 32'h00 && t.n == 3'd4, "first transaction of thread 1");
    check(t.graph[0] == 4'b0000 && t.graph[1] == 4'b0001 && t.graph[2] == 4'b0010 &&
          t.graph[3] == 4'b0100, "dependency graph RAW/memory");
    check(t.instr[1] == instr_t'(imem[1]), "instruction words carried");
    get_txn(t);
    check(t.tid == 16'h0102 && t.prio == 3'd6 && t.pc == 32'h40, "priority 6 before priority 1");
    check(t.n == 3'd1 && t.graph == '0, "halt-only transaction");
    get_txn(t);
    check(t.tid == 16'h0103 && t.prio == 3'd1, "priority 1 last");
    reply(16'h0103, 32'h44, 1'b1);
    // thread 1 continues at 0x10: ADDI, BNZ (closes), so two instructions
    reply(16'h0101, 32'h10, 1'b0);
    get_txn(t);
    check(t.tid == 16'h0101 && t.pc == 32'h10 && t.n == 3'd2, "next transaction at reply pc");
    check(t.graph[1] == 4'b0001 && t.graph[0] == '0 && t.graph[2] == '0 && t.graph[3] == '0,
          "control instruction closes the transaction");
    reply(16'h0102, 32'h44, 1'b1);
    repeat (2) @(posedge clk);
    check(n_halted == 2 && live == 8'b0000_0001, "halt frees the root");
    reply(16'h0101, 32'h18, 1'b1);
    repeat (2) @(posedge clk);
    check(n_halted == 3 && live == '0, "last halt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
