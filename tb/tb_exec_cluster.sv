// tb_exec_cluster: directed test of the executive cluster with four physical
// register blocks. The testbench plays the thread monitor (sends transaction
// packets) and the MIOMU (answers memory and semaphore references a few
// clocks later: loads read 0xABCD, SemaphoreGet returns 0x400000).
//   - thread 1, transaction 1: ADDI, ADDI, ST, LD with RAW and memory
//     dependencies; checks the address, data and mode of both references,
//     the default next instruction counter (pc + 16) and the result;
//   - transaction 2 reads registers written by transaction 1 (the block
//     mapping must find them again) and ends with a taken branch;
//   - thread 2 arrives needing two new blocks while thread 1 holds three:
//     the mapping unit must stall and only finish once thread 1 halts;
//   - transaction 3 of thread 1: SemaphoreGet and halt; the halt must release
//     the thread's blocks;
//   - thread 3: a counted loop whose branch jumps back inside its own
//     transaction must run there (two local jumps, one reply, fall-through
//     next pc), keeping the loop's register values for the next transaction.
module tb_exec_cluster;
  import vthm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic net_in_valid = 1'b0, net_in_ready, net_out_valid, map_stall, txn_done, local_jump;
  net_pkt_t net_in = '0, net_out;
  logic [2:0] blocks_used;

  exec_cluster #(.NPBLK(4)) u_dut (.clk, .rst_n, .net_in_valid, .net_in_ready, .net_in,
    .net_out_valid, .net_out_ready(1'b1), .net_out, .map_stall, .txn_done, .local_jump, .blocks_used);

  // single driver of net_in
  net_pkt_t sendq[$];
  always @(negedge clk) if (!net_in_valid && sendq.size() != 0) begin
    net_in = sendq.pop_front();
    net_in_valid = 1'b1;
  end
  always @(posedge clk) if (net_in_valid && net_in_ready) #1 net_in_valid = 1'b0;

  // MIOMU model and reply collection
  mem_req_t reqs[$];
  txn_rsp_t rsps[$];
  int n_stall = 0, n_local = 0;
  always @(posedge clk) begin
    if (rst_n && map_stall) n_stall++;
    if (rst_n && local_jump) n_local++;
    if (rst_n && net_out_valid) begin
      if (net_out.kind == K_MEM_REQ) begin
        mem_req_t r;
        mem_rsp_t a;
        r = mem_req_t'(net_out.body[$bits(mem_req_t)-1:0]);
        reqs.push_back(r);
        a.tag = r.tag; a.tid = r.tid; a.cc = CC_OK;
        a.rdata = (r.semop == SEM_GET) ? 32'h0040_0000 : (r.mode == 4'b1000) ? 32'hABCD : '0;
        fork
          begin
            repeat (3) @(posedge clk);
            sendq.push_back('{kind: K_MEM_RSP, src: P_MIOMU, dst: P_DEC, prio: r.prio, body: BODY_W'(a)});
          end
        join_none
      end else if (net_out.kind == K_TXN_RSP) begin
        rsps.push_back(txn_rsp_t'(net_out.body[$bits(txn_rsp_t)-1:0]));
      end
    end
  end

  function automatic word_t enc(op_e op, int rd, int rs1, int rs2, int imm);
    instr_t i;
    i.op = op; i.rd = 4'(rd); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2); i.imm = 16'(imm);
    return word_t'(i);
  endfunction

  task automatic send_txn(tid_t tid, prio_t p, word_t pc, int n, word_t w[4],
                          logic [3:0][3:0] g);
    txn_req_t t;
    t.tid = tid; t.prio = p; t.status = ST_NONPRIV; t.pc = pc; t.n = 3'(n); t.graph = g;
    for (int i = 0; i < 4; i++) t.instr[i] = instr_t'(w[i]);
    sendq.push_back('{kind: K_TXN_REQ, src: P_TM, dst: P_DEC, prio: p, body: BODY_W'(t)});
  endtask

  task automatic wait_rsp(int cnt);
    int k;
    k = 0;
    while (rsps.size() < cnt && k < 2000) begin @(posedge clk); k++; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t w[4];
    logic [3:0][3:0] g;
    txn_rsp_t r;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // thread 1, transaction 1
    w = '{enc(OP_ADDI, 1, 0, 0, 5), enc(OP_ADDI, 5, 1, 0, 7), enc(OP_ST, 0, 1, 5, 'h10),
          enc(OP_LD, 6, 5, 0, 4)};
    g = '0; g[1] = 4'b0001; g[2] = 4'b0011; g[3] = 4'b0110;
    send_txn(16'h0101, 3'd3, 32'h100, 4, w, g);
    wait_rsp(1);
    r = rsps.pop_front();
    check(r.tid == 16'h0101 && r.next_pc == 32'h110 && !r.halt && r.cc == CC_OK, "txn 1 reply");
    check(r.result == 32'hABCD, "txn 1 result is the loaded word");
    check(reqs.size() == 2, "two references");
    if (reqs.size() == 2) begin
      check(reqs[0].acva == 32'h15 && reqs[0].wdata == 32'd12 && reqs[0].mode == 4'b0100 &&
            reqs[0].tag[7:6] == P_DEC, "store reference");
      check(reqs[1].acva == 32'd16 && reqs[1].mode == 4'b1000, "load after store");
    end
    reqs.delete();
    check(blocks_used == 3'd2, "two blocks mapped for thread 1");
    // transaction 2: register values carried over, branch taken
    w = '{enc(OP_ADD, 7, 6, 5, 0), enc(OP_ADDI, 9, 0, 0, 1), enc(OP_BNZ, 0, 7, 0, 'h80), '0};
    g = '0; g[2] = 4'b0011;
    send_txn(16'h0101, 3'd3, 32'h110, 3, w, g);
    wait_rsp(1);
    r = rsps.pop_front();
    check(r.next_pc == 32'h80 && !r.halt, "branch taken");
    check(blocks_used == 3'd3, "third block mapped");
    // thread 2 needs blocks 0 and 1: only one is free
    w = '{enc(OP_ADDI, 4, 0, 0, 3), enc(OP_HALT, 0, 0, 0, 0), '0, '0};
    g = '0; g[1] = 4'b0001;
    send_txn(16'h0202, 3'd5, 32'h200, 2, w, g);
    repeat (30) @(posedge clk);
    check(n_stall > 0, "map stall while blocks are held");
    check(rsps.size() == 0, "stalled transaction not executed");
    // thread 1 ends: SemaphoreGet, then halt
    w = '{enc(OP_SEM, 8, 0, 0, SEM_GET), enc(OP_HALT, 0, 0, 0, 0), '0, '0};
    g = '0; g[1] = 4'b0001;
    send_txn(16'h0101, 3'd3, 32'h80, 2, w, g);
    wait_rsp(2);
    check(rsps.size() == 2, "both threads finished");
    if (rsps.size() == 2) begin
      check(rsps[0].tid == 16'h0101 && rsps[0].halt && rsps[0].result == 32'h0040_0000,
            "semaphore get result and halt");
      check(rsps[1].tid == 16'h0202 && rsps[1].halt && rsps[1].result == 32'd3,
            "stalled thread ran after the release");
    end
    check(reqs.size() == 1 && reqs[0].semop == SEM_GET && reqs[0].mode == 4'b0010, "semaphore reference");
    repeat (5) @(posedge clk);
    check(blocks_used == '0, "all blocks released");
    check(n_local == 0, "no local jump so far");
    // thread 3: r1 = 3; loop { r1 -= 1; r2 += 1 } while r1 != 0, inside one transaction
    rsps.delete();
    w = '{enc(OP_ADDI, 1, 0, 0, 3), enc(OP_ADDI, 1, 1, 0, 'hFFFF), enc(OP_ADDI, 2, 2, 0, 1),
          enc(OP_BNZ, 0, 1, 0, 'h304)};
    g = '0; g[1] = 4'b0001; g[3] = 4'b0111;
    send_txn(16'h0303, 3'd2, 32'h300, 4, w, g);
    wait_rsp(1);
    check(rsps.size() == 1, "loop transaction replied once");
    if (rsps.size() == 1) check(rsps[0].next_pc == 32'h310 && !rsps[0].halt, "loop falls through");
    check(n_local == 2, "two local jumps");
    rsps.delete();
    w = '{enc(OP_ADD, 3, 2, 1, 0), enc(OP_HALT, 0, 0, 0, 0), '0, '0};
    g = '0; g[1] = 4'b0001;
    send_txn(16'h0303, 3'd2, 32'h310, 2, w, g);
    wait_rsp(1);
    if (rsps.size() == 1) check(rsps[0].result == 32'd3 && rsps[0].halt, "loop body ran three times");
    else check(1'b0, "loop thread reply");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
