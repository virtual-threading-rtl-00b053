// tb_hwds_sync_unit: directed self-checking test of the hardware-driven
// semaphores. It walks one semaphore through lock contention with priority
// ordering, Unlock, Wait/Pass hand-over, misuse, counter timeouts of both a
// waiting Lock and a waiting Wait (including the timed-out Wait that
// re-enters the critical interval), and pool exhaustion with Get/Free.
// Expected replies are written out by hand from the semaphore rules.
module tb_hwds_sync_unit;
  import vthm_pkg::*;
  localparam int NSEM = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready; semop_e req_op; logic [1:0] req_idx;
  tid_t req_tid; prio_t req_prio; tag_t req_tag; tmo_t req_timeout;
  logic rsp_valid; tag_t rsp_tag; tid_t rsp_tid; cc_e rsp_cc; word_t rsp_data;
  logic [NSEM-1:0] sem_allocated, sem_owned;

  hwds_sync_unit #(.NSEM(NSEM), .QD(4), .TICK_DIV(1)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_op, .req_idx, .req_tid, .req_prio,
    .req_tag, .req_timeout, .rsp_valid, .rsp_ready(1'b1), .rsp_tag, .rsp_tid,
    .rsp_prio(), .rsp_cc, .rsp_data, .sem_allocated, .sem_owned);

  int checks = 0, failures = 0;
  typedef struct { tid_t tid; cc_e cc; word_t data; int t; } got_t;
  got_t got[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && rsp_valid) got.push_back('{rsp_tid, rsp_cc, rsp_data, cyc});
  end

  task automatic op(semop_e o, int idx, int tid, int prio, int tmo = 0);
    req_valid <= 1; req_op <= o; req_idx <= 2'(idx); req_tid <= tid_t'(tid);
    req_prio <= prio_t'(prio); req_tag <= tag_t'(tid); req_timeout <= tmo_t'(tmo);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 0;
  endtask

  task automatic settle(int n = 4); repeat (n) @(posedge clk); endtask

  task automatic expect_rsp(int tid, cc_e cc, string what, int data = -1);
    checks++;
    if (got.size() == 0) begin
      failures++; $display("FAIL %s: no reply (want tid %0h %s)", what, tid, cc.name());
    end else begin
      got_t g = got.pop_front();
      if (g.tid != tid_t'(tid) || g.cc != cc || (data >= 0 && g.data != word_t'(data))) begin
        failures++;
        $display("FAIL %s: got tid %0h %s %0d, want tid %0h %s", what, g.tid, g.cc.name(), g.data, tid, cc.name());
      end
    end
  endtask
  task automatic expect_none(string what);
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL %s: unexpected reply tid %0h", what, got[0].tid); got.delete(); end
  endtask

  initial begin
    int t0;
    req_valid = 0; req_op = SEM_NONE; req_idx = 0; req_tid = 0; req_prio = 0; req_tag = 0; req_timeout = 0;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);

    op(SEM_GET, 0, 'h0101, 0); settle(); expect_rsp('h0101, CC_OK, "get0", 0);
    op(SEM_LOCK, 0, 'h0101, 2); settle(); expect_rsp('h0101, CC_OK, "lock free");
    op(SEM_LOCK, 0, 'h0102, 1); op(SEM_LOCK, 0, 'h0103, 5); settle(); expect_none("contended locks wait");
    op(SEM_UNLOCK, 0, 'h0101, 2); settle();
    expect_rsp('h0101, CC_OK, "unlock issuer"); expect_rsp('h0103, CC_OK, "higher prio enters first");
    op(SEM_WAIT, 0, 'h0103, 5); settle(); expect_rsp('h0102, CC_OK, "wait admits mutex head");
    op(SEM_PASS, 0, 'h0102, 1); settle();
    expect_rsp('h0102, CC_OK, "pass issuer"); expect_rsp('h0103, CC_OK, "pass admits event head");
    op(SEM_UNLOCK, 0, 'h0102, 1); settle(); expect_rsp('h0102, CC_FAULT, "unlock by non-owner");
    op(SEM_LOCK, 0, 'h0103, 5); settle(); expect_rsp('h0103, CC_FAULT, "recursive lock");

    // waiting Lock times out after 6 ticks
    op(SEM_LOCK, 0, 'h0104, 3, 6); t0 = cyc; settle(12);
    expect_rsp('h0104, CC_TIMEOUT, "lock timeout");

    // waiting Wait times out and re-enters the free interval
    op(SEM_WAIT, 0, 'h0103, 5, 3); settle(8);
    expect_rsp('h0103, CC_TIMEOUT, "wait timeout re-enters free interval");
    checks++; if (sem_owned[0] !== 1'b1) begin failures++; $display("FAIL owner after wait timeout"); end

    // timed-out Wait behind a new owner waits in the mutex queue
    op(SEM_LOCK, 0, 'h0105, 1); settle(); expect_none("lock behind owner");
    op(SEM_WAIT, 0, 'h0103, 5, 3); settle(); expect_rsp('h0105, CC_OK, "wait hands over");
    settle(8); expect_none("timed-out wait still outside");
    op(SEM_UNLOCK, 0, 'h0105, 1); settle();
    expect_rsp('h0105, CC_OK, "unlock issuer 2"); expect_rsp('h0103, CC_TIMEOUT, "timed-out wait enters");

    // Free with waiters refused, pool exhaustion
    op(SEM_LOCK, 0, 'h0106, 0); settle(); expect_none("lock waits");
    op(SEM_FREE, 0, 'h0103, 5); settle(); expect_rsp('h0103, CC_FAULT, "free with waiters");
    op(SEM_GET, 0, 'h0201, 0); op(SEM_GET, 0, 'h0201, 0); op(SEM_GET, 0, 'h0201, 0); op(SEM_GET, 0, 'h0201, 0); settle();
    expect_rsp('h0201, CC_OK, "get1", 1); expect_rsp('h0201, CC_OK, "get2", 2);
    expect_rsp('h0201, CC_OK, "get3", 3); expect_rsp('h0201, CC_EMPTY, "pool empty");
    op(SEM_FREE, 2, 'h0201, 0); settle(); expect_rsp('h0201, CC_OK, "free2");
    op(SEM_GET, 0, 'h0202, 0); settle(); expect_rsp('h0202, CC_OK, "reuse 2", 2);
    op(SEM_LOCK, 3, 'h0202, 0); op(SEM_FREE, 3, 'h0202, 0); op(SEM_LOCK, 3, 'h0202, 0); settle();
    expect_rsp('h0202, CC_OK, "lock3"); expect_rsp('h0202, CC_OK, "free3"); expect_rsp('h0202, CC_FAULT, "op on freed");
    checks++; if (sem_allocated !== 4'b0111) begin failures++; $display("FAIL alloc map %b", sem_allocated); end

    // latency of the counter: timeout reply exactly TMO+3 clocks after acceptance
    op(SEM_LOCK, 1, 'h0301, 0); settle(); expect_rsp('h0301, CC_OK, "lock1");
    op(SEM_LOCK, 1, 'h0302, 0, 10); t0 = cyc; settle(20);
    checks++;
    if (got.size() != 1 || got[0].cc != CC_TIMEOUT || got[0].t - t0 < 10 || got[0].t - t0 > 13) begin
      failures++; $display("FAIL timeout latency: %0d replies, dt=%0d", got.size(), (got.size() != 0) ? got[0].t - t0 : -1);
    end
    got.delete();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
