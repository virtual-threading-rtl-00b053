// tb_miomu: drives the MIOMU through its network port with reference packets
// and checks every answer: local reads and writes through translation,
// per-process translation, shared references refused and then admitted by an
// access control record (and refused for a mode not granted), a missing
// translation, hyper-privileged physical access, semaphore Get/Lock/Unlock
// with a delayed completion, a block copy programmed through registers, an
// interrupt turned into a semaphore hand-over, the external port and the
// instruction fetch port.
module tb_miomu;
  import vthm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic net_in_valid = 0, net_in_ready, net_out_valid; net_pkt_t net_in, net_out;
  logic fetch_valid = 0, fetch_ready, fetch_rvalid; pa_t fetch_pa = '0; word_t fetch_rdata;
  logic acd_wr_en = 0, acd_wr_valid = 0; logic [3:0] acd_wr_idx = '0; pid_t acd_wr_opid = '0, acd_wr_gntpid = '0;
  va_t acd_wr_orva = '0, acd_wr_len = '0; mode_t acd_wr_gntmode = '0;
  logic atd_wr_en = 0, atd_wr_valid = 0; logic [3:0] atd_wr_idx = '0; pid_t atd_wr_pid = '0; va_t atd_wr_va = '0, atd_wr_len = '0;
  pa_t atd_wr_pha = '0; mode_t atd_wr_rwsx = '0;
  logic ext_valid, ext_ready, ext_we, ext_rvalid = 0; pa_t ext_pa; word_t ext_wdata, ext_rdata = '0;
  logic [3:0] irq = '0, irq_ack, irq_delivered; logic bpu_done; logic [7:0] sem_allocated;

  miomu #(.RAM_WORDS(4096)) dut (.*, .net_out_ready(1'b1));

  assign ext_ready = ext_valid;
  always @(posedge clk) begin
    ext_rvalid <= ext_valid;
    ext_rdata  <= 32'hE0000000 | word_t'(ext_pa);
  end

  int checks = 0, failures = 0;
  mem_rsp_t rsp[$];
  always @(posedge clk) if (rst_n && net_out_valid) rsp.push_back(mem_rsp_t'(net_out.body[$bits(mem_rsp_t)-1:0]));

  task automatic send(int tag, tid_t tid, tstat_e st, word_t acva, mode_t m, semop_e op = SEM_NONE, word_t wd = 0);
    mem_req_t r;
    r = '{tag: tag_t'(tag), tid: tid, prio: 3'd3, status: st, acva: acva, mode: m, semop: op, wdata: wd, timeout: '0};
    net_in.kind <= K_MEM_REQ; net_in.src <= P_DEC; net_in.dst <= P_MIOMU; net_in.prio <= 3'd3;
    net_in.body <= BODY_W'(r); net_in_valid <= 1;
    @(posedge clk); while (!net_in_ready) @(posedge clk);
    net_in_valid <= 0;
  endtask
  task automatic expect_rsp(int n, int tag, cc_e cc, word_t rd, string what, bit chk_rd = 1);
    repeat (12) @(posedge clk);
    checks++;
    if (rsp.size() != n) begin failures++; $display("FAIL %s: %0d replies, want %0d", what, rsp.size(), n); rsp.delete(); return; end
    if (n == 0) return;
    foreach (rsp[i]) if (rsp[i].tag == tag_t'(tag)) begin
      if (rsp[i].cc != cc || (chk_rd && rsp[i].rdata != rd)) begin
        failures++; $display("FAIL %s: cc %s rdata %0h, want %s %0h", what, rsp[i].cc.name(), rsp[i].rdata, cc.name(), rd);
      end
      rsp.delete(); return;
    end
    failures++; $display("FAIL %s: no reply with tag %0d", what, tag); rsp.delete();
  endtask
  task automatic atd(int i, int pid, int va, int len, int pa, mode_t m);
    atd_wr_en <= 1; atd_wr_idx <= 4'(i); atd_wr_valid <= 1; atd_wr_pid <= pid_t'(pid); atd_wr_va <= va_t'(va);
    atd_wr_len <= va_t'(len); atd_wr_pha <= pa_t'(pa); atd_wr_rwsx <= m; @(posedge clk); atd_wr_en <= 0;
  endtask

  localparam mode_t MR = 4'b1000, MW = 4'b0100, MS = 4'b0010, MRWX = 4'b1101;
  localparam tid_t T1 = 16'h0101, T2 = 16'h0201, TH = 16'h0001;
  function automatic word_t shared(int opid, int lva); return {1'b1, 8'(opid), 23'(lva)}; endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    atd(0, 1, 0, 'h1000, 'h0, MRWX);
    atd(1, 2, 0, 'h1000, 'h1000, MRWX);
    atd(2, 1, SEM_VA, 'h100, SEM_BASE, MS);
    atd(3, 2, SEM_VA, 'h100, SEM_BASE, MS);
    send(1, T1, ST_NONPRIV, 'h10, MW, SEM_NONE, 'hdead); expect_rsp(1, 1, CC_OK, 0, "local write");
    send(2, T1, ST_NONPRIV, 'h10, MR); expect_rsp(1, 2, CC_OK, 'hdead, "local read");
    send(3, T2, ST_NONPRIV, 'h10, MR); expect_rsp(1, 3, CC_OK, 0, "other process, other page");
    send(4, T2, ST_NONPRIV, shared(1, 'h10), MR); expect_rsp(1, 4, CC_DENIED, 0, "shared without grant");
    acd_wr_en <= 1; acd_wr_idx <= 0; acd_wr_valid <= 1; acd_wr_opid <= 1; acd_wr_gntpid <= 2;
    acd_wr_orva <= 0; acd_wr_len <= 'h100; acd_wr_gntmode <= MR; @(posedge clk); acd_wr_en <= 0;
    send(5, T2, ST_NONPRIV, shared(1, 'h10), MR); expect_rsp(1, 5, CC_OK, 'hdead, "shared read granted");
    send(6, T2, ST_NONPRIV, shared(1, 'h10), MW, SEM_NONE, 1); expect_rsp(1, 6, CC_DENIED, 0, "shared write not granted");
    send(7, T1, ST_NONPRIV, 'h2000, MR); expect_rsp(1, 7, CC_FAULT, 0, "no translation");
    send(8, TH, ST_HYPER, 'h10, MR); expect_rsp(1, 8, CC_OK, 'hdead, "hyper physical");
    // semaphores
    send(9, T1, ST_NONPRIV, 0, MS, SEM_GET); expect_rsp(1, 9, CC_OK, SEM_VA, "get");
    send(10, T1, ST_NONPRIV, SEM_VA, MS, SEM_LOCK); expect_rsp(1, 10, CC_OK, 0, "lock", 0);
    send(11, T2, ST_NONPRIV, SEM_VA, MS, SEM_LOCK); expect_rsp(0, 11, CC_OK, 0, "contended lock waits");
    send(12, T1, ST_NONPRIV, SEM_VA, MS, SEM_UNLOCK);
    repeat (12) @(posedge clk);
    checks++; if (rsp.size() != 2 || rsp[0].tag + rsp[1].tag != 23) begin failures++; $display("FAIL unlock hand-over: %0d replies", rsp.size()); end
    rsp.delete();
    send(13, T1, ST_NONPRIV, 'h10, MS, SEM_LOCK); expect_rsp(1, 13, CC_DENIED, 0, "sync on a page without S");
    // block copy through the BPU registers: RAM words 4..7 -> 64..67
    for (int i = 0; i < 4; i++) begin send(20, TH, ST_HYPER, 'h10 + 4 * i, MW, SEM_NONE, 'h100 + i); expect_rsp(1, 20, CC_OK, 0, "fill"); end
    send(21, TH, ST_HYPER, BPU_BASE + 0, MW, SEM_NONE, 'h10);
    send(21, TH, ST_HYPER, BPU_BASE + 4, MW, SEM_NONE, 'h100);
    send(21, TH, ST_HYPER, BPU_BASE + 8, MW, SEM_NONE, 4);
    send(21, TH, ST_HYPER, BPU_BASE + 12, MW, SEM_NONE, 1);
    repeat (60) @(posedge clk); rsp.delete();
    for (int i = 0; i < 4; i++) begin send(22, TH, ST_HYPER, 'h100 + 4 * i, MR); expect_rsp(1, 22, CC_OK, 'h100 + i, "block copied"); end
    // fetch port
    fetch_valid <= 1; fetch_pa <= 'h104; @(posedge clk); while (!fetch_ready) @(posedge clk); fetch_valid <= 0;
    while (!fetch_rvalid) @(posedge clk);
    checks++; if (fetch_rdata != 'h101) begin failures++; $display("FAIL fetch %0h", fetch_rdata); end
    // external port
    send(23, TH, ST_HYPER, 'h20000, MR); expect_rsp(1, 23, CC_OK, 'hE0020000, "external read");
    // interrupt: dual thread T2 holds the semaphore created above and waits on its event
    send(30, TH, ST_HYPER, ICU_BASE + 0, MW, SEM_NONE, 0);
    send(30, TH, ST_HYPER, ICU_BASE + 4, MW, SEM_NONE, 'h0f00);
    send(30, TH, ST_HYPER, ICU_BASE + 8, MW, SEM_NONE, 5);
    send(30, TH, ST_HYPER, ICU_BASE + 12, MW, SEM_NONE, 0);
    repeat (20) @(posedge clk); rsp.delete();
    send(31, T2, ST_NONPRIV, SEM_VA, MS, SEM_WAIT); expect_rsp(0, 31, CC_OK, 0, "dual waits");
    irq[0] <= 1; repeat (3) @(posedge clk); irq[0] <= 0;
    expect_rsp(1, 31, CC_OK, 0, "interrupt wakes dual", 0);
    send(32, TH, ST_HYPER, ICU_BASE + 12, MR); expect_rsp(1, 32, CC_OK, 1, "icb counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
