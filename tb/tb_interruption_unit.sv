// tb_interruption_unit: the interruption unit driving a semaphore unit, with
// the testbench playing the dual thread. Three interrupts are delivered:
//  1. the dual thread waits on the event queue; the interrupt wakes it;
//  2. a second interrupt arrives while the dual thread still holds the
//     interval; it is delivered once the dual thread acknowledges and waits;
//  3. the dual thread leaves with the counter still set; the unit finds the
//     counter non-zero, waits, and delivers after the dual thread clears it.
// Checks the ICB registers, the acknowledge pulses, the counter value seen by
// the dual thread and the completion of its semaphore operations.
module tb_interruption_unit;
  import vthm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] irq = '0, irq_ack, delivered;
  logic reg_we = 0; logic [7:0] reg_addr = '0; word_t reg_wdata = '0, reg_rdata;
  logic i_v, h_ready; semop_e i_op; logic [2:0] i_idx; tid_t i_tid; prio_t i_prio; tag_t i_tag; tmo_t i_tmo;
  logic t_v = 0; semop_e t_op = SEM_NONE; tid_t t_tid = '0;
  logic rsp_valid; tag_t rsp_tag; tid_t rsp_tid; cc_e rsp_cc; word_t rsp_data;
  logic [7:0] alloc_o, owned_o;

  interruption_unit #(.NLINES(4), .NSEM(8)) dut (
    .clk, .rst_n, .irq, .irq_ack, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .sem_req_valid(i_v), .sem_req_ready(h_ready), .sem_req_op(i_op), .sem_req_idx(i_idx),
    .sem_req_tid(i_tid), .sem_req_prio(i_prio), .sem_req_tag(i_tag), .sem_req_timeout(i_tmo),
    .sem_rsp_valid(rsp_valid && rsp_tag[7:6] == P_MIOMU), .sem_rsp_tag(rsp_tag), .sem_rsp_cc(rsp_cc),
    .delivered);

  hwds_sync_unit #(.NSEM(8), .QD(4), .TICK_DIV(1)) sem (
    .clk, .rst_n, .req_valid(i_v || t_v), .req_ready(h_ready),
    .req_op(i_v ? i_op : t_op), .req_idx(i_v ? i_idx : 3'd0), .req_tid(i_v ? i_tid : t_tid),
    .req_prio(i_v ? i_prio : 3'd2), .req_tag(i_v ? i_tag : {P_DEC, 6'd1}), .req_timeout(i_v ? i_tmo : '0),
    .rsp_valid, .rsp_ready(1'b1), .rsp_tag, .rsp_tid, .rsp_prio(), .rsp_cc, .rsp_data,
    .sem_allocated(alloc_o), .sem_owned(owned_o));

  int checks = 0, failures = 0, ndeliv = 0, nack = 0;
  cc_e dual_rsp[$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (rsp_valid && rsp_tag[7:6] == P_DEC) dual_rsp.push_back(rsp_cc);
      ndeliv += $countones(delivered);
      nack   += $countones(irq_ack);
    end
  end

  localparam tid_t DUAL = 16'h0102;
  task automatic dual(semop_e o);
    t_op <= o; t_tid <= DUAL; t_v <= 1;
    @(posedge clk);
    while (i_v || !h_ready) @(posedge clk);
    t_v <= 0;
  endtask
  task automatic wreg(int line, int field, int v);
    reg_we <= 1; reg_addr <= 8'(line * 8 + field); reg_wdata <= word_t'(v);
    @(posedge clk); reg_we <= 0;
  endtask
  task automatic rreg(int line, int field, int want, string what);
    reg_addr <= 8'(line * 8 + field); @(posedge clk); #1;
    checks++;
    if (reg_rdata !== word_t'(want)) begin failures++; $display("FAIL %s: %0h want %0h", what, reg_rdata, want); end
  endtask
  task automatic expect_dual(int n, cc_e cc, string what);
    repeat (30) @(posedge clk);
    checks++;
    if (dual_rsp.size() != n || (n > 0 && dual_rsp[n-1] != cc)) begin
      failures++; $display("FAIL %s: %0d dual replies", what, dual_rsp.size());
    end
    dual_rsp.delete();
  endtask
  task automatic pulse(int line); irq[line] <= 1; repeat (2) @(posedge clk); irq[line] <= 0; endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    dual(SEM_GET); expect_dual(1, CC_OK, "get");
    wreg(1, 0, 0); wreg(1, 1, 'h0f01); wreg(1, 2, 6);
    rreg(1, 4, 0, "inactive before counter write");
    wreg(1, 3, 0);
    rreg(1, 1, 'h0f01, "tid field"); rreg(1, 2, 6, "prio field"); rreg(1, 4, 1, "active");
    checks++; if (nack != 1) begin failures++; $display("FAIL activation ack"); end
    // 1: dual waits for the event
    dual(SEM_LOCK); expect_dual(1, CC_OK, "dual lock");
    dual(SEM_WAIT); expect_dual(0, CC_OK, "dual waits");
    pulse(1); expect_dual(1, CC_OK, "interrupt 1 wakes dual");
    rreg(1, 3, 1, "counter set by interrupt 1");
    checks++; if (ndeliv != 1) begin failures++; $display("FAIL deliveries %0d", ndeliv); end
    // 2: interrupt while dual holds the interval
    pulse(1); repeat (20) @(posedge clk);
    checks++; if (ndeliv != 1) begin failures++; $display("FAIL early delivery"); end
    rreg(1, 4, 7, "active, pending and busy");
    wreg(1, 3, 0);                        // consume and acknowledge
    dual(SEM_WAIT); expect_dual(1, CC_OK, "interrupt 2 wakes dual");
    checks++; if (ndeliv != 2 || nack != 2) begin failures++; $display("FAIL deliveries %0d acks %0d", ndeliv, nack); end
    // 3: dual leaves without clearing the counter
    dual(SEM_UNLOCK); expect_dual(1, CC_OK, "dual unlock");
    pulse(1); repeat (20) @(posedge clk);
    checks++; if (ndeliv != 2) begin failures++; $display("FAIL delivered over non-zero counter"); end
    dual(SEM_LOCK); expect_dual(1, CC_OK, "dual re-enters (unit waits)");
    wreg(1, 3, 0);
    dual(SEM_PASS); expect_dual(1, CC_OK, "dual pass");
    checks++; if (ndeliv != 3) begin failures++; $display("FAIL third delivery, %0d", ndeliv); end
    rreg(1, 3, 1, "counter set by interrupt 3");
    rreg(1, 4, 1, "channel idle");
    checks++; if (owned_o[0] !== 1'b0) begin failures++; $display("FAIL interval left busy"); end
    // an unconfigured line never issues requests
    pulse(2); repeat (10) @(posedge clk);
    checks++; if (ndeliv != 3) begin failures++; $display("FAIL inactive line delivered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
