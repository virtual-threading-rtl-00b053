// interruption_unit: turns interrupt lines into semaphore operations, so that
// interrupts reach software only as the completion of a SemaphoreWait in a
// "dual" thread, with no interrupt handler.
//
// Each line has an interruption control block (ICB) with the fields written by
// its dual thread: the semaphore address, the TID and priority under which the
// unit acts, and a binary counter. Writing the counter field (normally with
// zero) activates the block. For every interrupt the line's channel runs the
// supplier side of the producer/consumer protocol:
//   SemaphoreLock  -> inside the critical interval, test the counter;
//   counter == 0   -> set it to 1 (interrupt delivered) and SemaphorePass,
//                     which wakes the dual thread waiting on the event queue;
//   counter != 0   -> the dual thread has not yet consumed the previous
//                     interrupt: SemaphoreWait, and test again once passed
//                     back into the interval.
// The dual thread, having consumed the interrupt, writes zero to the counter
// (this also pulses irq_ack, the confirmation to the device) and issues
// SemaphorePass. The protocol and the ICB fields follow the architecture
// description.
//
// This design's choices: one channel per line (the description calls the unit
// multi-channel); rising edges of irq[] are latched and interrupts arriving
// while one is pending merge with it; semaphore requests from the channels
// share one port, lowest line first; replies are steered back by tag
// {P_MIOMU, line}; no timeout is used on the unit's own semaphore requests.
// Register map (word offsets per line, 8 words per line):
//   0 semaphore index, 1 TID, 2 priority, 3 counter (write = activate/ack),
//   4 status (read only: bit0 active, bit1 pending, bit2 busy).
module interruption_unit
  import vthm_pkg::*;
#(
  parameter int NLINES = 4,     // INTA..INTD
  parameter int NSEM   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NLINES-1:0]       irq,
  output logic [NLINES-1:0]       irq_ack,
  // ICB register port
  input  logic                    reg_we,
  input  logic [7:0]              reg_addr,   // word address {line, field[2:0]}
  input  word_t                   reg_wdata,
  output word_t                   reg_rdata,
  // semaphore request port (to the synchronization unit)
  output logic                    sem_req_valid,
  input  logic                    sem_req_ready,
  output semop_e                  sem_req_op,
  output logic [$clog2(NSEM)-1:0] sem_req_idx,
  output tid_t                    sem_req_tid,
  output prio_t                   sem_req_prio,
  output tag_t                    sem_req_tag,
  output tmo_t                    sem_req_timeout,
  // semaphore replies addressed to this unit
  input  logic                    sem_rsp_valid,
  input  tag_t                    sem_rsp_tag,
  input  cc_e                     sem_rsp_cc,
  // observation
  output logic [NLINES-1:0]       delivered   // pulse: counter set, Pass issued
);
  localparam int LW = (NLINES > 1) ? $clog2(NLINES) : 1;
  localparam int SW = $clog2(NSEM);

  typedef enum logic [2:0] {C_IDLE, C_LOCK, C_LOCKW, C_CHECK, C_WAIT, C_WAITW, C_PASS, C_PASSW} ch_e;

  logic [SW-1:0] icb_sem  [NLINES];
  tid_t          icb_tid  [NLINES];
  prio_t         icb_prio [NLINES];
  logic          icb_cnt  [NLINES];
  logic          active   [NLINES];
  logic          pending  [NLINES];
  logic [NLINES-1:0] irq_q;
  ch_e           st       [NLINES];

  wire [LW-1:0] reg_line  = reg_addr[3+:LW];
  wire [2:0]    reg_field = reg_addr[2:0];

  // request arbitration: lowest line with a request to send
  logic          any_req;
  logic [LW-1:0] gsel;
  always_comb begin
    any_req = 1'b0;
    gsel    = '0;
    for (int l = NLINES-1; l >= 0; l--)
      if (st[l] inside {C_LOCK, C_WAIT, C_PASS}) begin any_req = 1'b1; gsel = LW'(l); end
  end
  assign sem_req_valid   = any_req;
  assign sem_req_op      = (st[gsel] == C_LOCK) ? SEM_LOCK : (st[gsel] == C_WAIT) ? SEM_WAIT : SEM_PASS;
  assign sem_req_idx     = icb_sem[gsel];
  assign sem_req_tid     = icb_tid[gsel];
  assign sem_req_prio    = icb_prio[gsel];
  assign sem_req_tag     = {P_MIOMU, (TAG_W-PORT_W)'(gsel)};
  assign sem_req_timeout = '0;
  wire   granted         = any_req && sem_req_ready;
  wire [LW-1:0] rsp_line = LW'(sem_rsp_tag[TAG_W-PORT_W-1:0]);

  always_comb begin
    reg_rdata = '0;
    unique case (reg_field)
      3'd0: reg_rdata = word_t'(icb_sem[reg_line]);
      3'd1: reg_rdata = word_t'(icb_tid[reg_line]);
      3'd2: reg_rdata = word_t'(icb_prio[reg_line]);
      3'd3: reg_rdata = word_t'(icb_cnt[reg_line]);
      3'd4: reg_rdata = {29'd0, st[reg_line] != C_IDLE, pending[reg_line], active[reg_line]};
      default: reg_rdata = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      irq_q     <= '0;
      irq_ack   <= '0;
      delivered <= '0;
      for (int l = 0; l < NLINES; l++) begin
        icb_sem[l] <= '0; icb_tid[l] <= '0; icb_prio[l] <= '0; icb_cnt[l] <= 1'b0;
        active[l]  <= 1'b0; pending[l] <= 1'b0; st[l] <= C_IDLE;
      end
    end else begin
      irq_q     <= irq;
      irq_ack   <= '0;
      delivered <= '0;
      for (int l = 0; l < NLINES; l++) begin
        if (irq[l] && !irq_q[l]) pending[l] <= 1'b1;
        unique case (st[l])
          C_IDLE:  if (active[l] && pending[l]) st[l] <= C_LOCK;
          C_LOCK, C_WAIT, C_PASS:
            if (granted && gsel == LW'(l))
              st[l] <= (st[l] == C_LOCK) ? C_LOCKW : (st[l] == C_WAIT) ? C_WAITW : C_PASSW;
          C_LOCKW: if (sem_rsp_valid && rsp_line == LW'(l))
                     st[l] <= (sem_rsp_cc == CC_OK) ? C_CHECK : C_IDLE;
          C_CHECK: begin
            if (!icb_cnt[l]) begin
              icb_cnt[l]   <= 1'b1;
              pending[l]   <= irq[l] && !irq_q[l];
              delivered[l] <= 1'b1;
              st[l]        <= C_PASS;
            end else begin
              st[l] <= C_WAIT;
            end
          end
          C_WAITW: if (sem_rsp_valid && rsp_line == LW'(l))
                     st[l] <= (sem_rsp_cc inside {CC_OK, CC_TIMEOUT}) ? C_CHECK : C_IDLE;
          C_PASSW: if (sem_rsp_valid && rsp_line == LW'(l)) st[l] <= C_IDLE;
          default: st[l] <= C_IDLE;
        endcase
      end
      // register writes by the dual thread (after the channel updates)
      if (reg_we) begin
        unique case (reg_field)
          3'd0: icb_sem[reg_line]  <= reg_wdata[SW-1:0];
          3'd1: icb_tid[reg_line]  <= reg_wdata[TID_W-1:0];
          3'd2: icb_prio[reg_line] <= reg_wdata[PRIO_W-1:0];
          3'd3: begin
            icb_cnt[reg_line] <= reg_wdata[0];
            active[reg_line]  <= 1'b1;
            irq_ack[reg_line] <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
