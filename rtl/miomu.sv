// miomu: the memory and IO management unit. Every memory reference and every
// semaphore instruction of the processor arrives here as a packet from the
// processor network, addressed by an access controlled virtual address (ACVA).
//
// A reference is checked and translated in one clock: the access validation
// unit matches a shared ACVA against the access control directory, the ACVA
// translation unit maps it to a physical address through the all-context
// directory (or passes a hyper-privileged physical address through). Then
//   - a refused reference is answered at once with DENIED or FAULT;
//   - a semaphore instruction on an address in the semaphore cell region goes
//     to the synchronization unit; SemaphoreGet needs no address. Semaphore
//     completions come back later, whenever the synchronization unit decides
//     (a Lock or Wait may complete thousands of clocks afterwards); a Get
//     answers with the ACVA of the new semaphore, SEM_VA + 4*index;
//   - a read or write goes through the routing unit to the local RAM, to the
//     registers of the interruption unit or block processing unit, or out of
//     the external port.
// The interruption unit shares the synchronization unit's request port (it
// has precedence) and receives the replies tagged with this unit's port.
// Thread-monitor instruction fetch is a third requester of the RAM.
//
// The partition into validation, translation, synchronization, routing,
// block processing, interruption and cache/RAM access units follows the
// architecture description. The one-reference-at-a-time engine, the packet
// formats, the address map, the directory write ports (the architecture leaves
// their programming to the operating system without saying how) and the
// fixed word-sized references are this design's choices.
module miomu
  import vthm_pkg::*;
#(
  parameter int RAM_WORDS = 16384,
  parameter int NSEM      = 8,
  parameter int QD        = 4,
  parameter int NREC      = 16,
  parameter int NTR       = 16,
  parameter int NLINES    = 4,
  parameter int TICK_DIV  = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // processor network port
  input  logic                    net_in_valid,
  output logic                    net_in_ready,
  input  net_pkt_t                net_in,
  output logic                    net_out_valid,
  input  logic                    net_out_ready,
  output net_pkt_t                net_out,
  // instruction fetch (physical) for the thread monitor
  input  logic                    fetch_valid,
  output logic                    fetch_ready,
  input  pa_t                     fetch_pa,
  output logic                    fetch_rvalid,
  output word_t                   fetch_rdata,
  // access control directory writes
  input  logic                    acd_wr_en,
  input  logic [$clog2(NREC)-1:0] acd_wr_idx,
  input  logic                    acd_wr_valid,
  input  pid_t                    acd_wr_opid,
  input  pid_t                    acd_wr_gntpid,
  input  va_t                     acd_wr_orva,
  input  va_t                     acd_wr_len,
  input  mode_t                   acd_wr_gntmode,
  // translation directory writes
  input  logic                    atd_wr_en,
  input  logic [$clog2(NTR)-1:0]  atd_wr_idx,
  input  logic                    atd_wr_valid,
  input  pid_t                    atd_wr_pid,
  input  va_t                     atd_wr_va,
  input  va_t                     atd_wr_len,
  input  pa_t                     atd_wr_pha,
  input  mode_t                   atd_wr_rwsx,
  // DRAM-IO interface (external memory and IO devices)
  output logic                    ext_valid,
  input  logic                    ext_ready,
  output logic                    ext_we,
  output pa_t                     ext_pa,
  output word_t                   ext_wdata,
  input  logic                    ext_rvalid,
  input  word_t                   ext_rdata,
  // interrupt lines
  input  logic [NLINES-1:0]       irq,
  output logic [NLINES-1:0]       irq_ack,
  // observation
  output logic [NLINES-1:0]       irq_delivered,
  output logic                    bpu_done,
  output logic [NSEM-1:0]         sem_allocated
);
  localparam int SW = $clog2(NSEM);
  localparam int AW = $clog2(RAM_WORDS);

  typedef enum logic [2:0] {M_IDLE, M_CHECK, M_SEM, M_ROUTE, M_RWAIT, M_REPLY} mst_e;

  mst_e              st;
  mem_req_t          cur;
  mem_rsp_t          drsp;      // direct reply being sent

  // ---- validation and translation (combinational on cur) -----------------
  logic  vashr;
  pid_t  refpid, opid;
  va_t   lva;
  logic  permit, matched;
  logic  tr_ok;
  pa_t   pha;
  cc_e   tr_cc;

  assign vashr  = cur.acva[31];
  assign refpid = tid_pid(cur.tid);
  assign opid   = vashr ? cur.acva[30:23] : refpid;
  assign lva    = vashr ? va_t'(cur.acva[22:0]) : cur.acva[30:0];

  access_validation_unit #(.NREC(NREC)) u_avu (
    .clk, .rst_n,
    .wr_en(acd_wr_en), .wr_idx(acd_wr_idx), .wr_valid(acd_wr_valid), .wr_opid(acd_wr_opid),
    .wr_gntpid(acd_wr_gntpid), .wr_orva(acd_wr_orva), .wr_len(acd_wr_len), .wr_gntmode(acd_wr_gntmode),
    .vashr, .opid, .refpid, .lva, .lref(8'd4), .refmode(cur.mode), .status(cur.status),
    .permit, .matched);

  acva_translation_unit #(.NTR(NTR)) u_atu (
    .clk, .rst_n,
    .wr_en(atd_wr_en), .wr_idx(atd_wr_idx), .wr_valid(atd_wr_valid), .wr_pid(atd_wr_pid),
    .wr_va(atd_wr_va), .wr_len(atd_wr_len), .wr_pha(atd_wr_pha), .wr_rwsx(atd_wr_rwsx),
    .pid(opid), .lva, .refmode(cur.mode), .status(cur.status), .enable(permit),
    .ok(tr_ok), .pha, .cc(tr_cc));

  wire in_sem_region = (pha[PA_W-1:PA_W-2] == SEM_BASE[PA_W-1:PA_W-2]);

  // ---- synchronization unit ---------------------------------------------
  logic          h_req_valid, h_req_ready;
  logic          i_req_valid;
  semop_e        i_req_op;
  logic [SW-1:0] i_req_idx;
  tid_t          i_req_tid;
  prio_t         i_req_prio;
  tag_t          i_req_tag;
  tmo_t          i_req_timeout;
  logic          h_rsp_valid, h_rsp_ready;
  tag_t          h_rsp_tag;
  tid_t          h_rsp_tid;
  prio_t         h_rsp_prio;
  cc_e           h_rsp_cc;
  word_t         h_rsp_data;
  logic [NSEM-1:0] sem_owned;

  wire e_req_valid = (st == M_SEM);
  assign h_req_valid = i_req_valid || e_req_valid;

  hwds_sync_unit #(.NSEM(NSEM), .QD(QD), .TICK_DIV(TICK_DIV)) u_hwds (
    .clk, .rst_n,
    .req_valid(h_req_valid), .req_ready(h_req_ready),
    .req_op     (i_req_valid ? i_req_op      : cur.semop),
    .req_idx    (i_req_valid ? i_req_idx     : pha[2 +: SW]),
    .req_tid    (i_req_valid ? i_req_tid     : cur.tid),
    .req_prio   (i_req_valid ? i_req_prio    : cur.prio),
    .req_tag    (i_req_valid ? i_req_tag     : cur.tag),
    .req_timeout(i_req_valid ? i_req_timeout : cur.timeout),
    .rsp_valid(h_rsp_valid), .rsp_ready(h_rsp_ready), .rsp_tag(h_rsp_tag), .rsp_tid(h_rsp_tid),
    .rsp_prio(h_rsp_prio), .rsp_cc(h_rsp_cc), .rsp_data(h_rsp_data),
    .sem_allocated, .sem_owned);

  wire h_rsp_to_icu = (h_rsp_tag[TAG_W-1 -: PORT_W] == P_MIOMU);

  // ---- physical memory and IO control unit --------------------------------
  logic          r_req_valid, r_req_ready, r_rsp_valid;
  word_t         r_rsp_rdata;
  logic [2:0]    m_valid, m_ready, m_we, m_rvalid;
  logic [AW-1:0] m_addr  [3];
  word_t         m_wdata [3];
  word_t         m_rdata;
  logic          icu_we, bpu_we;
  logic [7:0]    icu_addr;
  logic [1:0]    bpu_addr;
  word_t         icu_wdata, icu_rdata, bpu_wdata, bpu_rdata;
  logic          bpu_busy;

  assign r_req_valid = (st == M_ROUTE);

  routing_unit #(.WORDS(RAM_WORDS)) u_route (
    .clk, .rst_n,
    .req_valid(r_req_valid), .req_ready(r_req_ready), .req_we(cur.mode.w), .req_pa(pha),
    .req_wdata(cur.wdata), .rsp_valid(r_rsp_valid), .rsp_rdata(r_rsp_rdata),
    .ram_valid(m_valid[0]), .ram_ready(m_ready[0]), .ram_we(m_we[0]), .ram_addr(m_addr[0]),
    .ram_wdata(m_wdata[0]), .ram_rvalid(m_rvalid[0]), .ram_rdata(m_rdata),
    .icu_we, .icu_addr, .icu_wdata, .icu_rdata,
    .bpu_we, .bpu_addr, .bpu_wdata, .bpu_rdata,
    .ext_valid, .ext_ready, .ext_we, .ext_pa, .ext_wdata, .ext_rvalid, .ext_rdata);

  block_processing_unit #(.WORDS(RAM_WORDS)) u_bpu (
    .clk, .rst_n,
    .reg_we(bpu_we), .reg_addr(bpu_addr), .reg_wdata(bpu_wdata), .reg_rdata(bpu_rdata),
    .mem_valid(m_valid[1]), .mem_ready(m_ready[1]), .mem_we(m_we[1]), .mem_addr(m_addr[1]),
    .mem_wdata(m_wdata[1]), .mem_rvalid(m_rvalid[1]), .mem_rdata(m_rdata),
    .busy(bpu_busy), .done(bpu_done));

  assign m_valid[2]   = fetch_valid;
  assign m_we[2]      = 1'b0;
  assign m_addr[2]    = fetch_pa[AW+1:2];
  assign m_wdata[2]   = '0;
  assign fetch_ready  = m_ready[2];
  assign fetch_rvalid = m_rvalid[2];
  assign fetch_rdata  = m_rdata;

  cache_ram_cu #(.NREQ(3), .WORDS(RAM_WORDS)) u_mem (
    .clk, .rst_n, .valid(m_valid), .ready(m_ready), .we(m_we), .addr(m_addr),
    .wdata(m_wdata), .rvalid(m_rvalid), .rdata(m_rdata));

  interruption_unit #(.NLINES(NLINES), .NSEM(NSEM)) u_icu (
    .clk, .rst_n, .irq, .irq_ack,
    .reg_we(icu_we), .reg_addr(icu_addr), .reg_wdata(icu_wdata), .reg_rdata(icu_rdata),
    .sem_req_valid(i_req_valid), .sem_req_ready(h_req_ready), .sem_req_op(i_req_op),
    .sem_req_idx(i_req_idx), .sem_req_tid(i_req_tid), .sem_req_prio(i_req_prio),
    .sem_req_tag(i_req_tag), .sem_req_timeout(i_req_timeout),
    .sem_rsp_valid(h_rsp_valid && h_rsp_to_icu), .sem_rsp_tag(h_rsp_tag), .sem_rsp_cc(h_rsp_cc),
    .delivered(irq_delivered));

  // ---- reply output -------------------------------------------------------
  wire out_free = !net_out_valid || net_out_ready;
  wire d_send   = (st == M_REPLY) && out_free;
  wire h_send   = h_rsp_valid && !h_rsp_to_icu && out_free && !(st == M_REPLY);
  assign h_rsp_ready = h_rsp_to_icu || h_send;
  assign net_in_ready = (st == M_IDLE);

  function automatic net_pkt_t mk_rsp(mem_rsp_t r, prio_t p);
    net_pkt_t k;
    k.kind = K_MEM_RSP;
    k.src  = P_MIOMU;
    k.dst  = r.tag[TAG_W-1 -: PORT_W];
    k.prio = p;
    k.body = BODY_W'(r);
    return k;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      net_out_valid <= 1'b0; net_out <= '0;
      st <= M_IDLE; cur <= '0; drsp <= '0;
    end else begin
      if (net_out_valid && net_out_ready) net_out_valid <= 1'b0;
      if (d_send) begin
        net_out_valid <= 1'b1;
        net_out       <= mk_rsp(drsp, cur.prio);
      end else if (h_send) begin
        net_out_valid <= 1'b1;
        net_out       <= mk_rsp('{tag: h_rsp_tag, tid: h_rsp_tid, cc: h_rsp_cc,
                                  rdata: (h_rsp_cc == CC_OK) ? word_t'(SEM_VA) + (h_rsp_data << 2) : '0},
                                h_rsp_prio);
      end
      unique case (st)
        M_IDLE: if (net_in_valid) begin
          cur     <= mem_req_t'(net_in.body[$bits(mem_req_t)-1:0]);
          st      <= M_CHECK;
        end
        M_CHECK: begin
          drsp <= '{tag: cur.tag, tid: cur.tid, cc: tr_cc, rdata: '0};
          if (cur.semop == SEM_GET)                  st <= M_SEM;
          else if (!tr_ok)                           st <= M_REPLY;
          else if (cur.semop != SEM_NONE) begin
            if (in_sem_region)                       st <= M_SEM;
            else begin drsp.cc <= CC_FAULT;          st <= M_REPLY; end
          end else                                   st <= M_ROUTE;
        end
        M_SEM:   if (h_req_ready && !i_req_valid) st <= M_IDLE;
        M_ROUTE: if (r_req_ready) st <= M_RWAIT;
        M_RWAIT: if (r_rsp_valid) begin
          drsp <= '{tag: cur.tag, tid: cur.tid, cc: CC_OK, rdata: r_rsp_rdata};
          st   <= M_REPLY;
        end
        M_REPLY: if (d_send) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
