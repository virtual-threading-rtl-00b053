// vthm_processor: one virtual-threading processor. A thread monitor, a domain
// executive cluster and the memory and IO management unit (MIOMU) exchange
// packets through the multichannel router, which joins four ports:
//   port 0  thread monitor: sends transactions, receives their replies
//   port 1  executive cluster: receives transactions, sends replies and
//           memory/semaphore references, receives reference replies
//   port 2  MIOMU: receives references, sends their replies
//   port 3  debugging monitor: brought out of the chip as a port (dbg_*)
// Every packet carries the priority of its thread, and the router serves
// higher priorities first. The thread monitor fetches instructions straight
// from the MIOMU's local RAM through a dedicated fetch port.
//
// The parts not built here connect through ports: the DRAM-IO interface
// (ext_*, word references outside the local RAM), the interrupt lines
// (irq/irq_ack), the debugging monitor (dbg_*), an outside thread-creation
// request (create_*), and the loading of the two MIOMU directories
// (acd_wr_*, atd_wr_*) which the architecture leaves to the operating
// system. The split into thread monitor, executive cluster, MIOMU and router
// follows the architecture's processor diagram with one cluster; the packet
// format and port numbering are this design's choices.
//
// After reset the bootstrap thread (TID 0, hyper-privileged, highest
// priority) starts at BOOT_PC; a program image is loaded into the local RAM
// through ext/dbg references or by the testbench. The observation outputs
// (live threads, transaction issue/completion, local jumps, halts, map stalls,
// blocks in use, interrupt deliveries, block copies, semaphores allocated)
// are status pulses and levels for monitoring; nothing inside depends on them.
module vthm_processor
  import vthm_pkg::*;
#(
  parameter int    NTHR      = 8,
  parameter int    NSLOT     = 4,
  parameter int    NPBLK     = 16,
  parameter int    NPRIO     = 8,
  parameter int    RAM_WORDS = 16384,
  parameter int    NSEM      = 8,
  parameter int    QD        = 4,
  parameter int    NREC      = 16,
  parameter int    NTR       = 16,
  parameter int    NLINES    = 4,
  parameter int    TICK_DIV  = 1,
  parameter word_t BOOT_PC   = '0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // thread creation
  input  logic                    create_valid,
  output logic                    create_ready,
  input  tid_t                    create_tid,
  input  prio_t                   create_prio,
  input  tstat_e                  create_status,
  input  word_t                   create_pc,
  // debugging monitor port of the router
  input  logic                    dbg_in_valid,
  output logic                    dbg_in_ready,
  input  net_pkt_t                dbg_in,
  output logic                    dbg_out_valid,
  input  logic                    dbg_out_ready,
  output net_pkt_t                dbg_out,
  // directory loading
  input  logic                    acd_wr_en,
  input  logic [$clog2(NREC)-1:0] acd_wr_idx,
  input  logic                    acd_wr_valid,
  input  pid_t                    acd_wr_opid,
  input  pid_t                    acd_wr_gntpid,
  input  va_t                     acd_wr_orva,
  input  va_t                     acd_wr_len,
  input  mode_t                   acd_wr_gntmode,
  input  logic                    atd_wr_en,
  input  logic [$clog2(NTR)-1:0]  atd_wr_idx,
  input  logic                    atd_wr_valid,
  input  pid_t                    atd_wr_pid,
  input  va_t                     atd_wr_va,
  input  va_t                     atd_wr_len,
  input  pa_t                     atd_wr_pha,
  input  mode_t                   atd_wr_rwsx,
  // DRAM-IO interface
  output logic                    ext_valid,
  input  logic                    ext_ready,
  output logic                    ext_we,
  output pa_t                     ext_pa,
  output word_t                   ext_wdata,
  input  logic                    ext_rvalid,
  input  word_t                   ext_rdata,
  // interrupts
  input  logic [NLINES-1:0]       irq,
  output logic [NLINES-1:0]       irq_ack,
  // observation
  output logic [NTHR-1:0]         live,
  output logic                    txn_issued,
  output logic                    txn_done,
  output logic                    local_jump,
  output logic                    thread_halted,
  output logic                    map_stall,
  output logic [$clog2(NPBLK+1)-1:0] blocks_used,
  output logic [NLINES-1:0]       irq_delivered,
  output logic                    bpu_done,
  output logic [NSEM-1:0]         sem_allocated
);
  // router ports
  logic [NET_PORTS-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [PORT_W-1:0]    in_dst  [NET_PORTS];
  logic [PRIO_W-1:0]    in_prio [NET_PORTS];
  logic [PKT_W-1:0]     in_data [NET_PORTS];
  logic [PKT_W-1:0]     out_data[NET_PORTS];
  net_pkt_t             tx [NET_PORTS];   // packets into the router
  net_pkt_t             rx [NET_PORTS];   // packets out of the router

  for (genvar p = 0; p < NET_PORTS; p++) begin : g_port
    assign in_dst[p]  = tx[p].dst;
    assign in_prio[p] = tx[p].prio;
    assign in_data[p] = tx[p];
    assign rx[p]      = net_pkt_t'(out_data[p]);
  end

  multichannel_router #(.NPORTS(NET_PORTS), .W(PKT_W), .PRIO_W(PRIO_W)) u_router (
    .clk, .rst_n, .in_valid, .in_ready, .in_dst, .in_prio, .in_data,
    .out_valid, .out_ready, .out_data);

  // fetch path from the thread monitor to the local RAM
  logic  fetch_valid, fetch_ready, fetch_rvalid;
  pa_t   fetch_pa;
  word_t fetch_rdata;

  thread_monitor #(.NTHR(NTHR), .NPRIO(NPRIO), .BOOT_PC(BOOT_PC)) u_tm (
    .clk, .rst_n,
    .create_valid, .create_ready, .create_tid, .create_prio, .create_status, .create_pc,
    .fetch_valid, .fetch_ready, .fetch_pa, .fetch_rvalid, .fetch_rdata,
    .net_out_valid(in_valid[P_TM]), .net_out_ready(in_ready[P_TM]), .net_out(tx[P_TM]),
    .net_in_valid(out_valid[P_TM]), .net_in_ready(out_ready[P_TM]), .net_in(rx[P_TM]),
    .live, .txn_issued, .thread_halted);

  exec_cluster #(.NSLOT(NSLOT), .NPBLK(NPBLK), .NPRIO(NPRIO)) u_dec (
    .clk, .rst_n,
    .net_in_valid(out_valid[P_DEC]), .net_in_ready(out_ready[P_DEC]), .net_in(rx[P_DEC]),
    .net_out_valid(in_valid[P_DEC]), .net_out_ready(in_ready[P_DEC]), .net_out(tx[P_DEC]),
    .map_stall, .txn_done, .local_jump, .blocks_used);

  miomu #(.RAM_WORDS(RAM_WORDS), .NSEM(NSEM), .QD(QD), .NREC(NREC), .NTR(NTR),
          .NLINES(NLINES), .TICK_DIV(TICK_DIV)) u_miomu (
    .clk, .rst_n,
    .net_in_valid(out_valid[P_MIOMU]), .net_in_ready(out_ready[P_MIOMU]), .net_in(rx[P_MIOMU]),
    .net_out_valid(in_valid[P_MIOMU]), .net_out_ready(in_ready[P_MIOMU]), .net_out(tx[P_MIOMU]),
    .fetch_valid, .fetch_ready, .fetch_pa, .fetch_rvalid, .fetch_rdata,
    .acd_wr_en, .acd_wr_idx, .acd_wr_valid, .acd_wr_opid, .acd_wr_gntpid, .acd_wr_orva,
    .acd_wr_len, .acd_wr_gntmode,
    .atd_wr_en, .atd_wr_idx, .atd_wr_valid, .atd_wr_pid, .atd_wr_va, .atd_wr_len,
    .atd_wr_pha, .atd_wr_rwsx,
    .ext_valid, .ext_ready, .ext_we, .ext_pa, .ext_wdata, .ext_rvalid, .ext_rdata,
    .irq, .irq_ack, .irq_delivered, .bpu_done, .sem_allocated);

  // debugging monitor port
  assign in_valid[P_DBG] = dbg_in_valid;
  assign dbg_in_ready    = in_ready[P_DBG];
  assign tx[P_DBG]       = dbg_in;
  assign dbg_out_valid   = out_valid[P_DBG];
  assign out_ready[P_DBG] = dbg_out_ready;
  assign dbg_out         = rx[P_DBG];
endmodule
