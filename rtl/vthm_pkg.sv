// vthm_pkg: types and constants shared by the units of the virtual-threaded
// processor.
//
// Thread identity follows the architecture description: a thread identifier
// (TID) carries the owning process identifier (PID) in its upper bits and the
// local thread number in its lower bits; every thread has a status
// (non-privileged, privileged, hyper-privileged) and a priority that travels
// with each piece of work it produces. Access modes are the four reference
// kinds read, write, execute and synchronization. Field widths, the
// instruction encoding of the executive cluster, the physical address map and
// the network packet layouts are choices of this implementation; the
// architecture does not fix them.
package vthm_pkg;

  // ---- identities -------------------------------------------------------
  localparam int PID_W  = 8;
  localparam int TNO_W  = 8;
  localparam int TID_W  = PID_W + TNO_W;
  localparam int PRIO_W = 3;                 // 8 priority levels, 7 highest
  localparam int DATA_W = 32;

  typedef logic [PID_W-1:0]  pid_t;
  typedef logic [TID_W-1:0]  tid_t;
  typedef logic [PRIO_W-1:0] prio_t;
  typedef logic [DATA_W-1:0] word_t;

  typedef enum logic [1:0] {
    ST_NONPRIV = 2'd0,
    ST_PRIV    = 2'd1,
    ST_HYPER   = 2'd2
  } tstat_e;

  function automatic pid_t tid_pid(tid_t t);
    return t[TID_W-1 -: PID_W];
  endfunction

  // ---- access modes (RefMode one-hot, GntMode / RWSX masks) -------------
  typedef struct packed {
    logic r;
    logic w;
    logic s;   // synchronization atomic access
    logic x;
  } mode_t;

  // ---- access controlled virtual address (32-bit form) ------------------
  // bit 31 = VAShr. Local:  {0, LVA[30:0]}.  Shared: {1, OPID[7:0], LVA[22:0]}.
  localparam int VA_W     = 31;
  localparam int PA_W     = 24;
  typedef logic [VA_W-1:0] va_t;
  typedef logic [PA_W-1:0] pa_t;

  // ---- physical address map ---------------------------------------------
  localparam pa_t IO_BASE  = 24'h80_0000;  // bit 23: IO register space
  localparam pa_t ICU_BASE = 24'h80_0000;  // interruption control blocks
  localparam pa_t BPU_BASE = 24'h80_1000;  // block processing unit
  localparam pa_t SEM_BASE = 24'hC0_0000;  // semaphore cells (bits 23:22 = 2'b11)
  // local virtual window in which SemaphoreGet returns semaphore addresses
  localparam va_t SEM_VA   = 31'h0040_0000;

  // ---- semaphore operations and completion codes ------------------------
  typedef enum logic [2:0] {
    SEM_NONE   = 3'd0,
    SEM_GET    = 3'd1,
    SEM_FREE   = 3'd2,
    SEM_LOCK   = 3'd3,
    SEM_UNLOCK = 3'd4,
    SEM_WAIT   = 3'd5,
    SEM_PASS   = 3'd6
  } semop_e;

  typedef enum logic [2:0] {
    CC_OK      = 3'd0,
    CC_TIMEOUT = 3'd1,   // value 1, as tested by the producer/consumer code
    CC_EMPTY   = 3'd2,   // SemaphoreGet found no free semaphore
    CC_DENIED  = 3'd3,   // access validation refused the reference
    CC_FAULT   = 3'd4    // no translation, protocol misuse, queue full
  } cc_e;

  localparam int TAG_W = 8;                  // {port[1:0], index[5:0]}
  typedef logic [TAG_W-1:0] tag_t;
  localparam int TMO_W = 16;
  typedef logic [TMO_W-1:0] tmo_t;

  // ---- processor network ------------------------------------------------
  localparam int NET_PORTS = 4;
  localparam int PORT_W    = 2;
  localparam logic [PORT_W-1:0] P_TM = 2'd0, P_DEC = 2'd1, P_MIOMU = 2'd2, P_DBG = 2'd3;

  typedef enum logic [1:0] {
    K_TXN_REQ = 2'd0,
    K_TXN_RSP = 2'd1,
    K_MEM_REQ = 2'd2,
    K_MEM_RSP = 2'd3
  } kind_e;

  // ---- executive cluster instruction set (this implementation's) --------
  localparam int TXN_LEN = 4;                // instructions per transaction
  localparam int NREG    = 16;               // architectural integer registers
  localparam int RBLK    = 4;                // registers per fine-grain block
  localparam int NABLK   = NREG / RBLK;      // architectural blocks per thread

  typedef enum logic [3:0] {
    OP_NOP = 4'd0, OP_ADD = 4'd1, OP_SUB = 4'd2, OP_AND = 4'd3, OP_OR = 4'd4,
    OP_XOR = 4'd5, OP_ADDI = 4'd6, OP_LD = 4'd8, OP_ST = 4'd9, OP_BNZ = 4'd10,
    OP_JMP = 4'd11, OP_HALT = 4'd12, OP_SEM = 4'd13
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [3:0]  rd;
    logic [3:0]  rs1;
    logic [3:0]  rs2;
    logic [15:0] imm;
  } instr_t;

  function automatic bit is_ctrl(op_e op);
    return op inside {OP_BNZ, OP_JMP, OP_HALT};
  endfunction
  function automatic bit writes_rd(op_e op);
    return op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ADDI, OP_LD, OP_SEM};
  endfunction
  function automatic bit reads_rs2(op_e op);
    return op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ST, OP_SEM};
  endfunction
  function automatic bit reads_rs1(op_e op);
    return !(op inside {OP_NOP, OP_JMP, OP_HALT});
  endfunction

  // transaction request: thread monitor -> executive cluster
  typedef struct packed {
    tid_t                          tid;
    prio_t                         prio;
    tstat_e                        status;
    word_t                         pc;
    logic [2:0]                    n;       // instructions used, 1..TXN_LEN
    instr_t [TXN_LEN-1:0]          instr;
    logic [TXN_LEN-1:0][TXN_LEN-1:0] graph; // graph[i][j]: i waits for j
  } txn_req_t;

  // transaction reply: executive cluster -> thread monitor
  typedef struct packed {
    tid_t  tid;
    prio_t prio;
    word_t next_pc;
    cc_e   cc;
    logic  halt;
    word_t result;   // value of the last register written
  } txn_rsp_t;

  // memory / synchronization reference: cluster -> MIOMU
  typedef struct packed {
    tag_t   tag;
    tid_t   tid;
    prio_t  prio;
    tstat_e status;
    word_t  acva;
    mode_t  mode;
    semop_e semop;
    word_t  wdata;
    tmo_t   timeout;
  } mem_req_t;

  // MIOMU -> cluster
  typedef struct packed {
    tag_t  tag;
    tid_t  tid;
    cc_e   cc;
    word_t rdata;
  } mem_rsp_t;

  localparam int BODY_W = $bits(txn_req_t);

  typedef struct packed {
    kind_e               kind;
    logic [PORT_W-1:0]   src;
    logic [PORT_W-1:0]   dst;
    prio_t               prio;
    logic [BODY_W-1:0]   body;
  } net_pkt_t;

  localparam int PKT_W = $bits(net_pkt_t);

endpackage
