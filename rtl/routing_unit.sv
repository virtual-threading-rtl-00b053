// routing_unit: the routing unit of the physical memory and IO control unit.
// It directs a request by physical address to the unit that serves it.
//
// Address map (byte physical addresses, this design's choice):
//   0 .. 4*WORDS-1            local RAM, through the cache/RAM access unit
//   ICU_BASE .. +0xFFF        interruption control block registers
//   BPU_BASE .. +0xFFF        block processing unit registers
//   anything else             external port (DRAM and IO devices behind the
//                             DRAM-IO interface)
// Semaphore cells (SEM_BASE) are served by the synchronization unit before a
// request reaches this unit.
//
// One request at a time: a request is accepted when the unit is idle; register
// accesses answer in the next clock, RAM and external accesses when their
// port answers. Each answer carries the read data (writes answer with zero)
// and a completion code. The architecture names the unit and its targets
// (executive cluster, memory bank, IO control unit); the map and the timing
// are this design's.
module routing_unit
  import vthm_pkg::*;
#(
  parameter int WORDS = 16384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic                     req_we,
  input  pa_t                      req_pa,
  input  word_t                    req_wdata,
  output logic                     rsp_valid,
  output word_t                    rsp_rdata,
  // local RAM
  output logic                     ram_valid,
  input  logic                     ram_ready,
  output logic                     ram_we,
  output logic [$clog2(WORDS)-1:0] ram_addr,
  output word_t                    ram_wdata,
  input  logic                     ram_rvalid,
  input  word_t                    ram_rdata,
  // interruption unit registers
  output logic                     icu_we,
  output logic [7:0]               icu_addr,
  output word_t                    icu_wdata,
  input  word_t                    icu_rdata,
  // block processing unit registers
  output logic                     bpu_we,
  output logic [1:0]               bpu_addr,
  output word_t                    bpu_wdata,
  input  word_t                    bpu_rdata,
  // external memory / IO
  output logic                     ext_valid,
  input  logic                     ext_ready,
  output logic                     ext_we,
  output pa_t                      ext_pa,
  output word_t                    ext_wdata,
  input  logic                     ext_rvalid,
  input  word_t                    ext_rdata
);
  localparam int AW = $clog2(WORDS);
  typedef enum logic [1:0] {T_RAM, T_ICU, T_BPU, T_EXT} tgt_e;
  typedef enum logic [1:0] {R_IDLE, R_ISSUE, R_WAIT} rst_e;

  rst_e  st;
  tgt_e  tgt;
  logic  we_q;
  pa_t   pa_q;
  word_t wd_q;

  function automatic tgt_e decode(pa_t pa);
    if (pa < pa_t'(4 * WORDS))                 return T_RAM;
    if (pa[PA_W-1:12] == ICU_BASE[PA_W-1:12])  return T_ICU;
    if (pa[PA_W-1:12] == BPU_BASE[PA_W-1:12])  return T_BPU;
    return T_EXT;
  endfunction

  assign req_ready = (st == R_IDLE);

  assign ram_valid = (st == R_ISSUE) && (tgt == T_RAM);
  assign ram_we    = we_q;
  assign ram_addr  = pa_q[AW+1:2];
  assign ram_wdata = wd_q;
  assign ext_valid = (st == R_ISSUE) && (tgt == T_EXT);
  assign ext_we    = we_q;
  assign ext_pa    = pa_q;
  assign ext_wdata = wd_q;

  assign icu_we    = (st == R_ISSUE) && (tgt == T_ICU) && we_q;
  assign icu_addr  = pa_q[9:2];
  assign icu_wdata = wd_q;
  assign bpu_we    = (st == R_ISSUE) && (tgt == T_BPU) && we_q;
  assign bpu_addr  = pa_q[3:2];
  assign bpu_wdata = wd_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= R_IDLE; tgt <= T_RAM; we_q <= 1'b0; pa_q <= '0; wd_q <= '0;
      rsp_valid <= 1'b0; rsp_rdata <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (st)
        R_IDLE: if (req_valid) begin
          st <= R_ISSUE; tgt <= decode(req_pa); we_q <= req_we; pa_q <= req_pa; wd_q <= req_wdata;
        end
        R_ISSUE: begin
          unique case (tgt)
            T_ICU: begin rsp_valid <= 1'b1; rsp_rdata <= we_q ? '0 : icu_rdata; st <= R_IDLE; end
            T_BPU: begin rsp_valid <= 1'b1; rsp_rdata <= we_q ? '0 : bpu_rdata; st <= R_IDLE; end
            T_RAM: if (ram_ready) st <= R_WAIT;
            default: if (ext_ready) st <= R_WAIT;
          endcase
        end
        R_WAIT: begin
          if (tgt == T_RAM && ram_rvalid) begin
            rsp_valid <= 1'b1; rsp_rdata <= we_q ? '0 : ram_rdata; st <= R_IDLE;
          end else if (tgt == T_EXT && ext_rvalid) begin
            rsp_valid <= 1'b1; rsp_rdata <= we_q ? '0 : ext_rdata; st <= R_IDLE;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
