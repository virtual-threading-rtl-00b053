// acva_translation_unit: the all-context translation directory of the MIOMU.
//
// Unlike a per-process MMU, the directory holds the translations of all
// created processes at once. A translating record (PID, VA, Len, PhA, RWSX)
// maps the area [VA, VA+Len-1] of process PID onto physical addresses from
// PhA and lists the access kinds the page allows. A reference is translated
// with the record of the addressed process: the thread's own process for a
// local address, OPID for a shared one. The reference is carried out only if
// the validation unit enabled it and the record allows the access kind;
// otherwise the unit reports an abnormal completion. Hyper-privileged threads
// use physical addresses directly (the low PA_W bits of the address), with no
// check. That record layout and behaviour follow the architecture
// description.
//
// This design's choices: NTR records in a fully associative table written
// through an indexed port (page-table walks and swapping of records are not
// modelled), first matching record wins, combinational lookup.
module acva_translation_unit
  import vthm_pkg::*;
#(
  parameter int NTR = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [$clog2(NTR)-1:0] wr_idx,
  input  logic                   wr_valid,
  input  pid_t                   wr_pid,
  input  va_t                    wr_va,
  input  va_t                    wr_len,
  input  pa_t                    wr_pha,
  input  mode_t                  wr_rwsx,
  // reference
  input  pid_t                   pid,       // addressed process
  input  va_t                    lva,
  input  mode_t                  refmode,
  input  tstat_e                 status,
  input  logic                   enable,    // from the validation unit
  output logic                   ok,
  output pa_t                    pha,
  output cc_e                    cc         // CC_OK, CC_DENIED or CC_FAULT
);
  typedef struct packed {
    logic  valid;
    pid_t  pid;
    va_t   va;
    va_t   len;
    pa_t   pha;
    mode_t rwsx;
  } tr_t;

  tr_t dir [NTR];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NTR; i++) dir[i].valid <= 1'b0;
    end else if (wr_en) begin
      dir[wr_idx] <= '{valid: wr_valid, pid: wr_pid, va: wr_va, len: wr_len,
                       pha: wr_pha, rwsx: wr_rwsx};
    end
  end

  always_comb begin
    logic hit;
    tr_t  r;
    logic [VA_W:0] off;
    hit = 1'b0;
    r   = '0;
    for (int i = NTR-1; i >= 0; i--) begin
      off = {1'b0, lva} - {1'b0, dir[i].va};
      if (dir[i].valid && dir[i].pid == pid && lva >= dir[i].va && off < {1'b0, dir[i].len}) begin
        hit = 1'b1;
        r   = dir[i];
      end
    end
    off = {1'b0, lva} - {1'b0, r.va};
    if (status == ST_HYPER) begin
      ok  = 1'b1;
      pha = lva[PA_W-1:0];
      cc  = CC_OK;
    end else begin
      pha = r.pha + off[PA_W-1:0];
      if (!enable)                             begin ok = 1'b0; cc = CC_DENIED; end
      else if (!hit)                           begin ok = 1'b0; cc = CC_FAULT;  end
      else if ((refmode & r.rwsx) != refmode)  begin ok = 1'b0; cc = CC_DENIED; end
      else                                     begin ok = 1'b1; cc = CC_OK;     end
    end
  end
endmodule
