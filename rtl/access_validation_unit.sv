// access_validation_unit: the access control directory of the MIOMU and its
// associative matcher.
//
// A directory record (OPID, GntPID, OrVA, L, GntMode) says that every thread
// of process GntPID may reference the area [OrVA, OrVA+L-1] of process OPID
// with the access kinds in the mask GntMode. A shared reference
// (VAShr=1, OPID, RefPID, LVA, LRef, RefMode) is permitted when at least one
// valid record has the same OPID and GntPID=RefPID, covers the whole area
// [LVA, LVA+LRef-1] and grants RefMode. Local references (VAShr=0) are
// permitted here and left to the page rights of the translation unit, and
// hyper-privileged threads are never checked. All of this follows the
// architecture description.
//
// This design's choices: NREC records written through a simple indexed
// write port (the owner is the operating system; how it writes them is not
// specified), and a purely combinational lookup compared against all records
// in parallel, so permission is known in the clock the address is presented.
module access_validation_unit
  import vthm_pkg::*;
#(
  parameter int NREC = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // directory write port
  input  logic                    wr_en,
  input  logic [$clog2(NREC)-1:0] wr_idx,
  input  logic                    wr_valid,     // 0 removes the record
  input  pid_t                    wr_opid,
  input  pid_t                    wr_gntpid,
  input  va_t                     wr_orva,
  input  va_t                     wr_len,
  input  mode_t                   wr_gntmode,
  // reference to check
  input  logic                    vashr,
  input  pid_t                    opid,
  input  pid_t                    refpid,
  input  va_t                     lva,
  input  logic [7:0]              lref,         // bytes referenced, >= 1
  input  mode_t                   refmode,
  input  tstat_e                  status,
  output logic                    permit,
  output logic                    matched       // a directory record matched
);
  typedef struct packed {
    logic  valid;
    pid_t  opid;
    pid_t  gntpid;
    va_t   orva;
    va_t   len;
    mode_t gntmode;
  } rec_t;

  rec_t dir [NREC];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREC; i++) dir[i].valid <= 1'b0;
    end else if (wr_en) begin
      dir[wr_idx] <= '{valid: wr_valid, opid: wr_opid, gntpid: wr_gntpid,
                       orva: wr_orva, len: wr_len, gntmode: wr_gntmode};
    end
  end

  // 32-bit arithmetic so that area ends never wrap
  always_comb begin
    logic [VA_W:0] ref_end, rec_end;
    matched = 1'b0;
    ref_end = {1'b0, lva} + {{(VA_W-7){1'b0}}, lref} - 1'b1;
    for (int i = 0; i < NREC; i++) begin
      rec_end = {1'b0, dir[i].orva} + {1'b0, dir[i].len} - 1'b1;
      if (dir[i].valid && dir[i].len != '0 && lref != '0 &&
          dir[i].opid == opid && dir[i].gntpid == refpid &&
          lva >= dir[i].orva && ref_end <= rec_end &&
          (refmode & dir[i].gntmode) == refmode && refmode != '0)
        matched = 1'b1;
    end
    permit = (status == ST_HYPER) || !vashr || matched;
  end
endmodule
