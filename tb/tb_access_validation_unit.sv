// tb_access_validation_unit: programs a handful of access control records and
// checks directed and random shared references against a reference model
// written with integer arithmetic. Covers owner/grantee matching, the area
// bounds (a reference crossing the end of a granted area is refused), mode
// masks, local references and the hyper-privileged bypass, and record removal.
module tb_access_validation_unit;
  import vthm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_valid; logic [3:0] wr_idx; pid_t wr_opid, wr_gntpid; va_t wr_orva, wr_len; mode_t wr_gntmode;
  logic vashr; pid_t opid, refpid; va_t lva; logic [7:0] lref; mode_t refmode; tstat_e status;
  logic permit, matched;
  access_validation_unit #(.NREC(16)) dut (.*);

  typedef struct { bit v; int op, gp; longint orva, len; bit [3:0] m; } rec_t;
  rec_t model[16];
  int checks = 0, failures = 0;

  task automatic wr(int i, bit v, int op, int gp, longint orva, longint len, bit [3:0] m);
    model[i] = '{v, op, gp, orva, len, m};
    wr_en <= 1; wr_idx <= 4'(i); wr_valid <= v; wr_opid <= pid_t'(op); wr_gntpid <= pid_t'(gp);
    wr_orva <= va_t'(orva); wr_len <= va_t'(len); wr_gntmode <= mode_t'(m);
    @(posedge clk); wr_en <= 0; @(posedge clk);
  endtask

  function automatic bit expect_permit(bit sh, int op, int rp, longint a, int n, bit [3:0] m, tstat_e st);
    if (st == ST_HYPER || !sh) return 1;
    if (m == 0) return 0;
    foreach (model[i])
      if (model[i].v && model[i].len > 0 && n > 0 && model[i].op == op && model[i].gp == rp &&
          a >= model[i].orva && a + n <= model[i].orva + model[i].len && (m & ~model[i].m) == 0)
        return 1;
    return 0;
  endfunction

  task automatic chk(bit sh, int op, int rp, longint a, int n, bit [3:0] m, tstat_e st, string what = "random");
    bit e;
    vashr = sh; opid = pid_t'(op); refpid = pid_t'(rp); lva = va_t'(a); lref = 8'(n); refmode = mode_t'(m); status = st;
    #1; e = expect_permit(sh, op, rp, a, n, m, st);
    checks++;
    if (permit !== e) begin failures++; $display("FAIL %s: op=%0d rp=%0d a=%0h n=%0d m=%b st=%s permit=%b want %b", what, op, rp, a, n, m, st.name(), permit, e); end
  endtask

  initial begin
    foreach (model[i]) model[i].v = 0;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    wr(0, 1, 3, 5, 'h1000, 'h100, 4'b1000);   // pid5 may read [1000,10ff] of pid3
    wr(1, 1, 3, 6, 'h1000, 'h100, 4'b1110);   // pid6 r/w/s
    wr(2, 1, 0, 5, 'h0,    'h40,  4'b1100);   // pid5 r/w IO block of the hyperuser
    chk(1, 3, 5, 'h1000, 4, 4'b1000, ST_NONPRIV, "grant read");
    chk(1, 3, 5, 'h1000, 4, 4'b0100, ST_NONPRIV, "write not granted");
    chk(1, 3, 5, 'h10fc, 4, 4'b1000, ST_NONPRIV, "last word inside");
    chk(1, 3, 5, 'h10fd, 4, 4'b1000, ST_NONPRIV, "crosses end");
    chk(1, 3, 5, 'h0ffc, 4, 4'b1000, ST_NONPRIV, "below start");
    chk(1, 3, 7, 'h1000, 4, 4'b1000, ST_NONPRIV, "other grantee");
    chk(1, 3, 6, 'h1010, 4, 4'b0010, ST_NONPRIV, "sync granted");
    chk(1, 0, 5, 'h20, 4, 4'b0100, ST_PRIV, "io block write");
    chk(0, 0, 5, 'h5000, 4, 4'b0100, ST_NONPRIV, "local passes");
    chk(1, 9, 9, 'h5000, 4, 4'b0100, ST_HYPER, "hyper bypass");
    wr(0, 0, 3, 5, 'h1000, 'h100, 4'b1000);   // revoke
    chk(1, 3, 5, 'h1000, 4, 4'b1000, ST_NONPRIV, "revoked");
    for (int i = 3; i < 12; i++)
      wr(i, 1, $urandom_range(0, 3), $urandom_range(4, 7), $urandom_range(0, 'h3000), $urandom_range(1, 'h800), 4'($urandom_range(1, 15)));
    repeat (3000)
      chk($urandom_range(0, 7) != 0, $urandom_range(0, 3), $urandom_range(4, 7), $urandom_range(0, 'h3800),
          $urandom_range(1, 16), 4'(1 << $urandom_range(0, 3)), ($urandom_range(0, 15) == 0) ? ST_HYPER : ST_NONPRIV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
