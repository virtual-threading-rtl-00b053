// tb_acva_translation_unit: fills the all-context translation directory with
// records of several processes and checks random references against an
// integer reference model: physical address, page rights, missing records,
// the enable from the validation unit and the hyper-privileged bypass.
module tb_acva_translation_unit;
  import vthm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_valid; logic [3:0] wr_idx; pid_t wr_pid; va_t wr_va, wr_len; pa_t wr_pha; mode_t wr_rwsx;
  pid_t pid; va_t lva; mode_t refmode; tstat_e status; logic enable;
  logic ok; pa_t pha; cc_e cc;
  acva_translation_unit #(.NTR(16)) dut (.*);

  typedef struct { bit v; int pid; longint va, len, pa; bit [3:0] m; } rec_t;
  rec_t model[16];
  int checks = 0, failures = 0;

  task automatic wr(int i, int p, longint va, longint len, longint pa, bit [3:0] m);
    model[i] = '{1, p, va, len, pa, m};
    wr_en <= 1; wr_idx <= 4'(i); wr_valid <= 1; wr_pid <= pid_t'(p); wr_va <= va_t'(va);
    wr_len <= va_t'(len); wr_pha <= pa_t'(pa); wr_rwsx <= mode_t'(m);
    @(posedge clk); wr_en <= 0; @(posedge clk);
  endtask

  task automatic chk(int p, longint a, bit [3:0] m, tstat_e st, bit en);
    bit eok; longint epa; cc_e ecc; int hit;
    pid = pid_t'(p); lva = va_t'(a); refmode = mode_t'(m); status = st; enable = en;
    #1;
    hit = -1;
    for (int i = 0; i < 16; i++)
      if (hit < 0 && model[i].v && model[i].pid == p && a >= model[i].va && a < model[i].va + model[i].len) hit = i;
    if (st == ST_HYPER) begin eok = 1; epa = a & 'hffffff; ecc = CC_OK; end
    else if (!en) begin eok = 0; ecc = CC_DENIED; epa = pha; end
    else if (hit < 0) begin eok = 0; ecc = CC_FAULT; epa = pha; end
    else if ((m & ~model[hit].m) != 0) begin eok = 0; ecc = CC_DENIED; epa = pha; end
    else begin eok = 1; ecc = CC_OK; epa = (model[hit].pa + a - model[hit].va) & 'hffffff; end
    checks++;
    if (ok !== eok || cc !== ecc || (eok && pha !== pa_t'(epa))) begin
      failures++; $display("FAIL p=%0d a=%0h m=%b st=%s en=%b: ok=%b pa=%0h cc=%s want %b %0h %s", p, a, m, st.name(), en, ok, pha, cc.name(), eok, epa, ecc.name());
    end
  endtask

  initial begin
    foreach (model[i]) model[i].v = 0;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int i = 0; i < 12; i++)
      wr(i, i % 4, 'h10000 * (i / 4), 'h8000, 'h1000 * i, 4'($urandom_range(1, 15)));
    // area boundaries: first, last and one past the last byte of each record
    for (int i = 0; i < 12; i++) begin
      chk(i % 4, 'h10000 * (i / 4), 4'b0000, ST_NONPRIV, 1);
      chk(i % 4, 'h10000 * (i / 4) + 'h7fff, 4'b0000, ST_NONPRIV, 1);
      chk(i % 4, 'h10000 * (i / 4) + 'h8000, 4'b0000, ST_NONPRIV, 1);
    end
    repeat (4000)
      chk($urandom_range(0, 4), $urandom_range(0, 'h40000), 4'(1 << $urandom_range(0, 3)),
          ($urandom_range(0, 9) == 0) ? ST_HYPER : ST_NONPRIV, $urandom_range(0, 9) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
