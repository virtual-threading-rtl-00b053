// tb_cache_ram_cu: three requesters issue random reads and writes into the
// shared RAM. Checks read data against a model, that each answer comes exactly
// one clock after its grant, that only one request is granted per clock, and
// that with all three requesting continuously the grants rotate.
module tb_cache_ram_cu;
  import vthm_pkg::*;
  localparam int WORDS = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] valid = '0, ready, we = '0, rvalid; logic [7:0] addr [3]; word_t wdata [3]; word_t rdata;
  cache_ram_cu #(.NREQ(3), .WORDS(WORDS)) dut (.*);
  int checks = 0, failures = 0;
  word_t model [WORDS];
  logic [2:0] gq; logic rd_q; word_t exp_q;
  int grants [3];
  initial begin
    foreach (model[i]) model[i] = '0;
    foreach (addr[i]) begin addr[i] = '0; wdata[i] = '0; end
  end
  always @(posedge clk) begin
    if (rst_n) begin
      if (gq != '0) begin
        checks++;
        if (rvalid != gq || (rd_q && rdata !== exp_q)) begin failures++; $display("FAIL rvalid %b want %b rdata %0h want %0h", rvalid, gq, rdata, exp_q); end
      end
      gq <= ready & valid;
      rd_q <= 1'b0;
      for (int r = 0; r < 3; r++) if (ready[r] && valid[r]) begin
        grants[r]++;
        if (we[r]) model[addr[r]] = wdata[r]; else begin rd_q <= 1'b1; exp_q <= model[addr[r]]; end
      end
      if ($countones(ready) > 1) begin failures++; $display("FAIL two grants"); end
      for (int r = 0; r < 3; r++) if (!valid[r] || ready[r]) begin
        valid[r] <= ($urandom_range(0, 3) != 0); we[r] <= $urandom_range(0, 1);
        addr[r] <= 8'($urandom_range(0, WORDS-1)); wdata[r] <= $urandom;
      end
    end
  end
  initial begin
    gq = '0; rd_q = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (grants[0] < 600 || grants[1] < 600 || grants[2] < 600) begin failures++; $display("FAIL unfair %0d %0d %0d", grants[0], grants[1], grants[2]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
