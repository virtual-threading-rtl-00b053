// tb_block_processing_unit: programs three block copies through the control
// registers against a behavioural memory that grants at random. Checks the
// destination contents, that the source and the rest of memory are
// untouched, the busy/done/status behaviour, a zero-length block, and the
// duration of an uncontended copy (4 clocks per word).
module tb_block_processing_unit;
  import vthm_pkg::*;
  localparam int WORDS = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_we = 0; logic [1:0] reg_addr = '0; word_t reg_wdata = '0, reg_rdata;
  logic mem_valid, mem_ready, mem_we, mem_rvalid = 0; logic [8:0] mem_addr; word_t mem_wdata, mem_rdata = '0;
  logic busy, done;
  block_processing_unit #(.WORDS(WORDS)) dut (.*);
  word_t mem [WORDS], ref_mem [WORDS];
  int checks = 0, failures = 0, ndone = 0;
  bit contend = 1;
  assign mem_ready = mem_valid && (!contend || ($urandom_range(0, 2) == 0));
  always @(posedge clk) begin
    mem_rvalid <= rst_n && mem_valid && mem_ready;
    if (rst_n && mem_valid && mem_ready) begin
      if (mem_we) mem[mem_addr] <= mem_wdata; else mem_rdata <= mem[mem_addr];
    end
    if (rst_n && done) ndone++;
  end
  task automatic wreg(int a, int v); reg_we <= 1; reg_addr <= 2'(a); reg_wdata <= word_t'(v); @(posedge clk); reg_we <= 0; endtask
  task automatic copy(int s, int d, int n, output int cycles);
    int t;
    wreg(0, s * 4); wreg(1, d * 4); wreg(2, n); wreg(3, 1);
    t = 0;
    @(posedge clk);
    while (busy) begin @(posedge clk); t++; end
    cycles = t;
    for (int i = 0; i < n; i++) ref_mem[d + i] = ref_mem[s + i];
  endtask
  task automatic compare(string what);
    int bad; bad = 0;
    for (int i = 0; i < WORDS; i++) if (mem[i] !== ref_mem[i]) bad++;
    checks++; if (bad) begin failures++; $display("FAIL %s: %0d words differ", what, bad); end
  endtask
  initial begin
    int cyc;
    for (int i = 0; i < WORDS; i++) begin mem[i] = $urandom; ref_mem[i] = mem[i]; end
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    copy(0, 100, 40, cyc); compare("copy 1");
    copy(200, 300, 64, cyc); compare("copy 2");
    copy(10, 0, 0, cyc); compare("zero length");
    contend = 0;
    copy(400, 450, 32, cyc); compare("copy 3");
    checks++; if (cyc < 4 * 32 - 2 || cyc > 4 * 32 + 2) begin failures++; $display("FAIL duration %0d", cyc); end
    reg_addr <= 2'd3; @(posedge clk); #1;
    checks++; if (reg_rdata !== {16'd4, 16'd0}) begin failures++; $display("FAIL status %0h", reg_rdata); end
    checks++; if (ndone != 4) begin failures++; $display("FAIL done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
