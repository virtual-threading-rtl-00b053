// tb_routing_unit: sends reads and writes to every region of the physical
// address map and checks that each reaches exactly the right target with the
// right offset and data, and that the answer carries the target's read data.
module tb_routing_unit;
  import vthm_pkg::*;
  localparam int WORDS = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, req_we = 0; pa_t req_pa = '0; word_t req_wdata = '0;
  logic rsp_valid; word_t rsp_rdata;
  logic ram_valid, ram_ready, ram_we, ram_rvalid = 0; logic [9:0] ram_addr; word_t ram_wdata, ram_rdata = '0;
  logic icu_we; logic [7:0] icu_addr; word_t icu_wdata, icu_rdata;
  logic bpu_we; logic [1:0] bpu_addr; word_t bpu_wdata, bpu_rdata;
  logic ext_valid, ext_ready, ext_we, ext_rvalid = 0; pa_t ext_pa; word_t ext_wdata, ext_rdata = '0;
  routing_unit #(.WORDS(WORDS)) dut (.*);
  assign ram_ready = ram_valid; assign ext_ready = ext_valid;
  assign icu_rdata = 32'h1C000000 | word_t'(icu_addr);
  assign bpu_rdata = 32'hB0000000 | word_t'(bpu_addr);
  string last_tgt; pa_t last_pa; word_t last_wd; int hits;
  always @(posedge clk) begin
    ram_rvalid <= ram_valid; ext_rvalid <= ext_valid;
    if (ram_valid) begin hits++; last_tgt = "ram"; last_pa = pa_t'({ram_addr, 2'b00}); last_wd = ram_wdata; ram_rdata <= 32'hAA000000 | word_t'(ram_addr); end
    if (ext_valid) begin hits++; last_tgt = "ext"; last_pa = ext_pa; last_wd = ext_wdata; ext_rdata <= 32'hEE000000 | word_t'(ext_pa[15:0]); end
    if (icu_we) begin hits++; last_tgt = "icu"; last_pa = ICU_BASE | pa_t'({icu_addr, 2'b00}); last_wd = icu_wdata; end
    if (bpu_we) begin hits++; last_tgt = "bpu"; last_pa = BPU_BASE | pa_t'({bpu_addr, 2'b00}); last_wd = bpu_wdata; end
  end
  int checks = 0, failures = 0;
  task automatic acc(bit w, pa_t pa, string tgt, word_t want_rd);
    word_t wd; wd = $urandom;
    hits = 0; last_tgt = "";
    req_valid <= 1; req_we <= w; req_pa <= pa; req_wdata <= wd;
    @(posedge clk); while (!req_ready) @(posedge clk);
    req_valid <= 0;
    while (!rsp_valid) @(posedge clk);
    checks++;
    if (w) begin
      if (hits != 1 || last_tgt != tgt || last_pa != pa || last_wd != wd) begin failures++; $display("FAIL write %0h: %s %0h hits %0d", pa, last_tgt, last_pa, hits); end
    end else if (rsp_rdata !== want_rd) begin failures++; $display("FAIL read %0h: %0h want %0h", pa, rsp_rdata, want_rd); end
    @(posedge clk);
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    acc(1, 24'h000010, "ram", 0); acc(0, 24'h000010, "ram", 32'hAA000004);
    acc(1, 24'h000ffc, "ram", 0); acc(0, 24'h000ffc, "ram", 32'hAA0003ff);
    acc(1, 24'h001000, "ext", 0); acc(0, 24'h001000, "ext", 32'hEE001000);
    acc(1, 24'h800008, "icu", 0); acc(0, 24'h800024, "icu", 32'h1C000009);
    acc(1, 24'h80100c, "bpu", 0); acc(0, 24'h801004, "bpu", 32'hB0000001);
    acc(1, 24'h802000, "ext", 0); acc(0, 24'h90ab00, "ext", 32'hEE00ab00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
