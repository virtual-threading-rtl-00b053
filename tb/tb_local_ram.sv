// tb_local_ram: random writes and reads against an associative-array model;
// checks one-clock read latency and that a read of a never-written word is 0.
module tb_local_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, we = 0; logic [9:0] addr = '0; logic [31:0] wdata = '0, rdata;
  local_ram #(.WORDS(1024), .W(32)) dut (.*);
  int checks = 0, failures = 0;
  logic [31:0] model [int];
  initial begin
    @(posedge clk);
    repeat (3000) begin
      int a; a = $urandom_range(0, 1023);
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        en = 1; we = 1; addr = 10'(a); wdata = $urandom;
        model[a] = wdata;
        @(negedge clk); en = 0;
      end else begin
        en = 1; we = 0; addr = 10'(a);
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== (model.exists(a) ? model[a] : 32'd0)) begin failures++; $display("FAIL a=%0d got %0h", a, rdata); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
