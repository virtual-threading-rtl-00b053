// tb_prio_queue_pool: random test of the prioritized queues buffer pool.
// Random pushes with random priorities and random pops; a reference model
// (one queue per priority) predicts which element must leave: the oldest one
// of the highest non-empty priority. Also checks push_ready against the
// per-level depth and that a pushed element can leave in the next clock.
module tb_prio_queue_pool;
  localparam int W = 16, NPRIO = 8, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic           push_valid = 1'b0, push_ready, pop_valid, pop_ready = 1'b0;
  logic [2:0]     push_prio = '0, pop_prio;
  logic [W-1:0]   push_data = '0, pop_data;
  logic [NPRIO-1:0] nonempty;

  prio_queue_pool #(.W(W), .NPRIO(NPRIO), .DEPTH(DEPTH)) u_dut (.*);

  logic [W-1:0] model [NPRIO][$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq;
    seq = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int hi;
      @(negedge clk);
      push_valid = ($urandom_range(0, 99) < ((cyc / 2000) % 2 ? 70 : 40));
      push_prio  = 3'($urandom_range(0, NPRIO-1));
      push_data  = W'(seq);
      pop_ready  = ($urandom_range(0, 99) < 55);
      #1;
      // model predictions
      hi = -1;
      for (int p = 0; p < NPRIO; p++) if (model[p].size() != 0) hi = p;
      checks++;
      if (pop_valid != (hi >= 0)) begin failures++; $display("FAIL pop_valid at %0d", cyc); end
      if (hi >= 0) begin
        checks++;
        if (pop_prio != 3'(hi) || pop_data != model[hi][0]) begin
          failures++; $display("FAIL order at %0d: got p%0d %h want p%0d %h", cyc, pop_prio, pop_data, hi, model[hi][0]);
        end
      end
      checks++;
      if (push_ready != (model[push_prio].size() < DEPTH)) begin failures++; $display("FAIL push_ready"); end
      for (int p = 0; p < NPRIO; p++) begin
        checks++;
        if (nonempty[p] != (model[p].size() != 0)) begin failures++; $display("FAIL nonempty"); end
      end
      @(posedge clk);
      if (pop_valid && pop_ready && hi >= 0) void'(model[hi].pop_front());
      if (push_valid && push_ready) begin model[push_prio].push_back(push_data); seq++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
