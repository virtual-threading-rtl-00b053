// tb_multichannel_router: four sources send random packets with random
// destinations and priorities while the destinations accept at random.
// Checks that every packet arrives once, at the right output, in order per
// source/destination pair; that whenever several inputs compete for one
// output the winner has the highest priority among them; that equal-priority
// contenders are all served; and the one-clock latency through an idle output.
module tb_multichannel_router;
  localparam int N = 4, W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  logic [1:0] in_dst [N]; logic [2:0] in_prio [N]; logic [W-1:0] in_data [N], out_data [N];
  multichannel_router #(.NPORTS(N), .W(W), .PRIO_W(3)) dut (.*);
  int checks = 0, failures = 0;
  int sent [N][N], rcvd [N][N];   // [src][dst] sequence numbers
  int nsent = 0, nrcvd = 0, contention = 0;
  bit go = 0;
  // packet: {src[1:0], dst[1:0], prio[2:0], seq[24:0]}
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N; o++) begin
      int maxp, winp, ncont; maxp = -1; winp = -1; ncont = 0;
      for (int i = 0; i < N; i++) if (in_valid[i] && in_dst[i] == 2'(o)) begin
        ncont++; if (int'(in_prio[i]) > maxp) maxp = in_prio[i];
        if (in_ready[i]) winp = in_prio[i];
      end
      if (ncont > 1 && winp >= 0) begin
        contention++; checks++;
        if (winp != maxp) begin failures++; $display("FAIL output %0d served prio %0d, max %0d", o, winp, maxp); end
      end
      if (out_valid[o] && out_ready[o]) begin
        int s, d, q; s = out_data[o][31:30]; d = out_data[o][29:28]; q = out_data[o][24:0];
        checks++; nrcvd++;
        if (d != o || q != rcvd[s][d]) begin failures++; $display("FAIL out %0d got src %0d dst %0d seq %0d want %0d", o, s, d, q, rcvd[s][d]); end
        rcvd[s][d] = q + 1;
      end
    end
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && in_ready[i]) begin nsent++; sent[i][in_dst[i]]++; end
      if (go && (!in_valid[i] || in_ready[i])) begin
        int d; d = $urandom_range(0, N-1);
        in_valid[i] <= ($urandom_range(0, 2) != 0);
        in_dst[i] <= 2'(d); in_prio[i] <= 3'($urandom_range(0, 7));
        in_data[i] <= {2'(i), 2'(d), 3'd0, 25'(sent[i][d])};
      end else if (!go && in_ready[i]) in_valid[i] <= 0;
    end
    for (int o = 0; o < N; o++) out_ready[o] <= go ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
  initial begin
    foreach (sent[i, j]) begin sent[i][j] = 0; rcvd[i][j] = 0; end
    foreach (in_dst[i]) begin in_dst[i] = '0; in_prio[i] = '0; in_data[i] = '0; end
    repeat (3) @(posedge clk); rst_n <= 1; go = 1;
    repeat (4000) @(posedge clk);
    go = 0; repeat (20) @(posedge clk);
    checks++; if (nsent != nrcvd || nsent < 2000) begin failures++; $display("FAIL sent %0d received %0d", nsent, nrcvd); end
    checks++; if (contention < 100) begin failures++; $display("FAIL too little contention %0d", contention); end
    // latency through an idle output
    @(negedge clk); in_valid[2] = 1; in_dst[2] = 1; in_prio[2] = 0; in_data[2] = {2'd2, 2'd1, 3'd0, 25'(sent[2][1])};
    @(posedge clk); #1 in_valid[2] = 0; sent[2][1]++;
    checks++; if (!out_valid[1]) begin failures++; $display("FAIL latency"); end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
