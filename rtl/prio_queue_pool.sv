// prio_queue_pool: the prioritized queues buffer pool (FIFO[0] .. FIFO[max-1])
// placed at the entrance of the units of the processor.
//
// One FIFO per priority level. An element pushed with priority p goes to the
// tail of FIFO[p]; the pop side always offers the head of the highest
// non-empty FIFO, so elements leave ordered first by priority and then by
// arrival time. Which end of the pool is the highest priority is this design's
// choice: a larger number is a higher priority.
//
// Interface: valid/ready on both sides. push_ready is low when the FIFO of the
// offered priority is full. The pop side is combinational from the register
// state (no bypass): an element pushed in cycle t can leave in cycle t+1.
// Depth per level is a parameter; the architecture gives no sizes.
module prio_queue_pool #(
  parameter int W     = 32,
  parameter int NPRIO = 8,
  parameter int DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push_valid,
  output logic                     push_ready,
  input  logic [$clog2(NPRIO)-1:0] push_prio,
  input  logic [W-1:0]             push_data,
  output logic                     pop_valid,
  input  logic                     pop_ready,
  output logic [$clog2(NPRIO)-1:0] pop_prio,
  output logic [W-1:0]             pop_data,
  output logic [NPRIO-1:0]         nonempty
);
  localparam int PW = $clog2(NPRIO);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem   [NPRIO][DEPTH];
  logic [AW-1:0] rd_ptr[NPRIO];
  logic [AW-1:0] wr_ptr[NPRIO];
  logic [AW:0]   count [NPRIO];

  always_comb begin
    for (int p = 0; p < NPRIO; p++) nonempty[p] = (count[p] != '0);
  end

  // highest non-empty level
  always_comb begin
    pop_valid = 1'b0;
    pop_prio  = '0;
    for (int p = 0; p < NPRIO; p++) begin
      if (nonempty[p]) begin
        pop_valid = 1'b1;
        pop_prio  = PW'(p);
      end
    end
    pop_data = mem[pop_prio][rd_ptr[pop_prio]];
  end

  assign push_ready = (count[push_prio] != (AW+1)'(DEPTH));

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NPRIO; p++) begin
        rd_ptr[p] <= '0;
        wr_ptr[p] <= '0;
        count[p]  <= '0;
      end
    end else begin
      if (do_push) begin
        mem[push_prio][wr_ptr[push_prio]] <= push_data;
        wr_ptr[push_prio] <= (wr_ptr[push_prio] == AW'(DEPTH-1)) ? '0 : wr_ptr[push_prio] + 1'b1;
      end
      if (do_pop)
        rd_ptr[pop_prio] <= (rd_ptr[pop_prio] == AW'(DEPTH-1)) ? '0 : rd_ptr[pop_prio] + 1'b1;
      for (int p = 0; p < NPRIO; p++) begin
        if ((do_push && push_prio == PW'(p)) && !(do_pop && pop_prio == PW'(p)))
          count[p] <= count[p] + 1'b1;
        else if (!(do_push && push_prio == PW'(p)) && (do_pop && pop_prio == PW'(p)))
          count[p] <= count[p] - 1'b1;
      end
    end
  end

  // a level never holds more than DEPTH elements
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPRIO; p++) a_depth: assert (count[p] <= (AW+1)'(DEPTH));
    end
  end
endmodule
