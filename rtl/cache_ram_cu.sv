// cache_ram_cu: the cache and RAM access control unit of the physical memory
// and IO control unit. It shares the local RAM among NREQ requesters (the
// routing unit, the block processing unit and instruction fetch of the
// thread monitor).
//
// Each requester offers a word request with valid/ready; the unit grants one
// per clock, round robin starting after the last winner, and answers the
// winner with rvalid one clock later (rdata holds the word read; a write is
// acknowledged the same way). The architecture names the unit and its local
// RAM and cache; the arbitration, the one-clock timing and the absence of a
// cache (the local cache is not built) are this design's.
module cache_ram_cu
  import vthm_pkg::*;
#(
  parameter int NREQ  = 3,
  parameter int WORDS = 16384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NREQ-1:0]          valid,
  output logic [NREQ-1:0]          ready,
  input  logic [NREQ-1:0]          we,
  input  logic [$clog2(WORDS)-1:0] addr  [NREQ],
  input  word_t                    wdata [NREQ],
  output logic [NREQ-1:0]          rvalid,
  output word_t                    rdata
);
  localparam int RW = (NREQ > 1) ? $clog2(NREQ) : 1;

  logic [RW-1:0] last;
  logic [RW-1:0] win;
  logic          any;

  // round robin: first valid requester after the last winner
  always_comb begin
    any = 1'b0;
    win = '0;
    for (int k = 1; k <= NREQ; k++) begin
      int r;
      r = (int'(last) + k) % NREQ;
      if (!any && valid[r]) begin
        any = 1'b1;
        win = RW'(r);
      end
    end
    ready = '0;
    if (any) ready[win] = 1'b1;
  end

  local_ram #(.WORDS(WORDS), .W(DATA_W)) u_ram (
    .clk, .en(any), .we(we[win]), .addr(addr[win]), .wdata(wdata[win]), .rdata);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last   <= RW'(NREQ-1);
      rvalid <= '0;
    end else begin
      rvalid <= ready;
      if (any) last <= win;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_one_grant: assert ($onehot0(ready));
  end
endmodule
