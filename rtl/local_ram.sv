// local_ram: the local RAM of the physical memory control unit, a
// single-port synchronous word memory.
//
// One access per clock: with en and we the word at addr is written; with en
// and !we it is read and appears on rdata in the next clock. The contents are
// cleared to zero at start-up (an initial block, for simulation; a real macro
// would not be). Its size is this design's choice; the architecture gives none.
module local_ram #(
  parameter int WORDS = 16384,
  parameter int W     = 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
