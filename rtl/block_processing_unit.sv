// block_processing_unit: the block processing unit of the MIOMU, an improved
// direct-memory-access engine that moves blocks of data without occupying a
// processor.
//
// A thread programs it by writing its control registers (word offsets from
// BPU_BASE): 0 source address, 1 destination address (byte physical
// addresses, word aligned), 2 length in words, 3 control (any write starts
// the copy when idle). Reading offset 3 gives {completed blocks[15:0],
// 15'b0, busy}. The copy reads and writes one word at a time through the
// memory port, so a block of N words takes about 4N clocks plus
// arbitration; done pulses for one clock at the end.
//
// The architecture describes the function: memory-memory, memory-IO and
// IO-IO block transfers, and page swapping, carried out in the MIOMU on
// access controlled addresses. This design builds the memory-to-memory copy
// within the local RAM on physical addresses; the other transfer kinds and
// the address checking of block transfers are not built.
module block_processing_unit
  import vthm_pkg::*;
#(
  parameter int WORDS = 16384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control registers
  input  logic                     reg_we,
  input  logic [1:0]               reg_addr,
  input  word_t                    reg_wdata,
  output word_t                    reg_rdata,
  // memory port
  output logic                     mem_valid,
  input  logic                     mem_ready,
  output logic                     mem_we,
  output logic [$clog2(WORDS)-1:0] mem_addr,
  output word_t                    mem_wdata,
  input  logic                     mem_rvalid,
  input  word_t                    mem_rdata,
  output logic                     busy,
  output logic                     done
);
  localparam int AW = $clog2(WORDS);
  typedef enum logic [2:0] {B_IDLE, B_RD, B_RDW, B_WR, B_WRW} bst_e;

  bst_e   st;
  word_t  src, dst, len, idx, buf_q;
  logic [15:0] nblocks;

  assign busy      = (st != B_IDLE);
  assign mem_valid = (st == B_RD) || (st == B_WR);
  assign mem_we    = (st == B_WR);
  assign mem_addr  = (st == B_WR) ? AW'((dst >> 2) + idx) : AW'((src >> 2) + idx);
  assign mem_wdata = buf_q;

  always_comb begin
    unique case (reg_addr)
      2'd0: reg_rdata = src;
      2'd1: reg_rdata = dst;
      2'd2: reg_rdata = len;
      default: reg_rdata = {nblocks, 15'd0, busy};
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= B_IDLE; src <= '0; dst <= '0; len <= '0; idx <= '0; buf_q <= '0;
      nblocks <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (reg_we && st == B_IDLE) begin
        unique case (reg_addr)
          2'd0: src <= reg_wdata;
          2'd1: dst <= reg_wdata;
          2'd2: len <= reg_wdata;
          default: begin
            idx <= '0;
            if (len != '0) st <= B_RD;
            else begin done <= 1'b1; nblocks <= nblocks + 1'b1; end
          end
        endcase
      end
      unique case (st)
        B_RD:  if (mem_ready) st <= B_RDW;
        B_RDW: if (mem_rvalid) begin buf_q <= mem_rdata; st <= B_WR; end
        B_WR:  if (mem_ready) st <= B_WRW;
        B_WRW: if (mem_rvalid) begin
                 if (idx + 1'b1 == len) begin
                   st <= B_IDLE; done <= 1'b1; nblocks <= nblocks + 1'b1;
                 end else begin
                   idx <= idx + 1'b1; st <= B_RD;
                 end
               end
        default: ;
      endcase
    end
  end
endmodule
