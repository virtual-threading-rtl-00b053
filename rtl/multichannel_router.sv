// multichannel_router: the processor network that joins the thread monitor,
// the executive cluster, the MIOMU and the debugging monitor.
//
// Every unit has a port with an input channel and an output channel. A packet
// offered on an input names its destination port and carries the priority of
// the thread that produced it. For every output the router picks, among the
// inputs addressed to it, the one with the highest priority; among equal
// priorities it rotates, starting after the input it served last. All outputs
// work in parallel, so packets to different destinations pass in the same
// clock. Each output holds one packet in a register: a packet accepted in
// clock t is offered to its destination in clock t+1, and an output can take
// a new packet in the clock its held packet leaves.
//
// That the network is a packet switch serving the units by the priorities of
// the producing threads follows the architecture description. The crossbar
// organisation, the single output register, the round robin among equal
// priorities, and the absence of the network's own swapped local memory are
// this design's choices.
module multichannel_router #(
  parameter int NPORTS = 4,
  parameter int W      = 64,
  parameter int PRIO_W = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPORTS-1:0]         in_valid,
  output logic [NPORTS-1:0]         in_ready,
  input  logic [$clog2(NPORTS)-1:0] in_dst  [NPORTS],
  input  logic [PRIO_W-1:0]         in_prio [NPORTS],
  input  logic [W-1:0]              in_data [NPORTS],
  output logic [NPORTS-1:0]         out_valid,
  input  logic [NPORTS-1:0]         out_ready,
  output logic [W-1:0]              out_data [NPORTS]
);
  localparam int PW = $clog2(NPORTS);

  logic [PW-1:0]     last [NPORTS];
  logic [NPORTS-1:0] sel_any;
  logic [PW-1:0]     sel  [NPORTS];

  always_comb begin
    logic [PRIO_W-1:0] best;
    logic [PW-1:0] i;
    in_ready = '0;
    best     = '0;
    i        = '0;
    for (int o = 0; o < NPORTS; o++) begin
      sel_any[o] = 1'b0;
      sel[o]     = '0;
      best       = '0;
      for (int k = 1; k <= NPORTS; k++) begin
        i = PW'((int'(last[o]) + k) % NPORTS);
        if (in_valid[i] && in_dst[i] == PW'(o) && (!sel_any[o] || in_prio[i] > best)) begin
          sel_any[o] = 1'b1;
          sel[o]     = PW'(i);
          best       = in_prio[i];
        end
      end
      if (sel_any[o] && (!out_valid[o] || out_ready[o])) in_ready[sel[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= '0;
      for (int o = 0; o < NPORTS; o++) begin
        last[o]     <= PW'(NPORTS-1);
        out_data[o] <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (!out_valid[o] || out_ready[o]) begin
          out_valid[o] <= sel_any[o];
          if (sel_any[o]) begin
            out_data[o] <= in_data[sel[o]];
            last[o]     <= sel[o];
          end
        end
      end
    end
  end
endmodule
