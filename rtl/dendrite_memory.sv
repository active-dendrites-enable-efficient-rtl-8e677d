// dendrite_memory: dendritic delays of one layer, one word per task.
//
// Word n holds, for every neuron j of the layer, the delay f(u_jn) that the
// dendritic segment selected by task n adds to the neuron's spike time,
// quantised to an unsigned QD-bit number of timesteps, neuron j in bits
// [j*QD +: QD]. The organisation (depth = number of tasks, width = J x Q_d, so
// all delays load at once) follows the architecture; treating the delay as a
// whole number of timesteps, the synchronous one-cycle read and the
// one-delay-at-a-time write port are this design's choices.
//
// Interface: re/raddr -> rdata one cycle later. we/waddr/wcol/wdata writes the
// delay of neuron wcol for task waddr.
module dendrite_memory #(
  parameter int unsigned N_TASKS = 5,
  parameter int unsigned J       = 400,
  parameter int unsigned QD      = ttfs_pkg::QD_DEF
) (
  input  logic                                   clk,
  input  logic                                   re,
  input  logic [$clog2(N_TASKS)-1:0]             raddr,
  output logic [J-1:0][QD-1:0]                   rdata,
  input  logic                                   we,
  input  logic [$clog2(N_TASKS)-1:0]             waddr,
  input  logic [(J > 1 ? $clog2(J) : 1)-1:0]     wcol,
  input  logic [QD-1:0]                          wdata
);
  logic [J-1:0][QD-1:0] mem [N_TASKS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wcol] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
