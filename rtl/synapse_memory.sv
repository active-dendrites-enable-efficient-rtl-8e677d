// synapse_memory: weight store of one fully connected layer.
//
// Word k holds the weights from pre-synaptic neuron k to all J post-synaptic
// neurons, J signed QS-bit fields, neuron j in bits [j*QS +: QS]. Because the
// word address is the index of the spiking input neuron, one read delivers
// everything the J neurons need for that spike and all of them update in
// parallel. This organisation (depth = number of inputs, width = J x Q_s)
// follows the architecture; the synchronous one-cycle read and the
// one-weight-at-a-time write port are this design's choices.
//
// Interface: re/raddr -> rdata one cycle later (rdata holds otherwise).
// we/waddr/wcol/wdata writes weight wcol of word waddr.
module synapse_memory #(
  parameter int unsigned DEPTH = 784,  // pre-synaptic neurons I
  parameter int unsigned J     = 400,  // post-synaptic neurons
  parameter int unsigned QS    = ttfs_pkg::QS_DEF
) (
  input  logic                                   clk,
  input  logic                                   re,
  input  logic [$clog2(DEPTH)-1:0]               raddr,
  output logic [J-1:0][QS-1:0]                   rdata,
  input  logic                                   we,
  input  logic [$clog2(DEPTH)-1:0]               waddr,
  input  logic [(J > 1 ? $clog2(J) : 1)-1:0]     wcol,
  input  logic [QS-1:0]                          wdata
);
  logic [J-1:0][QS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wcol] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
