// neural_cluster: the J neuron processing units of a layer.
//
// All NPUs share the control strobes of the layer controller; neuron j takes
// weight field j of the synapse memory word and delay field j of the dendrite
// memory word, so one memory read updates every neuron at once. The spike and
// spiked outputs of the NPUs are gathered into J-bit vectors for the
// controller. The layer's firing threshold is common to all its neurons
// (this design's choice).
module neural_cluster #(
  parameter int unsigned J  = 400,
  parameter int unsigned QS = ttfs_pkg::QS_DEF,
  parameter int unsigned QD = ttfs_pkg::QD_DEF,
  parameter int unsigned QV = ttfs_pkg::QV_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 load_delay,
  input  logic [J-1:0][QD-1:0] delay,
  input  logic                 accumulate,
  input  logic [J-1:0][QS-1:0] w,
  input  logic                 update,
  input  logic                 evaluate,
  input  logic signed [QV-1:0] vth,
  output logic [J-1:0]         spike,
  output logic [J-1:0]         spiked
);
  for (genvar j = 0; j < J; j++) begin : g_npu
    logic signed [QV-1:0] vm, syn;
    npu #(.QS(QS), .QD(QD), .QV(QV)) u_npu (
      .clk, .rst_n, .clear, .load_delay,
      .delay      (delay[j]),
      .accumulate,
      .w          (signed'(w[j])),
      .update, .evaluate, .vth,
      .spike      (spike[j]),
      .spiked     (spiked[j]),
      .vm         (vm),
      .syn        (syn)
    );
  end

endmodule
