// npu: neuron processing unit of the TTFS neuron with a dendritic delay.
//
// The neuron's membrane potential is a ramp, V(t) = sum_i W_i (t - t_i) over the
// inputs that have spiked. The synaptic register holds the current slope: it
// adds W each time an input spike arrives (ACCUMULATE). Once per timestep, after
// all input spikes of that timestep, the membrane register adds the slope
// (UPDATE STATE). EVALUATE then compares V_m with V_th. The first crossing arms
// the down counter, which was loaded with the delay of the current task's
// dendritic segment (LOAD DELAY); from then on the counter steps down once per
// EVALUATE and the neuron fires when it stands at zero, so the spike time is
// t_cross + delay. A neuron fires at most once per sample; one that would fire
// after the observation window never does, which gates it out of the network.
//
// This structure follows the neuron diagram of the architecture. Choices of
// this design: the synaptic register is QV bits wide, both registers saturate,
// clear resets the neuron for a new sample, and the crossing test is V_m >= V_th.
//
// Interface: all controls are single-cycle strobes from the layer controller,
// at most one per cycle except clear+load_delay which may coincide.
// spike pulses one cycle after the EVALUATE that fires; spiked stays high.
module npu #(
  parameter int unsigned QS = ttfs_pkg::QS_DEF,
  parameter int unsigned QD = ttfs_pkg::QD_DEF,
  parameter int unsigned QV = ttfs_pkg::QV_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,       // new sample: zero all state
  input  logic                 load_delay,  // LOAD DELAY
  input  logic [QD-1:0]        delay,       // DELAY from the dendrite memory
  input  logic                 accumulate,  // ACCUMULATE
  input  logic signed [QS-1:0] w,           // W from the synapse memory
  input  logic                 update,      // UPDATE STATE
  input  logic                 evaluate,    // EVALUATE
  input  logic signed [QV-1:0] vth,
  output logic                 spike,       // fired at the last EVALUATE
  output logic                 spiked,      // SPIKED
  output logic signed [QV-1:0] vm,          // membrane register
  output logic signed [QV-1:0] syn          // synaptic register
);
  import ttfs_pkg::sat_add;

  logic [QD-1:0] cnt;      // down counter
  logic          crossed;  // threshold crossed, counter running

  logic cross_now;
  assign cross_now = crossed || (vm >= vth);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      syn     <= '0;
      vm      <= '0;
      cnt     <= '0;
      crossed <= 1'b0;
      spiked  <= 1'b0;
      spike   <= 1'b0;
    end else begin
      spike <= 1'b0;
      if (clear) begin
        syn     <= '0;
        vm      <= '0;
        crossed <= 1'b0;
        spiked  <= 1'b0;
      end
      if (load_delay) cnt <= delay;
      if (accumulate && !clear)
        syn <= QV'(sat_add(32'(syn), 32'(w), QV));
      if (update && !clear)
        vm <= QV'(sat_add(32'(vm), 32'(syn), QV));
      if (evaluate && !clear && !spiked && cross_now) begin
        crossed <= 1'b1;
        if (cnt == '0) begin
          spiked <= 1'b1;
          spike  <= 1'b1;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

endmodule
