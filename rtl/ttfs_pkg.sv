// ttfs_pkg: widths and types shared by the TTFS active-dendrite network.
//
// The word widths follow the quantised deployment of the network: weights
// are 4-bit signed (Q_s = 4), dendritic delays 8-bit unsigned (Q_d = 8) and
// membrane potentials 11-bit signed. The timestep counter width and the state
// encoding of the layer controller are choices of this design.
package ttfs_pkg;

  // Default word widths.
  localparam int unsigned QS_DEF = 4;   // synaptic weight, signed
  localparam int unsigned QD_DEF = 8;   // dendritic delay, unsigned, in timesteps
  localparam int unsigned QV_DEF = 11;  // membrane potential, signed

  // Width of the timestep index reported with output spikes (T_max = 450 fits).
  localparam int unsigned TS_W = 16;

  // States of the per-layer main controller.
  typedef enum logic [3:0] {
    MC_IDLE,       // wait for LOAD_TASK or an upstream request
    MC_LOAD,       // read the dendrite memory row of the task, clear neurons
    MC_LOAD_WAIT,  // dendrite row arrives: LOAD DELAY
    MC_ACCUM,      // processing controller drains the input FIFO (ACCUMULATE)
    MC_UPDATE,     // UPDATE STATE: membrane += synaptic register
    MC_EVAL,       // EVALUATE: threshold, down counter, SPIKED
    MC_COLLECT,    // push the addresses of new spikes into the output FIFO
    MC_SEND,       // move the output FIFO to the next layer's input FIFO
    MC_REQ,        // raise the request, wait for the acknowledge
    MC_REL         // drop the request, wait for the acknowledge to drop
  } main_state_e;

  // Saturating add of two signed values to a W-bit signed result.
  function automatic logic signed [31:0] sat_add(input logic signed [31:0] a,
                                                 input logic signed [31:0] b,
                                                 input int unsigned w);
    logic signed [31:0] s, hi, lo;
    s  = a + b;
    hi = (32'sd1 <<< (w - 1)) - 32'sd1;
    lo = -(32'sd1 <<< (w - 1));
    if (s > hi) return hi;
    if (s < lo) return lo;
    return s;
  endfunction

endpackage
