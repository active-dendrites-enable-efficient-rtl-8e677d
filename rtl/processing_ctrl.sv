// processing_ctrl: drains the input queue into the neurons.
//
// When the main controller starts a timestep, this FSM pops the input FIFO one
// address per cycle. Each popped address is a pre-synaptic neuron that spiked;
// it becomes a synapse-memory read through the memory controller, and when the
// word arrives one cycle later the controller raises ACCUMULATE so every NPU
// adds its weight. Once the FIFO is empty and the last read has been
// accumulated, done pulses for one cycle.
//
// Popping addresses and triggering the memory controller follow the
// architecture; the one-address-per-cycle pipeline is this design's.
// Timing: with n addresses queued, done pulses n+2 cycles after start
// (n pops, one cycle for the last read, one to see the pipeline empty).
module processing_ctrl #(
  parameter int unsigned I = 784
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 done,
  // input FIFO
  input  logic                 fifo_empty,
  input  logic [$clog2(I)-1:0] fifo_dout,
  output logic                 fifo_pop,
  // memory controller
  output logic                 rd_req,
  output logic [$clog2(I)-1:0] rd_addr,
  input  logic                 rd_valid,
  // neural cluster
  output logic                 accumulate
);
  typedef enum logic [1:0] {PC_IDLE, PC_POP, PC_DRAIN} pc_state_e;
  pc_state_e state;

  assign fifo_pop   = (state == PC_POP) && !fifo_empty;
  assign rd_req     = fifo_pop;
  assign rd_addr    = fifo_dout;
  assign accumulate = rd_valid;
  assign done       = (state == PC_DRAIN) && !rd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= PC_IDLE;
    else begin
      unique case (state)
        PC_IDLE:  if (start) state <= PC_POP;
        PC_POP:   if (fifo_empty) state <= PC_DRAIN;
        PC_DRAIN: if (!rd_valid) state <= PC_IDLE;
        default:  state <= PC_IDLE;
      endcase
    end
  end

endmodule
