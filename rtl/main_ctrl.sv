// main_ctrl: timestep sequencer and inter-layer handshake of one layer.
//
// A sample starts with LOAD_TASK: the controller reads the dendrite-memory word
// of TASK_ID, clears every neuron and loads each down counter with its delay
// (LOAD DELAY). After that the layer runs one timestep per upstream request:
//
//   ACCUM    REQ_IN seen: the processing controller drains the input FIFO,
//            every popped address adding its weight row (ACCUMULATE). When it
//            is done, ACK_OUT rises, so the upstream layer may go on.
//   UPDATE   UPDATE STATE: each membrane adds its synaptic register.
//   EVAL     EVALUATE: threshold test and down counters.
//   COLLECT  a priority encoder turns the NPUs that fired into addresses,
//            lowest index first, one per cycle, into the output FIFO.
//   SEND     the output FIFO is moved to the next layer's input FIFO
//            (adr_out with valid/ready).
//   REQ/REL  4-phase handshake: raise REQ_OUT, wait for ACK_IN, drop REQ_OUT,
//            wait for ACK_IN to drop. Then the timestep index advances.
//
// ACK_OUT falls after REQ_IN falls; a new request is taken only once it has.
// A timestep with no input spikes still runs (an empty request), since the
// membranes keep ramping. The handshake, LOAD_TASK/TASK_ID and the NPU control
// names follow the architecture; the order of the phases, when ACK_OUT rises,
// the priority encoder and LOAD_TASK clearing the neurons are this design's.
// Timing: with n input and m output spikes and an immediate acknowledge from
// downstream, one timestep takes about n + 2m + 11 cycles.
module main_ctrl #(
  parameter int unsigned J       = 400,
  parameter int unsigned N_TASKS = 5
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // task selection
  input  logic                          load_task,
  input  logic [$clog2(N_TASKS)-1:0]    task_id,
  // upstream handshake
  input  logic                          req_in,
  output logic                          ack_out,
  // downstream handshake and address stream
  output logic                          req_out,
  input  logic                          ack_in,
  output logic                          adr_out_valid,
  input  logic                          adr_out_ready,
  // processing controller
  output logic                          proc_start,
  input  logic                          proc_done,
  // memory controller (dendrite reads)
  output logic                          dend_rd_req,
  output logic [$clog2(N_TASKS)-1:0]    dend_rd_addr,
  input  logic                          dend_valid,
  // neural cluster
  output logic                          npu_clear,
  output logic                          npu_load_delay,
  output logic                          npu_update,
  output logic                          npu_evaluate,
  input  logic [J-1:0]                  spikes,
  // output FIFO
  output logic                          ofifo_push,
  output logic [(J > 1 ? $clog2(J) : 1)-1:0] ofifo_din,
  input  logic                          ofifo_empty,
  output logic                          ofifo_pop,
  // status
  output logic [ttfs_pkg::TS_W-1:0]     timestep,
  output logic                          idle
);
  import ttfs_pkg::*;
  localparam int unsigned JW = (J > 1) ? $clog2(J) : 1;

  main_state_e state;
  logic [J-1:0] pend;         // spikes still to be queued
  logic         first;        // first COLLECT cycle: take the NPU spike vector
  logic [J-1:0] vec;          // spikes still to be queued, this cycle
  logic         vec_any;
  logic [JW-1:0] vec_idx;     // lowest set bit of vec

  assign vec     = first ? spikes : pend;
  assign vec_any = |vec;

  always_comb begin
    vec_idx = '0;
    for (int k = J - 1; k >= 0; k--)
      if (vec[k]) vec_idx = JW'(k);
  end

  assign dend_rd_req    = (state == MC_LOAD);
  assign dend_rd_addr   = task_id;
  assign npu_clear      = (state == MC_LOAD);
  assign npu_load_delay = (state == MC_LOAD_WAIT) && dend_valid;
  assign proc_start     = (state == MC_IDLE) && req_in && !ack_out && !load_task;
  assign npu_update     = (state == MC_UPDATE);
  assign npu_evaluate   = (state == MC_EVAL);
  assign ofifo_push     = (state == MC_COLLECT) && vec_any;
  assign ofifo_din      = vec_idx;
  assign adr_out_valid  = (state == MC_SEND) && !ofifo_empty;
  assign ofifo_pop      = adr_out_valid && adr_out_ready;
  assign req_out        = (state == MC_REQ);
  assign idle           = (state == MC_IDLE) && !ack_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= MC_IDLE;
      pend     <= '0;
      first    <= 1'b0;
      ack_out  <= 1'b0;
      timestep <= '0;
    end else begin
      if (ack_out && !req_in) ack_out <= 1'b0;
      unique case (state)
        MC_IDLE: begin
          if (load_task)       state <= MC_LOAD;
          else if (proc_start) state <= MC_ACCUM;
        end
        MC_LOAD:      state <= MC_LOAD_WAIT;
        MC_LOAD_WAIT: if (dend_valid) begin
          state    <= MC_IDLE;
          timestep <= '0;
        end
        MC_ACCUM: if (proc_done) begin
          ack_out <= 1'b1;
          state   <= MC_UPDATE;
        end
        MC_UPDATE: state <= MC_EVAL;
        MC_EVAL: begin
          state <= MC_COLLECT;
          first <= 1'b1;
        end
        MC_COLLECT: begin
          first <= 1'b0;
          if (vec_any) begin
            pend          <= vec;
            pend[vec_idx] <= 1'b0;
          end else begin
            state <= MC_SEND;
          end
        end
        MC_SEND: if (ofifo_empty) state <= MC_REQ;
        MC_REQ:  if (ack_in) state <= MC_REL;
        MC_REL:  if (!ack_in) begin
          state    <= MC_IDLE;
          timestep <= timestep + 1'b1;
        end
        default: state <= MC_IDLE;
      endcase
    end
  end

  // 4-phase rules: the upstream holds REQ_IN until ACK_OUT answers, and drops
  // it before asking again; the downstream answers only a raised request.
  a_req_in_held:  assert property (@(posedge clk) disable iff (!rst_n)
                                   $fell(req_in) |-> ack_out);
  a_ack_in_asked: assert property (@(posedge clk) disable iff (!rst_n)
                                   $rose(ack_in) |-> req_out);
  a_load_in_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                   load_task |-> state == MC_IDLE);

endmodule
