// ttfs_layer: one fully connected layer of TTFS neurons with active dendrites.
//
// The layer is built from the blocks of the architecture: an input FIFO of
// pre-synaptic spike addresses, a processing controller that drains it, a
// memory controller in front of the synapse memory (one J x QS word per input
// neuron) and the dendrite memory (one J x QD word per task), a neural cluster
// of J NPUs, a main controller that sequences each timestep and talks to the
// neighbouring layers, and an output FIFO of the addresses of neurons that
// fired. With USE_DENDRITES = 0 (the output layer of the network) there is no
// dendrite memory and every delay is zero.
//
// Upstream link: push addresses with adr_in/adr_in_valid (accepted when
// adr_in_ready), then raise req_in; ack_out rises once they are all
// integrated; drop req_in; ack_out drops. Downstream link: the same roles
// reversed on adr_out/req_out/ack_in. timestep is the index of the timestep
// being processed (0 for the first request after LOAD_TASK); it is valid
// alongside adr_out. Configuration writes (cfg_*) go to the synapse memory
// (cfg_sel_dend = 0: row = input neuron, col = output neuron, data = weight)
// or the dendrite memory (row = task, col = neuron, data = delay) and must be
// made while the layer is idle.
module ttfs_layer #(
  parameter int unsigned I             = 784,
  parameter int unsigned J             = 400,
  parameter int unsigned N_TASKS       = 5,
  parameter bit          USE_DENDRITES = 1'b1,
  parameter int unsigned QS            = ttfs_pkg::QS_DEF,
  parameter int unsigned QD            = ttfs_pkg::QD_DEF,
  parameter int unsigned QV            = ttfs_pkg::QV_DEF,
  localparam int unsigned IW = $clog2(I),
  localparam int unsigned JW = (J > 1) ? $clog2(J) : 1,
  localparam int unsigned TW = $clog2(N_TASKS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // task
  input  logic                      load_task,
  input  logic [TW-1:0]             task_id,
  input  logic signed [QV-1:0]      vth,
  // upstream
  input  logic                      req_in,
  output logic                      ack_out,
  input  logic [IW-1:0]             adr_in,
  input  logic                      adr_in_valid,
  output logic                      adr_in_ready,
  // downstream
  output logic                      req_out,
  input  logic                      ack_in,
  output logic [JW-1:0]             adr_out,
  output logic                      adr_out_valid,
  input  logic                      adr_out_ready,
  output logic [ttfs_pkg::TS_W-1:0] timestep,
  // configuration
  input  logic                      cfg_we,
  input  logic                      cfg_sel_dend,
  input  logic [IW-1:0]             cfg_row,
  input  logic [JW-1:0]             cfg_col,
  input  logic [7:0]                cfg_data,
  // status
  output logic                      idle
);
  // input FIFO
  logic          ififo_full, ififo_empty, ififo_pop;
  logic [IW-1:0] ififo_dout;
  logic [$clog2(I+1)-1:0] ififo_count;

  sync_fifo #(.WIDTH(IW), .DEPTH(I)) u_input_fifo (
    .clk, .rst_n,
    .push  (adr_in_valid && adr_in_ready),
    .din   (adr_in),
    .pop   (ififo_pop),
    .dout  (ififo_dout),
    .full  (ififo_full),
    .empty (ififo_empty),
    .count (ififo_count)
  );
  assign adr_in_ready = !ififo_full;

  // processing controller
  logic          proc_start, proc_done, syn_rd_req, syn_valid, accumulate;
  logic [IW-1:0] syn_rd_addr;

  processing_ctrl #(.I(I)) u_processing_ctrl (
    .clk, .rst_n,
    .start      (proc_start),
    .done       (proc_done),
    .fifo_empty (ififo_empty),
    .fifo_dout  (ififo_dout),
    .fifo_pop   (ififo_pop),
    .rd_req     (syn_rd_req),
    .rd_addr    (syn_rd_addr),
    .rd_valid   (syn_valid),
    .accumulate (accumulate)
  );

  // memory controller and memories
  logic          dend_rd_req, dend_valid;
  logic [TW-1:0] dend_rd_addr;
  logic          syn_re, syn_we, dend_re, dend_we;
  logic [IW-1:0] syn_raddr, syn_waddr;
  logic [TW-1:0] dend_raddr, dend_waddr;
  logic [JW-1:0] syn_wcol, dend_wcol;
  logic [7:0]    syn_wdata, dend_wdata;

  memory_ctrl #(.I(I), .J(J), .N_TASKS(N_TASKS), .CW(8)) u_memory_ctrl (
    .clk, .rst_n,
    .syn_rd_req, .syn_rd_addr, .syn_valid,
    .dend_rd_req, .dend_rd_addr, .dend_valid,
    .cfg_we, .cfg_sel_dend, .cfg_row, .cfg_col, .cfg_data,
    .syn_re, .syn_raddr, .syn_we, .syn_waddr, .syn_wcol, .syn_wdata,
    .dend_re, .dend_raddr, .dend_we, .dend_waddr, .dend_wcol, .dend_wdata
  );

  logic [J-1:0][QS-1:0] syn_row;
  logic [J-1:0][QD-1:0] dend_row;

  synapse_memory #(.DEPTH(I), .J(J), .QS(QS)) u_synapse_memory (
    .clk,
    .re    (syn_re),
    .raddr (syn_raddr),
    .rdata (syn_row),
    .we    (syn_we),
    .waddr (syn_waddr),
    .wcol  (syn_wcol),
    .wdata (syn_wdata[QS-1:0])
  );

  if (USE_DENDRITES) begin : g_dend
    dendrite_memory #(.N_TASKS(N_TASKS), .J(J), .QD(QD)) u_dendrite_memory (
      .clk,
      .re    (dend_re),
      .raddr (dend_raddr),
      .rdata (dend_row),
      .we    (dend_we),
      .waddr (dend_waddr),
      .wcol  (dend_wcol),
      .wdata (dend_wdata[QD-1:0])
    );
  end else begin : g_no_dend
    assign dend_row = '0;
  end

  // neural cluster
  logic         npu_clear, npu_load_delay, npu_update, npu_evaluate;
  logic [J-1:0] spikes, spiked;

  neural_cluster #(.J(J), .QS(QS), .QD(QD), .QV(QV)) u_neural_cluster (
    .clk, .rst_n,
    .clear      (npu_clear),
    .load_delay (npu_load_delay),
    .delay      (dend_row),
    .accumulate (accumulate),
    .w          (syn_row),
    .update     (npu_update),
    .evaluate   (npu_evaluate),
    .vth        (vth),
    .spike      (spikes),
    .spiked     (spiked)
  );

  // output FIFO
  logic          ofifo_push, ofifo_pop, ofifo_full, ofifo_empty;
  logic [JW-1:0] ofifo_din;
  logic [$clog2(J+1)-1:0] ofifo_count;

  sync_fifo #(.WIDTH(JW), .DEPTH(J)) u_output_fifo (
    .clk, .rst_n,
    .push  (ofifo_push),
    .din   (ofifo_din),
    .pop   (ofifo_pop),
    .dout  (adr_out),
    .full  (ofifo_full),
    .empty (ofifo_empty),
    .count (ofifo_count)
  );

  // main controller
  main_ctrl #(.J(J), .N_TASKS(N_TASKS)) u_main_ctrl (
    .clk, .rst_n,
    .load_task, .task_id,
    .req_in, .ack_out,
    .req_out, .ack_in, .adr_out_valid, .adr_out_ready,
    .proc_start, .proc_done,
    .dend_rd_req, .dend_rd_addr, .dend_valid,
    .npu_clear, .npu_load_delay, .npu_update, .npu_evaluate,
    .spikes,
    .ofifo_push, .ofifo_din, .ofifo_empty, .ofifo_pop,
    .timestep, .idle
  );

endmodule
