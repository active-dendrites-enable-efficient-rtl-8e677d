// ttfs_network: three-layer TTFS spiking network with active dendrites.
//
// The network is 784-400-400-2: an input of 784 pixel neurons, two hidden
// layers of 400 neurons whose spike times are delayed by task-selected
// dendritic segments, and 2 output neurons. Each of the three weight layers
// (L0: 784->400, L1: 400->400, L2: 400->2) is a ttfs_layer; they are chained so
// that the spikes one layer emits in timestep t are the input spikes of the
// next layer in timestep t. The output layer has no dendrites.
//
// Use: write the weights and delays through cfg_* (cfg_layer picks L0..L2),
// set vth, pulse load_task with task_id while idle. Then, for each timestep
// t = 0 .. T_max-1, push the addresses of the input pixels that spike at t on
// in_adr/in_valid (accepted when in_ready) and run a 4-phase handshake on
// in_req/in_ack; the same is done even when no pixel spikes. The output layer
// presents, for every timestep, the addresses of output neurons that fired
// (out_adr/out_valid, out_ready to accept, out_time = t) followed by out_req,
// which the host acknowledges on out_ack. The first output spike is the class.
// Widths, numbers of neurons and of tasks follow the paper's main network; the
// link signalling details and the configuration port are this design's.
module ttfs_network #(
  parameter int unsigned N_IN    = 784,
  parameter int unsigned N_H1    = 400,
  parameter int unsigned N_H2    = 400,
  parameter int unsigned N_OUT   = 2,
  parameter int unsigned N_TASKS = 5,
  parameter int unsigned QS      = ttfs_pkg::QS_DEF,
  parameter int unsigned QD      = ttfs_pkg::QD_DEF,
  parameter int unsigned QV      = ttfs_pkg::QV_DEF,
  localparam int unsigned W_IN   = $clog2(N_IN),
  localparam int unsigned W_H1   = $clog2(N_H1),
  localparam int unsigned W_H2   = $clog2(N_H2),
  localparam int unsigned W_OUT  = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned TW     = $clog2(N_TASKS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // task selection and thresholds (index 0: L0, 1: L1, 2: L2)
  input  logic                      load_task,
  input  logic [TW-1:0]             task_id,
  input  logic [2:0][QV-1:0]        vth,
  // input spikes
  input  logic                      in_req,
  output logic                      in_ack,
  input  logic [W_IN-1:0]           in_adr,
  input  logic                      in_valid,
  output logic                      in_ready,
  // output spikes
  output logic                      out_req,
  input  logic                      out_ack,
  output logic [W_OUT-1:0]          out_adr,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [ttfs_pkg::TS_W-1:0] out_time,
  // configuration
  input  logic                      cfg_we,
  input  logic [1:0]                cfg_layer,
  input  logic                      cfg_sel_dend,
  input  logic [W_IN-1:0]           cfg_row,
  input  logic [W_H1-1:0]           cfg_col,
  input  logic [7:0]                cfg_data,
  // status
  output logic                      idle
);
  // L0 -> L1 link
  logic            r01, a01, v01, y01;
  logic [W_H1-1:0] d01;
  // L1 -> L2 link
  logic            r12, a12, v12, y12;
  logic [W_H2-1:0] d12;

  logic [2:0]                     idle_l;
  logic [2:0][ttfs_pkg::TS_W-1:0] ts;

  ttfs_layer #(.I(N_IN), .J(N_H1), .N_TASKS(N_TASKS), .USE_DENDRITES(1'b1),
               .QS(QS), .QD(QD), .QV(QV)) u_l0 (
    .clk, .rst_n, .load_task, .task_id,
    .vth           (signed'(vth[0])),
    .req_in        (in_req),
    .ack_out       (in_ack),
    .adr_in        (in_adr),
    .adr_in_valid  (in_valid),
    .adr_in_ready  (in_ready),
    .req_out       (r01),
    .ack_in        (a01),
    .adr_out       (d01),
    .adr_out_valid (v01),
    .adr_out_ready (y01),
    .timestep      (ts[0]),
    .cfg_we        (cfg_we && cfg_layer == 2'd0),
    .cfg_sel_dend,
    .cfg_row       (cfg_row),
    .cfg_col       (W_H1'(cfg_col)),
    .cfg_data,
    .idle          (idle_l[0])
  );

  ttfs_layer #(.I(N_H1), .J(N_H2), .N_TASKS(N_TASKS), .USE_DENDRITES(1'b1),
               .QS(QS), .QD(QD), .QV(QV)) u_l1 (
    .clk, .rst_n, .load_task, .task_id,
    .vth           (signed'(vth[1])),
    .req_in        (r01),
    .ack_out       (a01),
    .adr_in        (d01),
    .adr_in_valid  (v01),
    .adr_in_ready  (y01),
    .req_out       (r12),
    .ack_in        (a12),
    .adr_out       (d12),
    .adr_out_valid (v12),
    .adr_out_ready (y12),
    .timestep      (ts[1]),
    .cfg_we        (cfg_we && cfg_layer == 2'd1),
    .cfg_sel_dend,
    .cfg_row       (W_H1'(cfg_row)),
    .cfg_col       (W_H2'(cfg_col)),
    .cfg_data,
    .idle          (idle_l[1])
  );

  ttfs_layer #(.I(N_H2), .J(N_OUT), .N_TASKS(N_TASKS), .USE_DENDRITES(1'b0),
               .QS(QS), .QD(QD), .QV(QV)) u_l2 (
    .clk, .rst_n, .load_task, .task_id,
    .vth           (signed'(vth[2])),
    .req_in        (r12),
    .ack_out       (a12),
    .adr_in        (d12),
    .adr_in_valid  (v12),
    .adr_in_ready  (y12),
    .req_out       (out_req),
    .ack_in        (out_ack),
    .adr_out       (out_adr),
    .adr_out_valid (out_valid),
    .adr_out_ready (out_ready),
    .timestep      (ts[2]),
    .cfg_we        (cfg_we && cfg_layer == 2'd2),
    .cfg_sel_dend,
    .cfg_row       (W_H2'(cfg_row)),
    .cfg_col       (W_OUT'(cfg_col)),
    .cfg_data,
    .idle          (idle_l[2])
  );

  assign out_time = ts[2];
  assign idle     = &idle_l;

endmodule
