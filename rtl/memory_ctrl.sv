// memory_ctrl: access controller of a layer's synapse and dendrite memories.
//
// Two clients read through it. The processing controller asks for the synapse
// word of each popped input address; the main controller asks for the dendrite
// word of the task given with LOAD_TASK. The controller drives the read ports
// and, since both memories answer one cycle later, raises syn_valid or
// dend_valid in the cycle their data is on the memory outputs. Host
// configuration writes are decoded onto the write port of the chosen memory.
// A configuration write must not be issued while the layer is running a
// timestep (this design's rule; the host owns the memories between samples).
//
// The existence of this controller and its two access kinds follow the
// architecture; its one-cycle pipeline and write decoding are this design's.
module memory_ctrl #(
  parameter int unsigned I       = 784,
  parameter int unsigned J       = 400,
  parameter int unsigned N_TASKS = 5,
  parameter int unsigned CW      = 8    // configuration data width
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // synapse reads (processing controller)
  input  logic                          syn_rd_req,
  input  logic [$clog2(I)-1:0]          syn_rd_addr,
  output logic                          syn_valid,
  // dendrite reads (main controller)
  input  logic                          dend_rd_req,
  input  logic [$clog2(N_TASKS)-1:0]    dend_rd_addr,
  output logic                          dend_valid,
  // host configuration
  input  logic                          cfg_we,
  input  logic                          cfg_sel_dend,   // 0: synapse, 1: dendrite
  input  logic [$clog2(I)-1:0]          cfg_row,
  input  logic [(J > 1 ? $clog2(J) : 1)-1:0] cfg_col,
  input  logic [CW-1:0]                 cfg_data,
  // synapse memory port
  output logic                          syn_re,
  output logic [$clog2(I)-1:0]          syn_raddr,
  output logic                          syn_we,
  output logic [$clog2(I)-1:0]          syn_waddr,
  output logic [(J > 1 ? $clog2(J) : 1)-1:0] syn_wcol,
  output logic [CW-1:0]                 syn_wdata,
  // dendrite memory port
  output logic                          dend_re,
  output logic [$clog2(N_TASKS)-1:0]    dend_raddr,
  output logic                          dend_we,
  output logic [$clog2(N_TASKS)-1:0]    dend_waddr,
  output logic [(J > 1 ? $clog2(J) : 1)-1:0] dend_wcol,
  output logic [CW-1:0]                 dend_wdata
);
  assign syn_re     = syn_rd_req;
  assign syn_raddr  = syn_rd_addr;
  assign dend_re    = dend_rd_req;
  assign dend_raddr = dend_rd_addr;

  assign syn_we     = cfg_we && !cfg_sel_dend;
  assign syn_waddr  = cfg_row;
  assign syn_wcol   = cfg_col;
  assign syn_wdata  = cfg_data;
  assign dend_we    = cfg_we && cfg_sel_dend;
  assign dend_waddr = $clog2(N_TASKS)'(cfg_row);
  assign dend_wcol  = cfg_col;
  assign dend_wdata = cfg_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      syn_valid  <= 1'b0;
      dend_valid <= 1'b0;
    end else begin
      syn_valid  <= syn_rd_req;
      dend_valid <= dend_rd_req;
    end
  end

  // The host does not write while the layer reads.
  a_cfg_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                                !(cfg_we && (syn_rd_req || dend_rd_req)));

endmodule
