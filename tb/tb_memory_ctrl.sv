// tb_memory_ctrl: self-checking test of the memory controller.
//
// Random read requests from both clients and host writes (never in the same
// cycle as a read). Checks that reads reach the right memory port with the
// right address, that syn_valid/dend_valid follow one cycle after a request
// and that writes are routed to exactly one memory with row, column and data.
module tb_memory_ctrl;
  localparam int I = 20, J = 6, NT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic syn_rd_req, dend_rd_req, syn_valid, dend_valid;
  logic [$clog2(I)-1:0] syn_rd_addr, cfg_row, syn_raddr, syn_waddr;
  logic [$clog2(NT)-1:0] dend_rd_addr, dend_raddr, dend_waddr;
  logic cfg_we, cfg_sel_dend, syn_re, syn_we, dend_re, dend_we;
  logic [$clog2(J)-1:0] cfg_col, syn_wcol, dend_wcol;
  logic [7:0] cfg_data, syn_wdata, dend_wdata;

  memory_ctrl #(.I(I), .J(J), .N_TASKS(NT), .CW(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev_s = 0, prev_d = 0;
    {syn_rd_req, dend_rd_req, cfg_we, cfg_sel_dend} = '0;
    syn_rd_addr = 0; dend_rd_addr = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 1000; c++) begin
      cfg_we       = ($urandom_range(0, 3) == 0);
      syn_rd_req   = !cfg_we && $urandom_range(0, 1);
      dend_rd_req  = !cfg_we && !syn_rd_req && ($urandom_range(0, 3) == 0);
      syn_rd_addr  = $clog2(I)'($urandom_range(0, I - 1));
      dend_rd_addr = $clog2(NT)'($urandom_range(0, NT - 1));
      cfg_sel_dend = $urandom_range(0, 1);
      cfg_row      = $clog2(I)'($urandom_range(0, NT - 1));
      cfg_col      = $clog2(J)'($urandom_range(0, J - 1));
      cfg_data     = 8'($urandom);
      #1;
      check(syn_re == syn_rd_req && (!syn_re || syn_raddr == syn_rd_addr), "synapse read port");
      check(dend_re == dend_rd_req && (!dend_re || dend_raddr == dend_rd_addr), "dendrite read port");
      check(syn_we == (cfg_we && !cfg_sel_dend), "synapse write enable");
      check(dend_we == (cfg_we && cfg_sel_dend), "dendrite write enable");
      if (syn_we) check(syn_waddr == cfg_row && syn_wcol == cfg_col && syn_wdata == cfg_data, "synapse write data");
      if (dend_we) check(dend_waddr == $clog2(NT)'(cfg_row) && dend_wcol == cfg_col && dend_wdata == cfg_data, "dendrite write data");
      check(syn_valid == prev_s, "syn_valid one cycle after request");
      check(dend_valid == prev_d, "dend_valid one cycle after request");
      prev_s = syn_rd_req; prev_d = dend_rd_req;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
