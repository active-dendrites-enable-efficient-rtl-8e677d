// tb_main_ctrl: self-checking test of the layer's main controller.
//
// The testbench plays every neighbour of the controller: the upstream layer
// (req_in), the processing controller (done a random number of cycles after
// start), the memory controller (dend_valid one cycle after a read), the
// neural cluster (a random spike vector the cycle after EVALUATE), the output
// FIFO (a queue) and the downstream layer (ack_in after a random delay). It
// checks the LOAD_TASK sequence, the order ACCUMULATE -> ACK_OUT -> UPDATE ->
// EVALUATE, that the spiking neurons are queued lowest address first and
// sent in that order, the 4-phase handshakes on both sides, and the timestep
// count.
module tb_main_ctrl;
  localparam int J = 12, NT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load_task, req_in, ack_out, req_out, ack_in, adr_out_valid, adr_out_ready;
  logic [$clog2(NT)-1:0] task_id, dend_rd_addr;
  logic proc_start, proc_done, dend_rd_req, dend_valid;
  logic npu_clear, npu_load_delay, npu_update, npu_evaluate;
  logic [J-1:0] spikes;
  logic ofifo_push, ofifo_empty, ofifo_pop, idle;
  logic [$clog2(J)-1:0] ofifo_din;
  logic [15:0] timestep;

  main_ctrl #(.J(J), .N_TASKS(NT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- neighbour models ----
  logic [$clog2(J)-1:0] ofq[$];          // output FIFO
  assign ofifo_empty = (ofq.size() == 0);
  logic [J-1:0] spike_plan;              // what the cluster will report
  int proc_wait;                         // cycles until processing is done
  int proc_cnt;
  logic proc_busy;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dend_valid <= 0; else dend_valid <= dend_rd_req;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) spikes <= '0; else spikes <= npu_evaluate ? spike_plan : '0;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin proc_busy <= 0; proc_cnt <= 0; end
    else if (proc_start) begin proc_busy <= 1; proc_cnt <= proc_wait; end
    else if (proc_busy && proc_cnt == 0) proc_busy <= 0;
    else if (proc_busy) proc_cnt <= proc_cnt - 1;
  assign proc_done = proc_busy && proc_cnt == 0;

  // event log, one entry per cycle of interest
  int cyc = 0;
  int t_done, t_ack, t_upd, t_eval, n_upd, n_eval, n_start;
  logic [$clog2(J)-1:0] pushed[$], sent[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (proc_done) t_done = cyc;
    if (npu_update) begin t_upd = cyc; n_upd++; end
    if (npu_evaluate) begin t_eval = cyc; n_eval++; end
    if (proc_start) n_start++;
    if (ofifo_push) begin pushed.push_back(ofifo_din); ofq.push_back(ofifo_din); end
    if (ofifo_pop) begin sent.push_back(ofq[0]); void'(ofq.pop_front()); end
    if (req_out && !ack_in) check(ofq.size() == 0, "request only after all addresses sent");
  end
  always @(posedge ack_out) t_ack = cyc;

  initial begin
    int n_ts = 0, n_spk = 0;
    {load_task, req_in, ack_in} = '0;
    task_id = 0; adr_out_ready = 1; spike_plan = '0; proc_wait = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      // ---- LOAD_TASK ----
      @(posedge clk); #1;
      check(idle, "idle before load");
      task_id = $clog2(NT)'(s + 1); load_task = 1;
      @(posedge clk); #1 load_task = 0;
      check(dend_rd_req && dend_rd_addr == $clog2(NT)'(s + 1) && npu_clear, "dendrite read and clear");
      @(posedge clk); #1;
      check(npu_load_delay && dend_valid, "LOAD DELAY with the dendrite row");
      @(posedge clk); #1;
      check(idle && timestep == 0, "idle, timestep 0 after load");
      for (int t = 0; t < 8; t++) begin
        logic [$clog2(J)-1:0] exp[$];
        exp = {}; n_upd = 0; n_eval = 0; n_start = 0; pushed = {}; sent = {};
        proc_wait  = $urandom_range(0, 6);
        spike_plan = J'($urandom) & J'($urandom);
        if (t == 0) spike_plan = '0;
        for (int j = 0; j < J; j++) if (spike_plan[j]) exp.push_back($clog2(J)'(j));
        adr_out_ready = $urandom_range(0, 1);
        req_in = 1;
        // upstream: wait for ack, drop req, wait for ack to drop
        fork
          begin
            while (!ack_out) begin @(posedge clk); #1; end
            req_in = 0;
            while (ack_out) begin @(posedge clk); #1; end
          end
          begin
            // downstream: answer the request after a random delay
            while (!req_out) begin @(posedge clk); #1 adr_out_ready = 1; end
            repeat ($urandom_range(0, 3)) @(posedge clk);
            #1 ack_in = 1;
            while (req_out) begin @(posedge clk); #1; end
            repeat ($urandom_range(0, 3)) @(posedge clk);
            #1 ack_in = 0;
          end
        join
        while (!idle) begin @(posedge clk); #1; end
        check(n_start == 1, "one processing start per request");
        check(t_ack == t_done + 1, "ACK_OUT right after processing done");
        check(n_upd == 1 && n_eval == 1 && t_upd > t_done && t_eval == t_upd + 1, "UPDATE then EVALUATE");
        check(pushed == exp, $sformatf("queued addresses t=%0d %p vs %p", t, pushed, exp));
        check(sent == exp, "sent addresses");
        check(timestep == 16'(t + 1), "timestep advances");
        n_ts++; n_spk += exp.size();
      end
    end
    check(n_ts == 32 && n_spk > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
