// tb_processing_ctrl: self-checking test of the processing controller.
//
// A queue in the testbench plays the input FIFO and a one-cycle delay plays
// the memory controller. For batches of 0..12 addresses it checks that every
// address is read once and in order, that ACCUMULATE follows each read one
// cycle later, that done pulses exactly n+2 cycles after start, and that
// nothing is popped before start.
module tb_processing_ctrl;
  localparam int I = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, fifo_empty, fifo_pop, rd_req, rd_valid, accumulate;
  logic [$clog2(I)-1:0] fifo_dout, rd_addr;

  processing_ctrl #(.I(I)) dut (.*);

  logic [$clog2(I)-1:0] q[$];
  assign fifo_empty = (q.size() == 0);
  assign fifo_dout  = fifo_empty ? '0 : q[0];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_valid <= 1'b0; else rd_valid <= rd_req;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [$clog2(I)-1:0] exp_q[$];
    int n, cyc, n_acc, done_at;
    start = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      n = (b < 13) ? b : $urandom_range(0, 12);
      exp_q = {};
      for (int k = 0; k < n; k++) begin
        q.push_back($clog2(I)'($urandom_range(0, I - 1)));
        exp_q.push_back(q[$]);
      end
      repeat (2) begin
        @(posedge clk); #1;
        check(!fifo_pop && !done, "idle before start");
      end
      start = 1;
      cyc = 0; n_acc = 0; done_at = -1;
      while (done_at < 0 && cyc < 100) begin
        bit popped;
        #1;
        popped = fifo_pop;
        if (fifo_pop) begin
          check(rd_req && rd_addr == exp_q[0], "read address in order");
          void'(exp_q.pop_front());
        end
        if (accumulate) n_acc++;
        if (done) done_at = cyc;
        @(posedge clk);
        #1 start = 0;
        if (popped) void'(q.pop_front());
        cyc++;
      end
      check(exp_q.size() == 0, "all addresses read");
      check(n_acc == n, $sformatf("accumulates %0d of %0d", n_acc, n));
      check(done_at == n + 2, $sformatf("done after %0d cycles, n=%0d", done_at, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
