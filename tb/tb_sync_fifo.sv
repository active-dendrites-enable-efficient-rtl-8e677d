// tb_sync_fifo: self-checking test of the address FIFO.
//
// Random pushes and pops, also into a full and from an empty queue (those are
// suppressed by the testbench, as the layer's producers do), compared against
// a SystemVerilog queue: dout, empty, full and count every cycle.
module tb_sync_fifo;
  localparam int WIDTH = 10, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, full, empty;
  logic [WIDTH-1:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

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
    logic [WIDTH-1:0] q[$];
    int n_full = 0, n_both = 0;
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      // phases: fill-biased, drain-biased, balanced
      int bias;
      bias = (c / 300) % 3;
      push = ($urandom_range(0, 9) < (bias == 0 ? 8 : bias == 1 ? 2 : 5)) && !full;
      pop  = ($urandom_range(0, 9) < (bias == 0 ? 2 : bias == 1 ? 8 : 5)) && !empty;
      din  = WIDTH'($urandom);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == DEPTH), "full");
      check(count == q.size(), "count");
      if (q.size() > 0) check(dout == q[0], $sformatf("dout %0d vs %0d", dout, q[0]));
      if (full) n_full++;
      if (push && pop) n_both++;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      #1;
    end
    check(n_full > 0 && n_both > 0, "full and simultaneous push/pop covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
