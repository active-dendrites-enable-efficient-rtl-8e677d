// tb_synapse_memory: self-checking test of the synapse memory.
//
// Fills every weight with a random value one at a time, then reads words in
// random order and checks each J x QS word one cycle after the read, and that
// the output holds while no read is issued.
module tb_synapse_memory;
  localparam int DEPTH = 24, J = 10, QS = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  logic re, we;
  logic [$clog2(DEPTH)-1:0] raddr, waddr;
  logic [$clog2(J)-1:0] wcol;
  logic [QS-1:0] wdata;
  logic [J-1:0][QS-1:0] rdata;

  synapse_memory #(.DEPTH(DEPTH), .J(J), .QS(QS)) dut (.*);

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
    int model [DEPTH][J];
    logic [J-1:0][QS-1:0] prev;
    re = 0; we = 0; raddr = 0; waddr = 0; wcol = 0; wdata = 0;
    @(posedge clk); #1;
    for (int a = 0; a < DEPTH; a++)
      for (int j = 0; j < J; j++) begin
        model[a][j] = $urandom_range(0, (1 << QS) - 1);
        we = 1; waddr = a[$clog2(DEPTH)-1:0]; wcol = j[$clog2(J)-1:0]; wdata = QS'(model[a][j]);
        @(posedge clk); #1;
      end
    we = 0;
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = a[$clog2(DEPTH)-1:0];
      @(posedge clk); #1 re = 0;
      for (int j = 0; j < J; j++)
        check(rdata[j] == QS'(model[a][j]), $sformatf("word %0d weight %0d", a, j));
      prev = rdata;
      raddr = raddr + 1'b1;
      @(posedge clk); #1;
      check(rdata == prev, "output holds without read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
