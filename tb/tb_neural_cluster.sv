// tb_neural_cluster: self-checking test of the neural cluster.
//
// Six NPUs get different weight and delay fields from the row buses, as the
// synapse and dendrite memories deliver them. Input spike times are random;
// per timestep the testbench presents one weight row per spiking input with
// ACCUMULATE, then UPDATE STATE and EVALUATE, and compares the spike vector
// with the reference layer model. Three samples with different delays are run.
module tb_neural_cluster;
  import ttfs_ref_pkg::*;
  localparam int J = 6, I = 10, QS = 4, QD = 8, QV = 11, T = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, load_delay, accumulate, update, evaluate;
  logic [J-1:0][QD-1:0] delay;
  logic [J-1:0][QS-1:0] w;
  logic signed [QV-1:0] vth;
  logic [J-1:0] spike, spiked;

  neural_cluster #(.J(J), .QS(QS), .QD(QD), .QV(QV)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int in_t[], wv[], dv[], out_t[];
    int n_spikes = 0;
    {clear, load_delay, accumulate, update, evaluate} = '0;
    delay = '0; w = '0; vth = 11'sd100;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      in_t = new[I]; wv = new[I * J]; dv = new[J];
      foreach (in_t[i]) in_t[i] = $urandom_range(0, T / 2);
      foreach (wv[k]) wv[k] = int'($urandom_range(0, 11)) - 4;
      foreach (dv[j]) dv[j] = $urandom_range(0, 12);
      layer(in_t, wv, dv, I, J, int'(vth), QV, T, out_t);
      for (int j = 0; j < J; j++) delay[j] = QD'(dv[j]);
      clear = 1; load_delay = 1;
      @(posedge clk); #1 clear = 0; load_delay = 0;
      for (int t = 0; t < T; t++) begin
        logic [J-1:0] exp_v;
        for (int i = 0; i < I; i++)
          if (in_t[i] == t) begin
            for (int j = 0; j < J; j++) w[j] = QS'(wv[i*J + j]);
            accumulate = 1; @(posedge clk); #1 accumulate = 0;
          end
        update = 1; @(posedge clk); #1 update = 0;
        evaluate = 1; @(posedge clk); #1 evaluate = 0;
        for (int j = 0; j < J; j++) exp_v[j] = (out_t[j] == t);
        check(spike == exp_v, $sformatf("sample %0d t %0d spikes %b expected %b", s, t, spike, exp_v));
        n_spikes += $countones(spike);
      end
    end
    check(n_spikes > 0, "some neuron fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
