// tb_npu: self-checking test of one neuron processing unit.
//
// Each trial draws input spike times and weights, a threshold and a delay,
// runs T timesteps of ACCUMULATE (one per input spike of that timestep),
// UPDATE STATE and EVALUATE, and compares the timestep at which the NPU
// fires with the reference model. It also checks that a neuron fires only once,
// that clear restarts it, and the saturation of the membrane register.
module tb_npu;
  import ttfs_ref_pkg::*;
  localparam int QS = 4, QD = 8, QV = 11, T = 60, NI = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, load_delay, accumulate, update, evaluate;
  logic [QD-1:0] delay;
  logic signed [QS-1:0] w;
  logic signed [QV-1:0] vth, vm, syn;
  logic spike, spiked;

  npu #(.QS(QS), .QD(QD), .QV(QV)) dut (.*);

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

  task automatic strobe(ref logic s);
    s = 1; @(posedge clk); #1 s = 0;
  endtask

  initial begin
    int in_t[], wv[], dv[], out_t[];
    int fired_at, n_fire, n_delayed = 0, n_dead = 0;
    {clear, load_delay, accumulate, update, evaluate} = '0;
    delay = 0; w = 0; vth = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      in_t = new[NI]; wv = new[NI]; dv = new[1];
      foreach (in_t[i]) begin
        in_t[i] = ($urandom_range(0, 3) == 0) ? -1 : $urandom_range(0, T / 2);
        wv[i]   = int'($urandom_range(0, 12)) - 5;
      end
      dv[0] = (trial % 3 == 0) ? 0 : $urandom_range(1, 20);
      vth   = QV'($urandom_range(20, 300));
      layer(in_t, wv, dv, NI, 1, int'(vth), QV, T, out_t);
      @(posedge clk); #1;
      delay = QD'(dv[0]); clear = 1; load_delay = 1;
      @(posedge clk); #1 clear = 0; load_delay = 0;
      check(vm == 0 && syn == 0 && !spiked, "clear");
      fired_at = -1; n_fire = 0;
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < NI; i++)
          if (in_t[i] == t) begin
            w = QS'(wv[i]); strobe(accumulate);
          end
        strobe(update);
        strobe(evaluate);
        if (spike) begin n_fire++; if (fired_at < 0) fired_at = t; end
      end
      check(fired_at == out_t[0], $sformatf("trial %0d fired at %0d expected %0d", trial, fired_at, out_t[0]));
      check(n_fire <= 1, "fires at most once");
      check(spiked == (out_t[0] >= 0), "SPIKED flag");
      if (out_t[0] >= 0 && dv[0] > 0) n_delayed++;
      if (out_t[0] < 0) n_dead++;
    end
    // saturation: large positive slope for long enough
    @(posedge clk); #1 clear = 1; delay = 0; load_delay = 1; vth = 11'sd1023;
    @(posedge clk); #1 clear = 0; load_delay = 0;
    w = 4'sd7;
    repeat (200) strobe(accumulate);
    check(syn == 11'sd1023, "synaptic register saturates high");
    strobe(update); strobe(update);
    check(vm == 11'sd1023, "membrane saturates high");
    strobe(evaluate);
    check(spike && spiked, "fires at V_th = max");
    w = -4'sd8;
    @(posedge clk); #1 clear = 1;
    @(posedge clk); #1 clear = 0;
    repeat (200) strobe(accumulate);
    check(syn == -11'sd1024, "synaptic register saturates low");
    check(n_delayed > 0 && n_dead > 0, "covered delayed and dead neurons");
    $display("delayed spikes %0d, dead neurons %0d", n_delayed, n_dead);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
