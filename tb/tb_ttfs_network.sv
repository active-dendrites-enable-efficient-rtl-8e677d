// tb_ttfs_network: end-to-end test of the three-layer network.
//
// The testbench acts as the host. It writes random weights for the three
// layers and random per-task dendritic delays for the two hidden layers, then
// classifies synthetic images: each pixel intensity P in 0..255 becomes the
// spike time t = T_MAX * (256 - P) / 256 (a pixel of 0 never spikes within the
// window). For every sample it loads a task, and for t = 0 .. T_MAX-1 pushes
// the addresses of the pixels spiking at t and runs the input handshake, not
// waiting for the deeper layers (they work on earlier timesteps meanwhile).
// The output link is acknowledged by the testbench with random back-pressure.
// The output spikes (address and time) and the set of hidden neurons that
// fired are compared with the reference model. The same image is run under
// different tasks, so the task switch must change the hidden activity.
// Mechanisms counted (each must occur): spikes delayed by a dendrite, neurons
// pushed past the window by their delay (gated), timesteps with no input
// spike, output back-pressure, task switches that change the hidden activity,
// and saturation of a membrane register.
module tb_ttfs_network;
  import ttfs_ref_pkg::*;
  localparam int N_IN = 16, N_H1 = 12, N_H2 = 10, N_OUT = 2, NT = 5;
  localparam int T_MAX = 60, N_SAMPLES = 6;
  localparam int QV = 11;
  localparam int VTH0 = 60, VTH1 = 60, VTH2 = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load_task, in_req, in_ack, in_valid, in_ready;
  logic out_req, out_ack, out_valid, out_ready, cfg_we, cfg_sel_dend, idle;
  logic [$clog2(NT)-1:0] task_id;
  logic [2:0][QV-1:0] vth;
  logic [$clog2(N_IN)-1:0] in_adr, cfg_row;
  logic [$clog2(N_H1)-1:0] cfg_col;
  logic [(N_OUT > 1 ? $clog2(N_OUT) : 1)-1:0] out_adr;
  logic [15:0] out_time;
  logic [1:0] cfg_layer;
  logic [7:0] cfg_data;

  ttfs_network #(.N_IN(N_IN), .N_H1(N_H1), .N_H2(N_H2), .N_OUT(N_OUT), .N_TASKS(NT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- output side: the host's receive path ----
  int got_t[N_OUT];
  int n_dup = 0, n_backpressure = 0;
  always @(posedge clk) begin
    if (out_valid && !out_ready) n_backpressure++;
    if (out_valid && out_ready) begin
      if (got_t[out_adr] >= 0) n_dup++;
      got_t[out_adr] = int'(out_time);
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_ack <= 1'b0; else out_ack <= out_req;
  always @(posedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  int n_syn_sat = 0;
  always @(posedge clk)
    if (dut.u_l0.u_neural_cluster.g_npu[0].vm == 11'sh3ff) n_syn_sat++;

  task automatic cfg_write(input int layer, input bit dend, input int row, input int col, input int data);
    cfg_we = 1; cfg_layer = 2'(layer); cfg_sel_dend = dend;
    cfg_row = $bits(cfg_row)'(row); cfg_col = $bits(cfg_col)'(col); cfg_data = 8'(data);
    @(posedge clk); #1 cfg_we = 0;
  endtask

  // weights of layer l, flat [i*J + j]; delays [j*NT + n]
  int w0[], w1[], w2[], d0[], d1[];

  initial begin
    int img[], in_t[], h1[], h2[], o[], z2[], ds0[], ds1[];
    int n_delayed = 0, n_gated = 0, n_empty = 0, n_switch = 0, n_ok_class = 0;
    logic [N_H1-1:0] prev_h1;
    {load_task, in_req, in_valid, cfg_we, cfg_sel_dend} = '0;
    task_id = 0; in_adr = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0; cfg_layer = 0;
    vth[0] = QV'(VTH0); vth[1] = QV'(VTH1); vth[2] = QV'(VTH2);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---- configuration ----
    w0 = new[N_IN * N_H1]; w1 = new[N_H1 * N_H2]; w2 = new[N_H2 * N_OUT];
    d0 = new[N_H1 * NT];   d1 = new[N_H2 * NT];
    // inputs 0-7 have large weights to hidden neuron 0, so its membrane saturates
    foreach (w0[k]) begin
      w0[k] = (k % N_H1 == 0 && k / N_H1 < 8) ? 7 : int'($urandom_range(0, 9)) - 3;
      cfg_write(0, 0, k / N_H1, k % N_H1, w0[k]);
    end
    foreach (w1[k]) begin w1[k] = int'($urandom_range(0, 9)) - 3; cfg_write(1, 0, k / N_H2, k % N_H2, w1[k]); end
    foreach (w2[k]) begin w2[k] = int'($urandom_range(0, 9)) - 3; cfg_write(2, 0, k / N_OUT, k % N_OUT, w2[k]); end
    foreach (d0[k]) begin d0[k] = (k % NT == 0) ? 0 : $urandom_range(0, T_MAX); cfg_write(0, 1, k % NT, k / NT, d0[k]); end
    foreach (d1[k]) begin d1[k] = (k % NT == 0) ? 0 : $urandom_range(0, T_MAX); cfg_write(1, 1, k % NT, k / NT, d1[k]); end
    z2 = new[N_OUT];
    foreach (z2[j]) z2[j] = 0;

    for (int s = 0; s < N_SAMPLES; s++) begin
      int n, first_t, cls, ref_cls;
      n = s % NT;
      // a new synthetic image every second sample: two samples per image
      if (s % 2 == 0) begin
        img = new[N_IN];
        foreach (img[i]) img[i] = ($urandom_range(0, 4) < 2) ? 0 : $urandom_range(1, 255);
        for (int i = 0; i < 8 && i < N_IN; i++) img[i] = 255;
      end
      in_t = new[N_IN];
      foreach (in_t[i]) in_t[i] = (T_MAX * (256 - img[i])) / 256;
      ds0 = new[N_H1]; ds1 = new[N_H2];
      foreach (ds0[j]) ds0[j] = d0[j*NT + n];
      foreach (ds1[j]) ds1[j] = d1[j*NT + n];
      layer(in_t, w0, ds0, N_IN, N_H1, VTH0, QV, T_MAX, h1);
      layer(h1,   w1, ds1, N_H1, N_H2, VTH1, QV, T_MAX, h2);
      layer(h2,   w2, z2,  N_H2, N_OUT, VTH2, QV, T_MAX, o);

      foreach (got_t[j]) got_t[j] = -1;
      while (!idle) begin @(posedge clk); #1; end
      task_id = $clog2(NT)'(n); load_task = 1;
      @(posedge clk); #1 load_task = 0;
      while (!idle) begin @(posedge clk); #1; end
      for (int t = 0; t < T_MAX; t++) begin
        int cnt;
        cnt = 0;
        for (int i = 0; i < N_IN; i++)
          if (in_t[i] == t) begin
            while (!in_ready) begin @(posedge clk); #1; end
            in_adr = $clog2(N_IN)'(i); in_valid = 1;
            @(posedge clk); #1 in_valid = 0;
            cnt++;
          end
        if (cnt == 0) n_empty++;
        in_req = 1;
        while (!in_ack) begin @(posedge clk); #1; end
        in_req = 0;
        while (in_ack) begin @(posedge clk); #1; end
      end
      while (!idle) begin @(posedge clk); #1; end

      // ---- compare ----
      for (int j = 0; j < N_OUT; j++)
        check(got_t[j] == o[j], $sformatf("sample %0d output %0d at %0d expected %0d", s, j, got_t[j], o[j]));
      for (int j = 0; j < N_H1; j++) begin
        check(dut.u_l0.spiked[j] == (h1[j] >= 0), $sformatf("sample %0d L0 neuron %0d", s, j));
        if (h1[j] >= 0 && ds0[j] > 0) n_delayed++;
      end
      for (int j = 0; j < N_H2; j++) begin
        check(dut.u_l1.spiked[j] == (h2[j] >= 0), $sformatf("sample %0d L1 neuron %0d", s, j));
        if (h2[j] >= 0 && ds1[j] > 0) n_delayed++;
      end
      // gated: the same neuron without its delay would have fired in time
      begin
        int h1_nodelay[], zero[];
        zero = new[N_H1];
        foreach (zero[j]) zero[j] = 0;
        layer(in_t, w0, zero, N_IN, N_H1, VTH0, QV, T_MAX, h1_nodelay);
        foreach (h1[j]) if (h1[j] < 0 && h1_nodelay[j] >= 0) n_gated++;
      end
      if (s % 2 == 1 && dut.u_l0.spiked != prev_h1) n_switch++;
      prev_h1 = dut.u_l0.spiked;
      // predicted class: the output neuron that fired first
      cls = -1; first_t = T_MAX;
      foreach (got_t[j]) if (got_t[j] >= 0 && got_t[j] < first_t) begin first_t = got_t[j]; cls = j; end
      ref_cls = -1; first_t = T_MAX;
      foreach (o[j]) if (o[j] >= 0 && o[j] < first_t) begin first_t = o[j]; ref_cls = j; end
      if (cls == ref_cls) n_ok_class++;
      $display("sample %0d task %0d: class %0d (reference %0d)", s, n, cls, ref_cls);
    end
    check(n_dup == 0, "each output neuron fires at most once per sample");
    check(n_ok_class == N_SAMPLES, "classes agree with the reference");
    $display("mechanisms: delayed spikes %0d, gated by delay %0d, empty timesteps %0d, back-pressure %0d, task switches changing L0 %0d, saturated cycles %0d",
             n_delayed, n_gated, n_empty, n_backpressure, n_switch, n_syn_sat);
    check(n_delayed > 0, "dendritic delay seen");
    check(n_gated > 0, "gating by delay seen");
    check(n_empty > 0, "empty timestep seen");
    check(n_backpressure > 0, "output back-pressure seen");
    check(n_switch > 0, "task switch changed activity");
    check(n_syn_sat > 0, "membrane saturation seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
