// tb_ttfs_layer: self-checking test of one complete layer.
//
// The testbench writes random weights and per-task delays through the
// configuration port, then runs samples: LOAD_TASK, and T timesteps in each of
// which it pushes the addresses of the inputs spiking at that timestep (in
// random order) and runs the 4-phase handshake. On the output side it accepts
// addresses (with random back-pressure on adr_out_ready), notes the timestep
// of each, and acknowledges. Every neuron's spike time is compared with the
// reference model, and the number of cycles from REQ_IN to ACK_OUT is checked
// to be n + 3 for n queued addresses.
module tb_ttfs_layer;
  import ttfs_ref_pkg::*;
  localparam int I = 16, J = 8, NT = 3, QS = 4, QD = 8, QV = 11, T = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load_task, req_in, ack_out, adr_in_valid, adr_in_ready;
  logic req_out, ack_in, adr_out_valid, adr_out_ready, idle;
  logic [$clog2(NT)-1:0] task_id;
  logic signed [QV-1:0] vth;
  logic [$clog2(I)-1:0] adr_in, cfg_row;
  logic [$clog2(J)-1:0] adr_out, cfg_col;
  logic [15:0] timestep;
  logic cfg_we, cfg_sel_dend;
  logic [7:0] cfg_data;

  ttfs_layer #(.I(I), .J(J), .N_TASKS(NT), .USE_DENDRITES(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // downstream: record spikes, answer requests
  int got_t[J];
  int n_dup = 0, n_backpressure = 0;
  always @(posedge clk) begin
    if (adr_out_valid && !adr_out_ready) n_backpressure++;
    if (adr_out_valid && adr_out_ready) begin
      if (got_t[adr_out] >= 0) n_dup++;
      got_t[adr_out] = int'(timestep);
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ack_in <= 1'b0; else ack_in <= req_out;
  always @(posedge clk) adr_out_ready <= ($urandom_range(0, 2) != 0);

  initial begin
    int wv[], dv[], in_t[], dsel[], out_t[];
    int n_fired = 0, n_delayed = 0, n_dead = 0;
    {load_task, req_in, adr_in_valid, cfg_we, cfg_sel_dend} = '0;
    task_id = 0; adr_in = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0;
    vth = 11'sd120;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // configuration
    wv = new[I * J]; dv = new[J * NT];
    for (int i = 0; i < I; i++)
      for (int j = 0; j < J; j++) begin
        wv[i*J + j] = int'($urandom_range(0, 11)) - 4;
        cfg_we = 1; cfg_sel_dend = 0; cfg_row = i[$clog2(I)-1:0]; cfg_col = j[$clog2(J)-1:0];
        cfg_data = 8'(wv[i*J + j]);
        @(posedge clk); #1;
      end
    for (int n = 0; n < NT; n++)
      for (int j = 0; j < J; j++) begin
        dv[j*NT + n] = (n == 0) ? 0 : $urandom_range(0, 15);
        cfg_we = 1; cfg_sel_dend = 1; cfg_row = n[$clog2(I)-1:0]; cfg_col = j[$clog2(J)-1:0];
        cfg_data = 8'(dv[j*NT + n]);
        @(posedge clk); #1;
      end
    cfg_we = 0;
    for (int s = 0; s < 6; s++) begin
      int n;
      n = s % NT;
      in_t = new[I]; dsel = new[J];
      foreach (in_t[i]) in_t[i] = ($urandom_range(0, 4) == 0) ? -1 : $urandom_range(0, T / 2);
      foreach (dsel[j]) dsel[j] = dv[j*NT + n];
      layer(in_t, wv, dsel, I, J, int'(vth), QV, T, out_t);
      foreach (got_t[j]) got_t[j] = -1;
      while (!idle) begin @(posedge clk); #1; end
      task_id = $clog2(NT)'(n); load_task = 1;
      @(posedge clk); #1 load_task = 0;
      for (int t = 0; t < T; t++) begin
        int q[$], lat;
        while (!idle) begin @(posedge clk); #1; end
        q = {};
        for (int i = 0; i < I; i++) if (in_t[i] == t) q.push_back(i);
        q.shuffle();
        foreach (q[k]) begin
          adr_in = $clog2(I)'(q[k]); adr_in_valid = 1;
          @(posedge clk); #1;
          check(adr_in_ready, "input FIFO accepts");
        end
        adr_in_valid = 0;
        req_in = 1; lat = 0;
        while (!ack_out) begin @(posedge clk); #1; lat++; end
        check(lat == q.size() + 3, $sformatf("REQ_IN to ACK_OUT %0d cycles for %0d spikes", lat, q.size()));
        req_in = 0;
      end
      while (!idle) begin @(posedge clk); #1; end
      for (int j = 0; j < J; j++) begin
        check(got_t[j] == out_t[j], $sformatf("sample %0d neuron %0d spike at %0d expected %0d", s, j, got_t[j], out_t[j]));
        if (out_t[j] >= 0) begin n_fired++; if (dsel[j] > 0) n_delayed++; end
        else n_dead++;
      end
    end
    check(n_dup == 0, "each neuron fires at most once");
    check(n_fired > 0 && n_delayed > 0 && n_dead > 0 && n_backpressure > 0, "coverage");
    $display("fired %0d (delayed %0d), dead %0d, back-pressure cycles %0d", n_fired, n_delayed, n_dead, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
