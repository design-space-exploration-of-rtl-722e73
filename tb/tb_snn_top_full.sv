// tb_snn_top_full: the network at its full default size (784-500-500-300,
// ratios 4, 8, 8, 64-bit encoder chunks, 15 time steps). Loads all 793,100
// weights and biases, runs one complete sample of 15 input trains with about
// 12 % of the inputs spiking (close to the 95 of 784 average input spike events
// reported for this network), and compares all 15 output trains with the
// reference model. It also reports the cycles from the first input train to the
// last output train.
module tb_snn_top_full;
  import snn_pkg::*;
  import snn_tb_pkg::*;
  localparam int N0 = 784, N1 = 500, N2 = 500, N3 = 300, TS = 15;
  localparam int BETA_I = 16'h8000;
  localparam word_t THR = 32'sh0001_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [N0-1:0] in_spikes = '0;
  logic [N3-1:0] out_spikes;
  load_t load;
  int checks = 0, failures = 0, received = 0, out_ones = 0, h1_ones = 0;
  longint cyc = 0, t_start = 0, t_end = 0;
  logic [N3-1:0] expq [$];

  snn_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (dut.v1 && dut.r1) h1_ones += $countones(dut.s1);
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0 || out_spikes != expq[0]) begin
        failures++;
        $display("FAIL output train %0d differs from reference", received);
      end
      if (expq.size()) void'(expq.pop_front());
      out_ones += $countones(out_spikes);
      received++;
      t_end = cyc;
    end
  end

  initial begin
    word_t v1 [], v2 [], v3 [];
    bit x [], y1 [], y2 [], y3 [];
    v1 = new[N1]; v2 = new[N2]; v3 = new[N3];
    x = new[N0];
    load = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 3; l++) begin
      int pre, post;
      pre  = (l == 0) ? N0 : (l == 1) ? N1 : N2;
      post = (l == 0) ? N1 : (l == 1) ? N2 : N3;
      for (int n = 0; n < post; n++)
        for (int i = 0; i <= pre; i++) begin
          @(negedge clk);
          load.en = 1; load.layer = 2'(l); load.neuron = IDX_W'(n); load.index = IDX_W'(i);
          load.data = net_weight(l, n, i, pre);
        end
    end
    @(negedge clk); load = '0;
    $display("weights loaded at cycle %0d", cyc);
    for (int t = 0; t < TS; t++) begin
      logic [N0-1:0] xv;
      logic [N3-1:0] e;
      for (int i = 0; i < N0; i++) x[i] = ($urandom_range(999, 0) < 121);
      for (int i = 0; i < N0; i++) xv[i] = x[i];
      ref_layer(0, N0, N1, t == 0, BETA_I, THR, x, v1, y1);
      ref_layer(1, N1, N2, t == 0, BETA_I, THR, y1, v2, y2);
      ref_layer(2, N2, N3, t == 0, BETA_I, THR, y2, v3, y3);
      for (int n = 0; n < N3; n++) e[n] = y3[n];
      expq.push_back(e);
      @(negedge clk); in_valid = 1; in_spikes = xv;
      if (t == 0) t_start = cyc;
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
    while (received < TS) @(posedge clk);
    checks++;
    if (out_ones == 0 || out_ones == TS * N3) begin failures++; $display("FAIL no contrast"); end
    $display("hidden-1 spikes/step=%0d output spikes/step=%0d cycles per sample=%0d",
             h1_ones / TS, out_ones / TS, t_end - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
