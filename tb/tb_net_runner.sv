// tb_net_runner: runs one sample of a three-layer network on snn_top with the
// given sizes and ratios. Loads all weights and biases, feeds TS input trains
// with INPUT_PERMILLE per mille of the inputs spiking, compares every output
// train with the reference model and sets `finished` with its counts. The
// cycles from the first input train to the last output train are reported.
module tb_net_runner #(
  parameter string NAME  = "net",
  parameter int    N0 = 784, N1 = 500, N2 = 500, N3 = 300,
  parameter int    L1 = 4, L2 = 8, L3 = 8,
  parameter int    TS = 15,
  parameter int    INPUT_PERMILLE = 121
) ();
  import snn_pkg::*;
  import snn_tb_pkg::*;
  localparam int BETA_I = 16'h8000;
  localparam word_t THR = ONE;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [N0-1:0] in_spikes = '0;
  logic [N3-1:0] out_spikes;
  load_t load;
  int checks = 0, failures = 0, received = 0, out_ones = 0;
  longint cyc = 0, t_start = 0, t_end = 0;
  bit finished = 0;
  logic [N3-1:0] expq [$];

  snn_top #(.N_IN(N0), .N_H1(N1), .N_H2(N2), .N_OUT(N3), .LHR1(L1), .LHR2(L2), .LHR3(L3),
            .TIME_STEPS(TS)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0 || out_spikes != expq[0]) begin
        failures++;
        $display("FAIL %s output train %0d differs from reference", NAME, received);
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
    for (int t = 0; t < TS; t++) begin
      logic [N0-1:0] xv;
      logic [N3-1:0] e;
      for (int i = 0; i < N0; i++) x[i] = ($urandom_range(999, 0) < INPUT_PERMILLE);
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
    if (out_ones == 0 || out_ones == TS * N3) begin
      failures++; $display("FAIL %s output without contrast", NAME);
    end
    $display("%s: %0d-%0d-%0d-%0d ratios (%0d,%0d,%0d): %0d cycles per %0d-step sample, %0d output spikes",
             NAME, N0, N1, N2, N3, L1, L2, L3, t_end - t_start, TS, out_ones);
    finished = 1;
  end
endmodule
