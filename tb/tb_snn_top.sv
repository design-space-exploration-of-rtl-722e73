// tb_snn_top: end-to-end test of the network at reduced size (100-30-20-12,
// ratios 2, 4, 8, so every layer has a last neural unit with fewer neurons;
// layer 2's five units share memory blocks in pairs and layer 3's two units one
// block; 16-bit encoder chunks; 5 time steps per sample). Loads every weight and bias
// through the load bus, streams 4 samples of random input trains with random
// gaps and random output back-pressure, and compares every output train with a
// reference model of the whole network. It counts, and requires, each
// mechanism: a unit waiting for a shared memory block, input back-pressure,
// layer-wise pipelining (two or more layers busy at once), an activation held
// because the output buffer is full, a time step
// whose input train is empty, an all-zero encoder chunk, and the restart of the
// membrane potentials at a new sample.
module tb_snn_top;
  import snn_pkg::*;
  import snn_tb_pkg::*;
  localparam int N0 = 100, N1 = 30, N2 = 20, N3 = 12, TS = 5, NSAMPLES = 4;
  localparam int BETA_I = 16'h8000;
  localparam word_t THR = 32'sh0001_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N0-1:0] in_spikes = '0;
  logic [N3-1:0] out_spikes;
  load_t load;
  int checks = 0, failures = 0;
  int n_memwait = 0, n_inbp = 0, n_pipe = 0, n_stall = 0, n_empty = 0, n_zchunk = 0, n_restart = 0;
  int out_ones = 0;

  snn_top #(.N_IN(N0), .N_H1(N1), .N_H2(N2), .N_OUT(N3), .LHR1(2), .LHR2(4), .LHR3(8),
            .MEM_SHARE1(1), .MEM_SHARE2(2), .MEM_SHARE3(3),
            .CHUNK(16), .TIME_STEPS(TS)) dut (.*);
  always #5 clk = ~clk;

  logic [N3-1:0] expq [$];
  int received = 0;

  always @(posedge clk) if (rst_n) begin
    int busy;
    busy = int'(dut.st1 != ECU_IDLE) + int'(dut.st2 != ECU_IDLE) + int'(dut.st3 != ECU_IDLE);
    if (busy >= 2) n_pipe++;
    if ((dut.u_l2.nu_rd_en & ~dut.u_l2.nu_gnt) != '0 ||
        (dut.u_l3.nu_rd_en & ~dut.u_l3.nu_gnt) != '0) n_memwait++;
    if (in_valid && !in_ready) n_inbp++;
    if ((dut.st1 == ECU_ACT_HOLD && dut.v1 && !dut.r1) ||
        (dut.st2 == ECU_ACT_HOLD && dut.v2 && !dut.r2) ||
        (dut.st3 == ECU_ACT_HOLD && out_valid && !out_ready)) n_stall++;
    if (dut.u_l1.u_ecu.state == ECU_COMPRESS && dut.u_l1.u_ecu.cur == '0) n_zchunk++;
    if (dut.u_l2.activ_en && dut.u_l2.first_step && received > 0) n_restart++;
    if ((dut.u_l1.in_valid && dut.u_l1.in_ready && dut.u_l1.in_spikes == '0) ||
        (dut.u_l2.in_valid && dut.u_l2.in_ready && dut.u_l2.in_spikes == '0) ||
        (dut.u_l3.in_valid && dut.u_l3.in_ready && dut.u_l3.in_spikes == '0)) n_empty++;
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0 || out_spikes != expq[0]) begin
        failures++;
        $display("FAIL output %0d = %b expected %b", received, out_spikes,
                 expq.size() ? expq[0] : '0);
      end
      if (expq.size()) void'(expq.pop_front());
      out_ones += $countones(out_spikes);
      received++;
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(19, 0) < 1);

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
    for (int k = 0; k < NSAMPLES * TS; k++) begin
      logic [N0-1:0] xv;
      logic [N3-1:0] e;
      int t;
      t = k % TS;
      for (int i = 0; i < N0; i++) x[i] = ($urandom_range(99, 0) < 15);
      if (k == 7) for (int i = 0; i < N0; i++) x[i] = 0;
      for (int i = 0; i < N0; i++) xv[i] = x[i];
      ref_layer(0, N0, N1, t == 0, BETA_I, THR, x, v1, y1);
      ref_layer(1, N1, N2, t == 0, BETA_I, THR, y1, v2, y2);
      ref_layer(2, N2, N3, t == 0, BETA_I, THR, y2, v3, y3);
      for (int n = 0; n < N3; n++) e[n] = y3[n];
      expq.push_back(e);
      @(negedge clk); in_valid = 1; in_spikes = xv;
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
      repeat ($urandom_range(20, 0)) @(negedge clk);
    end
    while (received < NSAMPLES * TS) @(posedge clk);
    checks += 8;
    if (n_memwait == 0) begin failures++; $display("FAIL no wait on a shared memory block"); end
    if (n_inbp == 0)    begin failures++; $display("FAIL no input back-pressure"); end
    if (n_pipe == 0)    begin failures++; $display("FAIL no pipelining"); end
    if (n_stall == 0)   begin failures++; $display("FAIL no activation stall"); end
    if (n_empty == 0)   begin failures++; $display("FAIL no empty train"); end
    if (n_zchunk == 0)  begin failures++; $display("FAIL no empty chunk"); end
    if (n_restart == 0) begin failures++; $display("FAIL no sample restart"); end
    if (out_ones == 0 || out_ones == NSAMPLES * TS * N3) begin
      failures++; $display("FAIL output without contrast");
    end
    $display("memory_waits=%0d", n_memwait);
    $display("in_backpressure=%0d pipelined=%0d stalls=%0d empty_trains=%0d empty_chunks=%0d restarts=%0d out_spikes=%0d",
             n_inbp, n_pipe, n_stall, n_empty, n_zchunk, n_restart, out_ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
