// tb_ecu: drives an event control unit (100-bit input trains in 16-bit chunks,
// 8 output neurons on 2 neural units, 3 time steps per sample) with random spike
// trains, models the two neural units (done after random delays, spike_out from
// a known pattern) and a post-synaptic layer with random back-pressure.
// Checks: the addresses handed to the units are exactly the set bits of each
// train, in ascending order; compression takes one cycle per spike plus one per
// chunk (the first address reaches the units NCHUNK + 2 cycles after the
// spike count, counted from the accepting clock edge); first_step marks every third activation; each output train equals the
// pattern of its step and trains are delivered in order; the input is accepted
// again while the output buffer is still held (layer pipelining); an activation
// waits while the buffer is full (stall) and an all-zero train skips
// accumulation. Each of these must have happened.
module tb_ecu;
  import snn_pkg::*;
  localparam int PRE = 100, POST = 8, NUM_NU = 2, CHUNK = 16, TS = 3;
  localparam int NCHUNK = (PRE + CHUNK - 1) / CHUNK;
  localparam int AW = $clog2(PRE);
  localparam int NTRAINS = 40;

  logic clk = 0, rst_n = 0;
  logic pre_syn_avail = 0, pre_syn_ready, layer_avail, post_ready = 0;
  logic [PRE-1:0] spk_in_train = '0;
  logic [POST-1:0] spk_out_buffer, spike_out;
  logic accum_en, activ_en, first_step;
  logic [AW-1:0] shifted_spk_addr;
  logic [NUM_NU-1:0] nu_done = '0;
  ecu_state_e state;
  logic [$clog2(PRE+1)-1:0] spike_count;
  int checks = 0, failures = 0;
  int n_pipelined = 0, n_stall = 0, n_empty = 0;

  ecu #(.PRE(PRE), .POST(POST), .NUM_NU(NUM_NU), .CHUNK(CHUNK), .TIME_STEPS(TS)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [POST-1:0] pattern(int k);
    return POST'(k * 37 + 11);
  endfunction

  logic [PRE-1:0] trains [NTRAINS];
  int exp_addr [$];
  int act_count = 0;      // activations seen = index of the train being activated
  int sent = 0, received = 0;
  int accept_cycle, cyc = 0;
  bit wait_first;


  // Neural-unit models: each finishes after its own random delay.
  for (genvar k = 0; k < NUM_NU; k++) begin : g_nu
    int cnt = 0;
    always @(posedge clk) begin
      nu_done[k] <= 1'b0;
      if (accum_en || activ_en) cnt <= $urandom_range(6, 2);
      else if (cnt > 1) cnt <= cnt - 1;
      else if (cnt == 1) begin cnt <= 0; nu_done[k] <= 1'b1; end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (accum_en) begin
      checks++;
      if (wait_first) begin
        wait_first = 0;
        if (cyc - accept_cycle != $countones(trains[act_count]) + NCHUNK + 2) begin
          failures++;
          $display("FAIL compression took %0d cycles, %0d spikes", cyc - accept_cycle,
                   $countones(trains[act_count]));
        end
      end
      if (exp_addr.size() == 0 || int'(shifted_spk_addr) != exp_addr[0]) begin
        failures++;
        $display("FAIL train %0d address %0d expected %0d", act_count, shifted_spk_addr,
                 exp_addr.size() ? exp_addr[0] : -1);
      end
      if (exp_addr.size()) void'(exp_addr.pop_front());
    end
    if (activ_en) begin
      checks += 2;
      if (exp_addr.size() != 0) begin failures++; $display("FAIL addresses left over"); end
      if (first_step != (act_count % TS == 0)) begin
        failures++; $display("FAIL first_step=%0b at activation %0d", first_step, act_count);
      end
      if (trains[act_count] == '0) n_empty++;
      spike_out <= pattern(act_count);
      act_count++;
    end
    if (state == ECU_ACT_HOLD && layer_avail && !post_ready) n_stall++;
    if (pre_syn_avail && pre_syn_ready) begin
      for (int i = 0; i < PRE; i++) if (spk_in_train[i]) exp_addr.push_back(i);
      accept_cycle = cyc;
      wait_first = 1;
      if (layer_avail) n_pipelined++;
    end
    if (layer_avail && post_ready) begin
      checks++;
      if (spk_out_buffer != pattern(received)) begin
        failures++; $display("FAIL output %0d = %h expected %h", received, spk_out_buffer,
                             pattern(received));
      end
      received++;
    end
    cyc++;
  end

  // back-pressure of the post-synaptic layer: long busy periods, short ready windows
  always @(negedge clk) post_ready = (cyc % 400 < 30) && ($urandom_range(3, 0) != 0);

  initial begin
    spike_out = '0;
    for (int k = 0; k < NTRAINS; k++) begin
      trains[k] = {$urandom, $urandom, $urandom, $urandom};
      trains[k] &= {$urandom, $urandom, $urandom, $urandom};
      if (k % 7 == 3) trains[k] = '0;
      if (k % 11 == 5) trains[k] = '1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NTRAINS; k++) begin
      @(negedge clk);
      pre_syn_avail = 1; spk_in_train = trains[k];
      do @(posedge clk); while (!pre_syn_ready);
      @(negedge clk); pre_syn_avail = 0; spk_in_train = '1;
      repeat ($urandom_range(3, 0)) @(negedge clk);
    end
    while (received < NTRAINS) @(posedge clk);
    checks += 3;
    if (n_pipelined == 0) begin failures++; $display("FAIL no pipelined accept"); end
    if (n_stall == 0) begin failures++; $display("FAIL no stall before activation"); end
    if (n_empty == 0) begin failures++; $display("FAIL no empty train"); end
    $display("pipelined=%0d stall_cycles=%0d empty=%0d", n_pipelined, n_stall, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
