// tb_nu_fc: drives one FC neural unit (4 neurons, 20 pre-synaptic neurons)
// through two samples of several time steps with random spike addresses, serves
// its memory reads from a one-cycle-latency model, and compares the spikes with
// a reference LIF computation. In the first sample every read is granted at
// once and done must come M + 1 cycles after each start; in the second the
// grant is withheld at random, as from a shared memory block, and the results
// must be the same.
module tb_nu_fc;
  import snn_pkg::*;
  import snn_tb_pkg::*;
  localparam int M = 4, PRE = 20, AW = $clog2(PRE), MAW = $clog2(M*(PRE+1));
  localparam int BETA_I = 16'h8000;
  localparam word_t THR = 32'sh0001_0000;

  logic clk = 0, rst_n = 0, accum_en = 0, activ_en = 0, first_step = 0;
  logic [AW-1:0] spk_addr = '0;
  logic done;
  logic [M-1:0] spike_out;
  logic mem_read_en, mem_gnt = 1;
  bit random_gnt = 0;
  logic [MAW-1:0] mem_addr;
  word_t mem_rd_data;
  word_t mem [M*(PRE+1)];
  int checks = 0, failures = 0, nspk = 0;

  nu_fc #(.M(M), .PRE(PRE), .BETA(16'(BETA_I)), .THRESH(THR)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_read_en && mem_gnt) mem_rd_data <= mem[mem_addr];
  // Shared-memory model: in the second sample the grant is withheld at random.
  always @(negedge clk) mem_gnt = !random_gnt || ($urandom_range(2, 0) == 0);

  task automatic pulse_and_time(input bit act, output int cycles);
    @(negedge clk);
    if (act) activ_en = 1; else accum_en = 1;
    @(posedge clk); cycles = 0;
    @(negedge clk); accum_en = 0; activ_en = 0;
    do begin @(posedge clk); cycles++; #1; end while (!done && cycles < 1000);
  endtask

  initial begin
    word_t v [M];
    longint acc [M];
    mem_rd_data = '0;
    for (int n = 0; n < M; n++) begin
      for (int i = 0; i < PRE; i++) mem[n*PRE + i] = syn_weight(0, n, i, 65536, 16384);
      mem[M*PRE + n] = syn_weight(0, n, PRE, 16384, 4096);
      v[n] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int sample = 0; sample < 2; sample++) begin
      random_gnt = (sample == 1);
      for (int t = 0; t < 6; t++) begin
        int cyc;
        for (int n = 0; n < M; n++) acc[n] = 0;
        for (int i = 0; i < PRE; i++) begin
          if ($urandom_range(2, 0) != 0) continue;
          spk_addr = AW'(i);
          for (int n = 0; n < M; n++) acc[n] += longint'(mem[n*PRE + i]);
          pulse_and_time(0, cyc);
          checks++;
          if (random_gnt ? cyc < M + 1 : cyc != M + 1) begin
            failures++; $display("FAIL accum took %0d cycles", cyc);
          end
        end
        first_step = (t == 0);
        pulse_and_time(1, cyc);
        checks++;
        if (random_gnt ? cyc < M + 1 : cyc != M + 1) begin
          failures++; $display("FAIL activ took %0d cycles", cyc);
        end
        @(negedge clk);
        for (int n = 0; n < M; n++) begin
          bit s;
          ref_lif(v[n], acc[n], mem[M*PRE + n], t == 0, BETA_I, THR, s);
          nspk += int'(s);
          checks++;
          if (spike_out[n] != s) begin
            failures++;
            $display("FAIL sample %0d step %0d neuron %0d spike %0b exp %0b", sample, t, n,
                     spike_out[n], s);
          end
        end
      end
    end
    checks++;
    if (nspk == 0 || nspk == 2 * 6 * M) begin
      failures++; $display("FAIL stimulus gives no contrast: %0d spikes", nspk);
    end
    $display("spikes=%0d", nspk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
