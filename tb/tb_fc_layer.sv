// tb_fc_layer: one FC layer of 40 inputs and 10 neurons on 3 neural units (LHR
// 4, so the last unit serves 2 neurons), 16-bit encoder chunks, 4 time steps per
// sample. Loads weights and biases through the load bus, runs three samples of
// random spike trains and compares every output train with a reference model of
// the layer. Also checks the latency of each time step against
//   cycles(accept -> output valid) = NCHUNK + LHR + 5 + s*(LHR + 5)
// for s input spikes, and that a step with no input spike still applies leak
// and bias.
module tb_fc_layer;
  import snn_pkg::*;
  import snn_tb_pkg::*;
  localparam int PRE = 40, POST = 10, LHR = 4, CHUNK = 16, TS = 4;
  localparam int NCHUNK = (PRE + CHUNK - 1) / CHUNK;
  localparam int BETA_I = 16'h8000;
  localparam word_t THR = 32'sh0001_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [PRE-1:0] in_spikes = '0;
  logic [POST-1:0] out_spikes;
  logic ld_en = 0;
  logic [IDX_W-1:0] ld_neuron = '0, ld_index = '0;
  word_t ld_data = '0;
  ecu_state_e state;
  int checks = 0, failures = 0, nspk = 0;

  fc_layer #(.PRE(PRE), .POST(POST), .LHR(LHR), .CHUNK(CHUNK), .TIME_STEPS(TS),
             .BETA(16'(BETA_I)), .THRESH(THR)) dut (.*);
  always #5 clk = ~clk;

  function automatic word_t w(int n, int i);
    return (i == PRE) ? syn_weight(1, n, i, 16384, 4096) : syn_weight(1, n, i, 65536, 30000);
  endfunction

  initial begin
    word_t v [POST];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < POST; n++)
      for (int i = 0; i <= PRE; i++) begin
        @(negedge clk); ld_en = 1; ld_neuron = IDX_W'(n); ld_index = IDX_W'(i); ld_data = w(n, i);
      end
    @(negedge clk); ld_en = 0;
    for (int sample = 0; sample < 3; sample++) begin
      for (int t = 0; t < TS; t++) begin
        logic [PRE-1:0] x;
        logic [POST-1:0] e;
        int s, lat;
        x = {$urandom, $urandom} & {$urandom, $urandom};
        if (sample == 1 && t == 2) x = '0;
        s = $countones(x);
        for (int n = 0; n < POST; n++) begin
          longint acc;
          bit sp;
          acc = 0;
          for (int i = 0; i < PRE; i++) if (x[i]) acc += longint'(w(n, i));
          ref_lif(v[n], acc, w(n, PRE), t == 0, BETA_I, THR, sp);
          e[n] = sp;
        end
        @(negedge clk); in_valid = 1; in_spikes = x;
        @(posedge clk); lat = 0;
        @(negedge clk); in_valid = 0;
        do begin @(posedge clk); lat++; #1; end while (!out_valid && lat < 10000);
        checks += 2;
        if (out_spikes != e) begin
          failures++; $display("FAIL sample %0d step %0d out %b exp %b", sample, t, out_spikes, e);
        end
        if (lat != NCHUNK + LHR + 5 + s * (LHR + 5)) begin
          failures++; $display("FAIL latency %0d for %0d spikes", lat, s);
        end
        nspk += $countones(e);
      end
    end
    checks++;
    if (nspk == 0 || nspk == 3 * TS * POST) begin failures++; $display("FAIL no contrast"); end
    $display("output spikes=%0d", nspk);
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
