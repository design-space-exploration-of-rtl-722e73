// snn_top: layer-pipelined spiking neural network accelerator for a
// 784-500-500-300 fully-connected network (MNIST, 10 classes x 30 output
// neurons of population coding) with logical-to-hardware neuron ratios 4, 8, 8.
//
// What it does. Each time step the input layer's 784-bit spike train (one bit
// per pixel, rate coded outside the chip) enters the first hidden layer; each
// layer's output train feeds the next; the output layer's 300-bit spike train
// leaves the chip. Class decisions (counting the spikes of each class's pool of
// 30 output neurons over the sample) are left to the receiver.
//
// How it works. Three fc_layer instances are chained with valid-ready
// handshakes. Because every layer's event control unit copies the incoming train
// into its own buffer on acceptance, the three layers work on three different
// time steps at once (layer-wise pipelining); a layer whose output buffer is
// still occupied holds before its activation phase. Layer sizes 500 and 300 are
// not multiples of 8, so the last neural unit of layers 2 and 3 serves 4 neurons.
// A sample is TIME_STEPS consecutive trains; every layer restarts its membrane
// potentials at the first train of a sample.
//
// Interface. in_valid / in_spikes / in_ready: input spike trains. out_valid /
// out_spikes / out_ready: output spike trains. load: weight-load bus (see
// snn_pkg::load_t), to be used while the network is idle. The three layer
// states (st1..st3) are left unconnected on purpose: they exist for
// observation from testbenches.
//
// MEM_SHAREn sets how many neural units of layer n share one memory block
// (default 1: a block per unit).
//
// From the paper: topology net-1 (784-500-500-10 with 300 population-coded
// output neurons), the ratio set (4, 8, 8), 15 time steps (the paper's best
// accuracy point for 30 neurons per class). This design's own: the handshakes,
// the load bus, beta = 0.5 and threshold = 1.0 (the paper gives no values for
// this network).
module snn_top
  import snn_pkg::*;
#(
  parameter int                N_IN       = 784,
  parameter int                N_H1       = 500,
  parameter int                N_H2       = 500,
  parameter int                N_OUT      = 300,
  parameter int                LHR1       = 4,
  parameter int                LHR2       = 8,
  parameter int                LHR3       = 8,
  parameter int                MEM_SHARE1 = 1,     // neural units per memory block
  parameter int                MEM_SHARE2 = 1,
  parameter int                MEM_SHARE3 = 1,
  parameter int                CHUNK      = 64,
  parameter int                TIME_STEPS = 15,
  parameter logic [BETA_W-1:0] BETA       = 16'h8000,
  parameter word_t             THRESH     = ONE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N_IN-1:0]  in_spikes,
  output logic             in_ready,
  output logic             out_valid,
  output logic [N_OUT-1:0] out_spikes,
  input  logic             out_ready,
  input  load_t            load
);
  logic            v1, r1, v2, r2;
  logic [N_H1-1:0] s1;
  logic [N_H2-1:0] s2;
  ecu_state_e      st1, st2, st3;

  fc_layer #(.PRE(N_IN), .POST(N_H1), .LHR(LHR1), .MEM_SHARE(MEM_SHARE1),
             .CHUNK(CHUNK), .TIME_STEPS(TIME_STEPS),
             .BETA(BETA), .THRESH(THRESH)) u_l1 (
    .clk, .rst_n,
    .in_valid, .in_spikes, .in_ready,
    .out_valid(v1), .out_spikes(s1), .out_ready(r1),
    .ld_en(load.en && load.layer == 2'd0), .ld_neuron(load.neuron),
    .ld_index(load.index), .ld_data(load.data), .state(st1));

  fc_layer #(.PRE(N_H1), .POST(N_H2), .LHR(LHR2), .MEM_SHARE(MEM_SHARE2),
             .CHUNK(CHUNK), .TIME_STEPS(TIME_STEPS),
             .BETA(BETA), .THRESH(THRESH)) u_l2 (
    .clk, .rst_n,
    .in_valid(v1), .in_spikes(s1), .in_ready(r1),
    .out_valid(v2), .out_spikes(s2), .out_ready(r2),
    .ld_en(load.en && load.layer == 2'd1), .ld_neuron(load.neuron),
    .ld_index(load.index), .ld_data(load.data), .state(st2));

  fc_layer #(.PRE(N_H2), .POST(N_OUT), .LHR(LHR3), .MEM_SHARE(MEM_SHARE3),
             .CHUNK(CHUNK), .TIME_STEPS(TIME_STEPS),
             .BETA(BETA), .THRESH(THRESH)) u_l3 (
    .clk, .rst_n,
    .in_valid(v2), .in_spikes(s2), .in_ready(r2),
    .out_valid, .out_spikes, .out_ready,
    .ld_en(load.en && load.layer == 2'd2), .ld_neuron(load.neuron),
    .ld_index(load.index), .ld_data(load.data), .state(st3));
endmodule
