// fc_layer: one fully-connected spiking layer of the accelerator.
//
// What it does. Takes one spike train of PRE bits per time step from the
// pre-synaptic layer and produces the layer's own spike train of POST bits,
// keeping the POST neurons' membrane potentials between time steps.
//
// How it works (Fig. 3 of the paper). A control wrapper (one ecu) drives a
// neural wrapper of NUM_NU = ceil(POST / LHR) neural units (nu_fc); neural unit k
// serves the logical neurons k*LHR ... k*LHR + LHR - 1, the last unit fewer when
// LHR does not divide POST. The memory wrapper has ceil(NUM_NU / MEM_SHARE)
// memory blocks (mem_unit); each serves MEM_SHARE consecutive units, each unit
// owning a region of LHR x (PRE + 1) words. With MEM_SHARE = 1 every unit has a
// block of its own and never waits; with more, the units of a block take turns
// and a layer step slows down accordingly. The neural
// interface broadcasts accum_en, activ_en, first_step and the spike address to
// all units and gathers their done and spike_out lines; the output train is the
// concatenation of the units' spike_out vectors in neuron order. The memory
// interface connects each unit to its block and lets the weight-load bus write
// into the blocks.
//
// Interface. Spike trains in and out use valid-ready handshakes (see ecu).
// ld_* writes weight ld_data of logical neuron ld_neuron from pre-synaptic
// neuron ld_index, or its bias when ld_index == PRE. Loads must be made while the
// layer is idle; a load has priority over a neural unit's read.
//
// From the paper: the partitioning of the layer into groups of LHR neurons, one
// ECU per layer, a configurable count of memory blocks shared by the units.
// This design's own: the load bus, the default of one block per unit (the
// paper gives no block count; its figure draws one block per unit) and the
// region layout inside a shared block.
module fc_layer
  import snn_pkg::*;
#(
  parameter int                PRE        = 784,
  parameter int                POST       = 500,
  parameter int                LHR        = 4,
  parameter int                MEM_SHARE  = 1,     // neural units per memory block
  parameter int                CHUNK      = 64,
  parameter int                TIME_STEPS = 15,
  parameter logic [BETA_W-1:0] BETA       = 16'h8000,
  parameter word_t             THRESH     = ONE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [PRE-1:0]   in_spikes,
  output logic             in_ready,
  output logic             out_valid,
  output logic [POST-1:0]  out_spikes,
  input  logic             out_ready,
  // weight-load bus
  input  logic             ld_en,
  input  logic [IDX_W-1:0] ld_neuron,
  input  logic [IDX_W-1:0] ld_index,
  input  word_t            ld_data,
  // observation
  output ecu_state_e       state
);
  localparam int NUM_NU = (POST + LHR - 1) / LHR;
  localparam int AW     = $clog2(PRE);
  localparam int NUM_MEM    = (NUM_NU + MEM_SHARE - 1) / MEM_SHARE;
  localparam int UNIT_DEPTH = LHR * (PRE + 1);
  localparam int LAW        = $clog2(UNIT_DEPTH);

  logic              accum_en, activ_en, first_step;
  logic [AW-1:0]     spk_addr;
  logic [NUM_NU-1:0] nu_done;
  logic [POST-1:0]   spike_out;
  logic [$clog2(PRE+1)-1:0] spike_count;

  ecu #(.PRE(PRE), .POST(POST), .NUM_NU(NUM_NU), .CHUNK(CHUNK),
        .TIME_STEPS(TIME_STEPS), .AW(AW)) u_ecu (
    .clk, .rst_n,
    .pre_syn_avail(in_valid), .spk_in_train(in_spikes), .pre_syn_ready(in_ready),
    .layer_avail(out_valid), .spk_out_buffer(out_spikes), .post_ready(out_ready),
    .accum_en, .activ_en, .first_step, .shifted_spk_addr(spk_addr),
    .nu_done, .spike_out, .state, .spike_count);

  // Load-bus decode: which unit, which word of its region, which block.
  logic [IDX_W-1:0] ld_nu, ld_local;
  logic [LAW-1:0]   ld_addr;
  always_comb begin
    ld_nu    = IDX_W'(int'(ld_neuron) / LHR);
    ld_local = IDX_W'(int'(ld_neuron) % LHR);
    ld_addr  = (int'(ld_index) >= PRE) ? LAW'(LHR * PRE + int'(ld_local))
                                       : LAW'(int'(ld_local) * PRE + int'(ld_index));
  end

  // Neural wrapper.
  logic [NUM_NU-1:0] nu_rd_en, nu_gnt;
  logic [LAW-1:0]    nu_addr  [NUM_NU];
  word_t             nu_rdata [NUM_NU];

  for (genvar k = 0; k < NUM_NU; k++) begin : g_nu
    localparam int NM = (POST - k * LHR < LHR) ? POST - k * LHR : LHR;  // neurons of unit k
    logic [NM-1:0] nu_spk;

    nu_fc #(.M(NM), .PRE(PRE), .BETA(BETA), .THRESH(THRESH),
            .BIAS_BASE(LHR * PRE), .AW(AW), .MAW(LAW)) u_nu (
      .clk, .rst_n, .accum_en, .activ_en, .first_step, .spk_addr,
      .done(nu_done[k]), .spike_out(nu_spk),
      .mem_read_en(nu_rd_en[k]), .mem_addr(nu_addr[k]), .mem_gnt(nu_gnt[k]),
      .mem_rd_data(nu_rdata[k]));

    assign spike_out[k*LHR +: NM] = nu_spk;
  end

  // Memory wrapper: block g serves units g*MEM_SHARE ... (fewer in the last block).
  for (genvar g = 0; g < NUM_MEM; g++) begin : g_mem
    localparam int NP = (NUM_NU - g * MEM_SHARE < MEM_SHARE) ? NUM_NU - g * MEM_SHARE
                                                             : MEM_SHARE;
    localparam int BAW = $clog2(NP * UNIT_DEPTH);
    logic [NP-1:0]  req, gnt;
    logic [LAW-1:0] addr [NP];
    word_t          rdata;
    logic           sel_ld;
    logic [BAW-1:0] wr_addr;

    for (genvar p = 0; p < NP; p++) begin : g_port
      assign req[p]  = nu_rd_en[g*MEM_SHARE + p];
      assign addr[p] = nu_addr[g*MEM_SHARE + p];
      assign nu_gnt[g*MEM_SHARE + p]   = gnt[p];
      assign nu_rdata[g*MEM_SHARE + p] = rdata;
    end

    assign sel_ld  = ld_en && (int'(ld_nu) / MEM_SHARE == g);
    assign wr_addr = BAW'((int'(ld_nu) % MEM_SHARE) * UNIT_DEPTH + int'(ld_addr));

    mem_unit #(.UNIT_DEPTH(UNIT_DEPTH), .PORTS(NP), .DW(DATA_W), .LAW(LAW), .AW(BAW)) u_mem (
      .clk, .rd_req(req), .rd_addr(addr), .rd_gnt(gnt), .rd_data(rdata),
      .wr_en(sel_ld), .wr_addr(wr_addr), .wr_data(ld_data));
  end
endmodule
