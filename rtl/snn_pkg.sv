// snn_pkg: types, constants and the LIF arithmetic shared by the layer-pipelined
// spiking neural network accelerator.
//
// Number format. Weights, biases, accumulators and membrane potentials are 32-bit
// two's-complement fixed-point numbers with FRAC_W fraction bits (Q16.16). The
// 32-bit word width follows the 32-bit read_data bus between neural unit and
// memory unit; the split into integer and fraction bits is this design's choice.
// The leak factor beta is an unsigned BETA_W-bit fraction (value = beta / 2^16).
//
// Weight-load bus. Weights and biases are written through one bus at the top,
// addressed by layer, logical neuron and pre-synaptic index; index == size of the
// pre-synaptic layer selects the neuron's bias. The paper does not describe how
// the memories are filled; this bus is this design's own.
package snn_pkg;

  localparam int DATA_W = 32;       // weight / potential word (32-bit read_data bus)
  localparam int FRAC_W = 16;       // fraction bits of the fixed-point word
  localparam int BETA_W = 16;       // fraction bits of the leak factor beta
  localparam int IDX_W  = 16;       // width of neuron / synapse indices on the load bus

  typedef logic signed [DATA_W-1:0] word_t;

  localparam word_t ONE = word_t'(1) <<< FRAC_W;   // 1.0 in Q16.16

  // One write on the weight-load bus.
  typedef struct packed {
    logic             en;       // write strobe
    logic [1:0]       layer;    // 0 = first hidden layer, 1 = second, 2 = output layer
    logic [IDX_W-1:0] neuron;   // logical neuron of that layer
    logic [IDX_W-1:0] index;    // pre-synaptic neuron, or PRE for the bias
    word_t            data;     // weight or bias value
  } load_t;

  // Control states of the event control unit.
  typedef enum logic [2:0] {
    ECU_IDLE,      // waiting for a spike train from the pre-synaptic layer
    ECU_COMPRESS,  // priority-encoding the spike train into the address shift register
    ECU_SHIFT,     // presenting the next address to the neural units (accumulation)
    ECU_ACC_WAIT,  // waiting for every neural unit to finish that address
    ECU_ACT_HOLD,  // activation ready, output buffer still full (post layer busy)
    ECU_ACT_WAIT   // waiting for every neural unit to finish activation
  } ecu_state_e;

  // beta * v, truncated back to Q16.16 (arithmetic shift, rounds toward -inf).
  function automatic word_t leak(word_t v, logic [BETA_W-1:0] beta);
    logic signed [DATA_W+BETA_W:0] prod;
    prod = v * $signed({1'b0, beta});
    return word_t'(prod >>> BETA_W);
  endfunction

endpackage
