// nu_fc: neural unit of a fully-connected layer.
//
// What it does. One neural unit serves M logical neurons of a layer (M is the
// layer's logical-to-hardware neuron ratio, LHR). For every pre-synaptic spike
// address it adds the synapse weight of each of its neurons to that neuron's
// accumulator; on activation it applies the leaky integrate-and-fire (LIF) update
//     v_new = beta * v_prev + acc + bias,  spike = (v_new > THRESH)
// and, after a spike, subtracts THRESH from the potential (reset by subtraction).
//
// How it works. The neurons are processed one after another, one memory read per
// cycle, with the memory's one-cycle read latency absorbed by a one-stage
// pipeline. Its memory block holds, for local neuron n and pre-synaptic neuron
// i, the weight at address n*PRE + i (the spike address is the weight address,
// as in the paper), and the bias of neuron n at BIAS_BASE + n (M*PRE unless the layer
// gives its blocks a common layout). Accumulators are
// cleared by the activation that consumes them. On the first time step of a
// sample (first_step) the previous potential is taken as zero.
//
// Interface. accum_en is a one-cycle start pulse, with spk_addr valid in that
// cycle; activ_en likewise starts activation. mem_read_en is a read request
// that stays up until mem_gnt grants it (the memory block may be shared with
// other units); the data returns one cycle after the grant. done pulses for one
// cycle when the unit has finished; spike_out holds the neurons' spikes from the
// last activation.
//
// Timing. With a memory block of its own (always granted), accumulation of one
// address and activation each take M + 1 cycles from the start pulse to done;
// every cycle without a grant adds one.
//
// From the paper: serial per-neuron accumulation, the three-term LIF sum, the
// threshold test, the shift address as weight address, the 32-bit read data.
// This design's own: the pulse protocol, memory layout of the bias, Q16.16
// numbers, reset by subtraction and the strict ">" comparison.
module nu_fc
  import snn_pkg::*;
#(
  parameter int              M      = 4,       // logical neurons served (LHR)
  parameter int              PRE    = 784,     // pre-synaptic layer size
  parameter logic [BETA_W-1:0] BETA = 16'h8000,  // leak factor 0.5
  parameter word_t           THRESH = ONE, // 1.0
  parameter int              BIAS_BASE = M * PRE,  // address of local neuron 0's bias
  parameter int              AW     = $clog2(PRE),
  parameter int              MAW    = $clog2(BIAS_BASE + M)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           accum_en,
  input  logic           activ_en,
  input  logic           first_step,
  input  logic [AW-1:0]  spk_addr,
  output logic           done,
  output logic [M-1:0]   spike_out,
  // memory interface
  output logic           mem_read_en,
  output logic [MAW-1:0] mem_addr,
  input  logic           mem_gnt,
  input  word_t          mem_rd_data
);
  localparam int NW = (M > 1) ? $clog2(M) : 1;

  typedef enum logic [1:0] {NU_IDLE, NU_ACC, NU_ACT} nu_state_e;
  nu_state_e state;

  word_t acc   [M];
  word_t vmem  [M];
  logic [AW-1:0] addr_q;
  logic          first_q;
  logic [NW-1:0] n_issue;      // neuron whose read is issued this cycle
  logic          issuing;
  logic          ret_valid;    // read data for neuron n_ret arrives this cycle
  logic [NW-1:0] n_ret;
  logic          ret_is_act;

  assign issuing     = (state != NU_IDLE);
  assign mem_read_en = issuing;
  assign mem_addr    = (state == NU_ACT) ? MAW'(BIAS_BASE + int'(n_issue))
                                         : MAW'(int'(n_issue) * PRE + int'(addr_q));

  word_t v_prev, v_new;
  always_comb begin
    v_prev = first_q ? word_t'(0) : leak(vmem[n_ret], BETA);
    v_new  = v_prev + acc[n_ret] + mem_rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= NU_IDLE;
      addr_q     <= '0;
      first_q    <= 1'b0;
      n_issue    <= '0;
      ret_valid  <= 1'b0;
      n_ret      <= '0;
      ret_is_act <= 1'b0;
      done       <= 1'b0;
      spike_out  <= '0;
      for (int n = 0; n < M; n++) begin
        acc[n]  <= '0;
        vmem[n] <= '0;
      end
    end else begin
      done      <= 1'b0;
      ret_valid <= issuing && mem_gnt;
      n_ret     <= n_issue;
      ret_is_act <= (state == NU_ACT);

      // issue side
      unique case (state)
        NU_IDLE: begin
          if (accum_en) begin
            addr_q <= spk_addr;
            state  <= NU_ACC;
          end else if (activ_en) begin
            first_q <= first_step;
            state   <= NU_ACT;
          end
        end
        NU_ACC, NU_ACT: if (mem_gnt) begin
          if (int'(n_issue) == M - 1) begin
            state   <= NU_IDLE;
            n_issue <= '0;
          end else begin
            n_issue <= n_issue + 1'b1;
          end
        end
        default: state <= NU_IDLE;
      endcase

      // return side
      if (ret_valid) begin
        if (!ret_is_act) begin
          acc[n_ret] <= acc[n_ret] + mem_rd_data;
        end else begin
          acc[n_ret]       <= '0;
          spike_out[n_ret] <= (v_new > THRESH);
          vmem[n_ret]      <= (v_new > THRESH) ? v_new - THRESH : v_new;
        end
        if (int'(n_ret) == M - 1) done <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (accum_en || activ_en) |-> state == NU_IDLE && !ret_valid);
  assert property (@(posedge clk) disable iff (!rst_n) !(accum_en && activ_en));
endmodule
