// ecu: event control unit of one layer (the "control wrapper").
//
// What it does. The ECU accepts one spike train (one time step of the
// pre-synaptic layer) at a time, turns it into a list of the addresses of the
// neurons that spiked, feeds those addresses one by one to all neural units of
// its layer (accumulation), then lets the neural units compute their LIF update
// (activation), and finally hands the layer's spike train to the next layer.
//
// How it works (Fig. 4 of the paper). On accepting a train it stores it in an
// input buffer, so the pre-synaptic layer is free to go on with its next time
// step at once (layer-wise pipelining). Compression: the train is cut into
// CHUNK-bit chunks; a mux selects either the next chunk of the buffer or the
// bit-reset version of the current chunk; the priority encoder (penc) gives the
// first set bit, whose global address (chunk * CHUNK + bit) is pushed into the
// address shift register (addr_shift_reg); the bit-reset logic clears that bit
// for the next cycle. Shift phase: for each held address the ECU pulses
// accum_en with the address on shifted_spk_addr, waits until every neural unit
// has pulsed its done, then shifts. Activation: pulses activ_en and waits for all
// done; the neural units' spike_out vectors are concatenated into the output
// buffer spk_out_buffer and layer_avail is raised until the next layer takes it.
// If the buffer is still occupied the ECU holds before activation (stall).
// A time-step counter marks the first step of each sample (first_step), on which
// the neural units start from a zero membrane potential.
//
// Interface. pre_syn_avail / spk_in_train / pre_syn_ready (in) and layer_avail /
// spk_out_buffer / post_ready (out) are valid-ready handshakes: a transfer
// happens in a cycle where both are high. The paper names pre_syn_avail,
// layer_avail, accum_en, activ_en, shifted_spk_addr, spike_out and done; the
// ready signals, first_step and the pulse-style enables are this design's.
//
// Timing. Accept: 1 cycle. Compression: one cycle per spike plus one per chunk.
// Accumulation: per address, 1 cycle plus the slowest neural unit. Activation:
// 1 cycle plus the slowest neural unit, then 1 cycle to fill the buffer.
module ecu
  import snn_pkg::*;
#(
  parameter int PRE        = 784,   // neurons of the pre-synaptic layer (spike train width)
  parameter int POST       = 500,   // neurons of this layer (output train width)
  parameter int NUM_NU     = 125,   // neural units of this layer
  parameter int CHUNK      = 64,    // priority-encoder width
  parameter int TIME_STEPS = 15,    // time steps per sample
  parameter int AW         = $clog2(PRE)
) (
  input  logic              clk,
  input  logic              rst_n,
  // pre-synaptic side
  input  logic              pre_syn_avail,
  input  logic [PRE-1:0]    spk_in_train,
  output logic              pre_syn_ready,
  // post-synaptic side
  output logic              layer_avail,
  output logic [POST-1:0]   spk_out_buffer,
  input  logic              post_ready,
  // neural interface
  output logic              accum_en,
  output logic              activ_en,
  output logic              first_step,
  output logic [AW-1:0]     shifted_spk_addr,
  input  logic [NUM_NU-1:0] nu_done,
  input  logic [POST-1:0]   spike_out,
  // observation
  output ecu_state_e        state,
  output logic [$clog2(PRE+1)-1:0] spike_count   // addresses held for this step
);
  localparam int NCHUNK = (PRE + CHUNK - 1) / CHUNK;
  localparam int CIW    = (NCHUNK > 1) ? $clog2(NCHUNK) : 1;
  localparam int PW     = (CHUNK > 1) ? $clog2(CHUNK) : 1;
  localparam int TW     = (TIME_STEPS > 1) ? $clog2(TIME_STEPS) : 1;

  logic [NCHUNK*CHUNK-1:0] in_buf;
  logic [CHUNK-1:0]        cur;          // chunk being encoded (after bit resets)
  logic [CIW-1:0]          chunk_idx;
  logic [NUM_NU-1:0]       done_seen;
  logic [TW-1:0]           step;

  logic [PW-1:0] penc_idx;
  logic          penc_valid;
  logic          sr_push, sr_shift, sr_clear;
  logic [AW-1:0] sr_push_addr, sr_head;

  penc #(.W(CHUNK), .AW(PW)) u_penc (.in(cur), .idx(penc_idx), .valid(penc_valid));

  addr_shift_reg #(.DEPTH(PRE), .AW(AW)) u_sr (
    .clk, .rst_n, .clear(sr_clear), .push(sr_push), .push_addr(sr_push_addr),
    .shift(sr_shift), .head(sr_head), .count(spike_count));

  logic all_done;
  assign all_done = &(done_seen | nu_done);

  logic out_free;
  assign out_free = !layer_avail || post_ready;

  assign pre_syn_ready    = (state == ECU_IDLE);
  assign first_step       = (step == '0);
  assign shifted_spk_addr = sr_head;
  assign sr_push_addr     = AW'(chunk_idx * CHUNK + 32'(penc_idx));
  assign sr_push          = (state == ECU_COMPRESS) && penc_valid;
  assign sr_clear         = (state == ECU_IDLE) && pre_syn_avail;
  assign sr_shift         = (state == ECU_ACC_WAIT) && all_done;

  function automatic logic [CHUNK-1:0] chunk_of(logic [NCHUNK*CHUNK-1:0] b, int c);
    return b[c*CHUNK +: CHUNK];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= ECU_IDLE;
      in_buf         <= '0;
      cur            <= '0;
      chunk_idx      <= '0;
      done_seen      <= '0;
      step           <= '0;
      accum_en       <= 1'b0;
      activ_en       <= 1'b0;
      layer_avail    <= 1'b0;
      spk_out_buffer <= '0;
    end else begin
      accum_en <= 1'b0;
      activ_en <= 1'b0;
      if (layer_avail && post_ready) layer_avail <= 1'b0;

      unique case (state)
        ECU_IDLE: if (pre_syn_avail) begin
          in_buf    <= (NCHUNK*CHUNK)'(spk_in_train);
          cur       <= chunk_of((NCHUNK*CHUNK)'(spk_in_train), 0);
          chunk_idx <= '0;
          state     <= ECU_COMPRESS;
        end
        ECU_COMPRESS: begin
          if (penc_valid) begin
            cur <= cur & ~(CHUNK'(1) << penc_idx);          // bit reset
          end else if (int'(chunk_idx) == NCHUNK - 1) begin
            state <= ECU_SHIFT;
          end else begin
            chunk_idx <= chunk_idx + 1'b1;
            cur       <= chunk_of(in_buf, int'(chunk_idx) + 1);
          end
        end
        ECU_SHIFT: begin
          done_seen <= '0;
          if (spike_count != 0) begin
            accum_en <= 1'b1;
            state    <= ECU_ACC_WAIT;
          end else begin
            state <= ECU_ACT_HOLD;
          end
        end
        ECU_ACC_WAIT: begin
          done_seen <= done_seen | nu_done;
          if (all_done) state <= ECU_SHIFT;
        end
        ECU_ACT_HOLD: if (out_free) begin
          done_seen <= '0;
          activ_en  <= 1'b1;
          state     <= ECU_ACT_WAIT;
        end
        ECU_ACT_WAIT: begin
          done_seen <= done_seen | nu_done;
          if (all_done && out_free) begin
            spk_out_buffer <= spike_out;
            layer_avail    <= 1'b1;
            step           <= (int'(step) == TIME_STEPS - 1) ? '0 : step + 1'b1;
            state          <= ECU_IDLE;
          end
        end
        default: state <= ECU_IDLE;
      endcase
    end
  end

  // A neural unit never reports done without having been started.
  assert property (@(posedge clk) disable iff (!rst_n)
    (nu_done != '0) |-> (state == ECU_ACC_WAIT || state == ECU_ACT_WAIT));
  // The output buffer is only overwritten once the next layer has taken it.
  assert property (@(posedge clk) disable iff (!rst_n)
    layer_avail && !post_ready |=> layer_avail && $stable(spk_out_buffer));
endmodule
