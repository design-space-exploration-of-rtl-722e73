// addr_shift_reg: the shift register array of the event control unit.
//
// During compression the priority encoder's addresses are appended one per cycle
// (`push`). During the shift phase the oldest address is always at `head`; `shift`
// moves every entry one place toward the head, dropping it. `count` is the number
// of addresses held and `clear` empties the array. DEPTH must be the size of the
// pre-synaptic layer, since in the worst case every pre-synaptic neuron spikes.
// push and shift in the same cycle are allowed (the pushed word lands behind the
// remaining entries). The register array follows Fig. 4 of the paper; its write
// and read rules are this design's.
module addr_shift_reg #(
  parameter int DEPTH = 784,
  parameter int AW    = 10,
  parameter int CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [AW-1:0] push_addr,
  input  logic          shift,
  output logic [AW-1:0] head,
  output logic [CW-1:0] count
);
  logic [AW-1:0] regs [DEPTH];
  logic [CW-1:0] wpos;

  assign head = regs[0];
  // Position the new word is written to, after an optional shift this cycle.
  assign wpos = (shift && count != 0) ? count - 1'b1 : count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < DEPTH; i++) regs[i] <= '0;
    end else if (clear) begin
      count <= '0;
    end else begin
      if (shift && count != 0) begin
        for (int i = 0; i < DEPTH - 1; i++) regs[i] <= regs[i+1];
      end
      if (push && int'(wpos) < DEPTH) regs[wpos] <= push_addr;
      count <= wpos + CW'(push && int'(wpos) < DEPTH);
    end
  end

  // Overflow would mean more spikes than pre-synaptic neurons.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (int'(wpos) < DEPTH));
endmodule
