// penc: priority encoder of the event control unit.
//
// Returns the index of the lowest-numbered set bit of a W-bit spike chunk, and
// `valid` when any bit is set. Purely combinational. The paper names the block
// (PENC, "outputs the address of the first set bit") and draws it with a 64-bit
// input and a 6-bit address; which end counts as "first" is not stated, and this
// design takes bit 0. The paper notes that beyond about 100 input bits the encoder
// becomes too costly, so the event control unit feeds it one chunk at a time.
module penc #(
  parameter int W  = 64,
  parameter int AW = (W > 1) ? $clog2(W) : 1
) (
  input  logic [W-1:0]  in,
  output logic [AW-1:0] idx,
  output logic          valid
);
  always_comb begin
    idx   = '0;
    valid = 1'b0;
    for (int i = W - 1; i >= 0; i--) begin
      if (in[i]) begin
        idx   = AW'(i);
        valid = 1'b1;
      end
    end
  end
endmodule
