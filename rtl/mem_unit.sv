// mem_unit: one synapse memory block of a layer with its access-mapping logic
// (the "memory wrapper").
//
// What it does. A single-port synchronous RAM shared by PORTS neural units. Each
// unit sees its own region of UNIT_DEPTH words (region p starts at
// p * UNIT_DEPTH) and addresses it with a local address. With PORTS = 1 it is a
// plain block RAM per unit.
//
// How it works. Each cycle at most one access happens: a write from the
// weight-load bus (wr_en, full address wr_addr) has priority; otherwise the
// lowest-numbered unit with rd_req set is granted (rd_gnt) and its word is
// returned on the shared rd_data one cycle later. A unit that is not granted
// keeps its request up and waits. Units ask for at most M words per phase, so
// fixed priority cannot starve anyone. rd_data holds its value between reads.
//
// Interface and timing. rd_req/rd_addr/rd_gnt per unit; rd_data valid in the
// cycle after a grant. The contents are not reset; they are filled through the
// load port.
//
// From the paper: a block of depth M x SIZE (M neurons per block, SIZE the
// pre-synaptic layer), a 32-bit read data bus, read_en / wr_en / a shared
// address / wr_data / rd_data, and mapping logic that lets several hardware
// neurons use one block. This design's own: M extra words per unit for the
// biases (UNIT_DEPTH = LHR x (SIZE + 1)), the fixed-priority arbitration and the
// separate write address of the load port.
module mem_unit
  import snn_pkg::*;
#(
  parameter int UNIT_DEPTH = 4 * (784 + 1),   // words per neural unit
  parameter int PORTS      = 1,               // neural units sharing this block
  parameter int DW         = DATA_W,
  parameter int LAW        = $clog2(UNIT_DEPTH),          // local (per-unit) address
  parameter int AW         = $clog2(PORTS * UNIT_DEPTH)   // block address
) (
  input  logic                 clk,
  // neural-unit side
  input  logic [PORTS-1:0]     rd_req,
  input  logic [LAW-1:0]       rd_addr [PORTS],
  output logic [PORTS-1:0]     rd_gnt,
  output logic [DW-1:0]        rd_data,
  // load side
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [DW-1:0]        wr_data
);
  localparam int DEPTH = PORTS * UNIT_DEPTH;

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] raddr;
  logic          read_en;

  // Fixed-priority grant, blocked by a load write.
  always_comb begin
    rd_gnt  = '0;
    raddr   = '0;
    read_en = 1'b0;
    if (!wr_en) begin
      for (int p = PORTS - 1; p >= 0; p--) begin
        if (rd_req[p]) begin
          rd_gnt  = PORTS'(1) << p;
          raddr   = AW'(p * UNIT_DEPTH + int'(rd_addr[p]));
          read_en = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    if (read_en) rd_data <= (int'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

  assert property (@(posedge clk) $onehot0(rd_gnt));
endmodule
