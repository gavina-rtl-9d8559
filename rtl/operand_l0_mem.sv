// operand_l0_mem: first-level operand memory (A0 Mem or B0 Mem).
//
// Holds the bit planes of the context being computed, plane b at address b,
// so the bit-serial sequence can revisit planes without going back to the
// second-level memory. Each read returns one whole binary matrix: [C,L] for
// activations, [K,C] for weights. Two banks give double buffering: the loader
// writes the planes of the next context into one bank while the Parallel
// Array reads the other.
// Timing: writes at the clock edge; read is combinational and feeds the
// input registers. A flip-flop array models the latch-based memory.
// The published design gives the role, the plane-per-read organisation and
// the double buffering; the port shape is this design's choice.
module operand_l0_mem #(
  parameter int unsigned WIDTH  = gavina_pkg::C * gavina_pkg::L,
  parameter int unsigned PLANES = gavina_pkg::MAX_BITS,
  localparam int unsigned AW    = (PLANES > 1) ? $clog2(PLANES) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic             wbank,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rbank,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [2][PLANES];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
  end

  assign rdata = mem[rbank][raddr];

endmodule
