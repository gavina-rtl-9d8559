// p_mem: result memory of the accelerator (P Mem).
//
// Each line holds one [K,L] result matrix of ACC_W-bit signed integers,
// element P[k][l] at bits (k*L+l)*ACC_W. The L1 accumulator reads a line at
// the start of a context that accumulates onto an earlier partial result and
// writes the line when the context ends; the host reads results HOST_DW bits
// at a time. Two banks of LINES lines (top address bit) give double
// buffering between the host and the accelerator.
// Timing: write at the clock edge, reads combinational. A flip-flop array
// models the latch-based memory. Depth and ports are this design's choices.
module p_mem #(
  parameter int unsigned LANES   = gavina_pkg::K * gavina_pkg::L,
  parameter int unsigned ACC_W   = gavina_pkg::ACC_W,
  parameter int unsigned LINES   = gavina_pkg::P_LINES,
  parameter int unsigned HOST_DW = gavina_pkg::HOST_DW,
  localparam int unsigned WIDTH  = LANES * ACC_W,
  localparam int unsigned WORDS  = (WIDTH + HOST_DW - 1) / HOST_DW,
  localparam int unsigned ADDR_W = $clog2(2 * LINES),
  localparam int unsigned WORD_W = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic               clk,
  // accumulator port
  input  logic               we,
  input  logic [ADDR_W-1:0]  addr,
  input  logic [WIDTH-1:0]   wdata,
  output logic [WIDTH-1:0]   rdata,
  // host read port
  input  logic [ADDR_W-1:0]  host_line,
  input  logic [WORD_W-1:0]  host_word,
  output logic [HOST_DW-1:0] host_rdata
);

  logic [WORDS*HOST_DW-1:0] mem [2*LINES];

  always_ff @(posedge clk) begin
    if (we) mem[addr][WIDTH-1:0] <= wdata;
  end

  assign rdata      = mem[addr][WIDTH-1:0];
  assign host_rdata = mem[host_line][host_word*HOST_DW +: HOST_DW];

endmodule
