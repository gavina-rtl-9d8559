// operand_l1_mem: second-level operand memory (A1 Mem or B1 Mem).
//
// Holds bit planes of activations (WIDTH = C*L) or weights (WIDTH = K*C) as
// written by the host, one plane per line. The host writes and reads
// HOST_DW-bit words of a line; the accelerator reads a whole line per cycle
// to copy it into the first-level memory. Two banks of LINES lines each give
// double buffering: the line address's top bit selects the bank, so the host
// can fill one bank while contexts read the other.
// Timing: writes take effect at the clock edge; both reads are combinational
// (a latch-based standard-cell memory is modelled here as a flip-flop array).
// The published design gives the role and the double buffering; depths, the
// host word size and the bank-by-address scheme are this design's choices.
module operand_l1_mem #(
  parameter int unsigned WIDTH   = gavina_pkg::C * gavina_pkg::L,
  parameter int unsigned LINES   = gavina_pkg::L1_LINES,
  parameter int unsigned HOST_DW = gavina_pkg::HOST_DW,
  localparam int unsigned WORDS  = (WIDTH + HOST_DW - 1) / HOST_DW,
  localparam int unsigned ADDR_W = $clog2(2 * LINES),
  localparam int unsigned WORD_W = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic               clk,
  // host port
  input  logic               host_we,
  input  logic [ADDR_W-1:0]  host_line,
  input  logic [WORD_W-1:0]  host_word,
  input  logic [HOST_DW-1:0] host_wdata,
  output logic [HOST_DW-1:0] host_rdata,
  // accelerator line read port
  input  logic [ADDR_W-1:0]  rd_line,
  output logic [WIDTH-1:0]   rd_data
);

  logic [WORDS*HOST_DW-1:0] mem [2*LINES];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_line][host_word*HOST_DW +: HOST_DW] <= host_wdata;
  end

  assign rd_data    = mem[rd_line][WIDTH-1:0];
  assign host_rdata = mem[host_line][host_word*HOST_DW +: HOST_DW];

endmodule
