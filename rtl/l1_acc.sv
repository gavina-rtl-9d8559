// l1_acc: Level-1 shift and accumulate stage, one lane per output element.
//
// Once per completed L0 window (valid), every lane sign-extends the window
// sum, shifts it left by the window's base significance (full range
// 0..2*MAX_BITS-2) and adds it to its accumulator. The first window of a
// context starts either from zero or, when init_from_p is set, from the value
// read from the result memory (p_rdata), so partial results of several C
// tiles can be summed. On the last window of a context the new sums are also
// presented on p_wdata with p_we high for one cycle, to be written to the
// result memory at the clock edge.
// Timing: p_rdata must be valid in the same cycle as valid & first (the
// result memory has a combinational read); p_we/p_wdata are combinational
// from the inputs of that cycle.
// Following the published design: full barrel shifter, accumulator register,
// read and write of the result memory. This design's choices: ACC_W-bit
// signed accumulators, the init_from_p flag, synchronous reset.
module l1_acc #(
  parameter int unsigned LANES   = gavina_pkg::K * gavina_pkg::L,
  parameter int unsigned L0_W    = gavina_pkg::L0_W,
  parameter int unsigned ACC_W   = gavina_pkg::ACC_W,
  parameter int unsigned SHIFT_W = gavina_pkg::SIG_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid,
  input  logic                   first,
  input  logic                   last,
  input  logic [SHIFT_W-1:0]     shift,
  input  logic                   init_from_p,
  input  logic [LANES*L0_W-1:0]  l0_acc,
  input  logic [LANES*ACC_W-1:0] p_rdata,
  output logic                   p_we,
  output logic [LANES*ACC_W-1:0] p_wdata
);

  assign p_we = valid & last;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic signed [ACC_W-1:0] acc_q;
    logic signed [ACC_W-1:0] base;
    logic signed [ACC_W-1:0] term;
    logic signed [ACC_W-1:0] sum;

    always_comb begin
      term = ACC_W'(signed'(l0_acc[i*L0_W +: L0_W])) <<< shift;
      if (first) base = init_from_p ? signed'(p_rdata[i*ACC_W +: ACC_W]) : '0;
      else       base = acc_q;
      sum = base + term;
    end

    always_ff @(posedge clk) begin
      if (!rst_n)     acc_q <= '0;
      else if (valid) acc_q <= sum;
    end

    assign p_wdata[i*ACC_W +: ACC_W] = sum;
  end

endmodule
