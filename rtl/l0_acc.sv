// l0_acc: Level-0 shift, sign and accumulate stage, one lane per iPE.
//
// Each cycle that carries a bit-serial step (valid), every lane shifts its
// synchronised iPE output left by a small amount (0..L0_SHIFT_MAX), negates
// it when the step's sign is negative, and adds it to its accumulator. The
// first step of an L0 window (first) restarts the sum instead of adding. A
// window covers at most L0_SHIFT_MAX+1 neighbouring bit significances, so the
// shifters stay small; the L1 stage applies the remaining shift once per
// window.
// Timing: the window sum including step t is on acc in cycle t+1 and stays
// there until the next valid step.
// Following the published design: small shifter, sign inversion, register per
// lane. This design's choices: left shift by the L0 shift value, two's
// complement negation, L0_W-bit signed accumulators, synchronous reset.
module l0_acc #(
  parameter int unsigned LANES   = gavina_pkg::K * gavina_pkg::L,
  parameter int unsigned S_BITS  = gavina_pkg::S_BITS,
  parameter int unsigned SHIFT_W = gavina_pkg::L0_SHIFT_W,
  parameter int unsigned L0_W    = gavina_pkg::L0_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic [SHIFT_W-1:0]      shift,
  input  logic                    neg,
  input  logic [LANES*S_BITS-1:0] p,
  output logic [LANES*L0_W-1:0]   acc
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic signed [L0_W-1:0] term;
    logic signed [L0_W-1:0] acc_q;

    always_comb begin
      term = signed'(L0_W'(p[i*S_BITS +: S_BITS])) <<< shift;
      if (neg) term = -term;
    end

    always_ff @(posedge clk) begin
      if (!rst_n)     acc_q <= '0;
      else if (valid) acc_q <= (first ? L0_W'(0) : acc_q) + term;
    end

    assign acc[i*L0_W +: L0_W] = acc_q;
  end

endmodule
