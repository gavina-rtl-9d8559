// input_regs: operand registers at the entry of the approximate region.
//
// They capture the A and B bit planes read from the first-level memories and
// hold them for the Parallel Array, cutting the memory-to-logic path. The
// published design places them in the undervolted domain together with the
// array. Here they load only on cycles that carry a bit-serial step (en) and
// hold otherwise, so the array does not toggle while idle; that enable and
// the synchronous reset to zero are this design's choices.
// Timing: data presented with en in cycle t is on a_q/b_q in cycle t+1.
module input_regs #(
  parameter int unsigned C = gavina_pkg::C,
  parameter int unsigned L = gavina_pkg::L,
  parameter int unsigned K = gavina_pkg::K
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [C*L-1:0] a_in,
  input  logic [K*C-1:0] b_in,
  output logic [C*L-1:0] a_q,
  output logic [K*C-1:0] b_q
);

  always_ff @(posedge clk) begin
    if (!rst_n) a_q <= '0;
    else if (en) a_q <= a_in;
  end

  // B is registered row by row (C bits each) to keep every reset constant
  // a modest width.
  for (genvar k = 0; k < K; k++) begin : g_b_row
    always_ff @(posedge clk) begin
      if (!rst_n) b_q[k*C +: C] <= '0;
      else if (en) b_q[k*C +: C] <= b_in[k*C +: C];
    end
  end

endmodule
