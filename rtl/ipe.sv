// ipe: Inner-Product Element of the Parallel Array.
//
// Computes the binary inner product of one activation bit column and one
// weight bit row: C two-input ANDs followed by an adder tree that counts the
// ones. The result is an unsigned integer of clog2(C+1) bits, so C=576 gives
// 10 bits. Purely combinational; in the accelerator it sits in the
// approximate (undervolted) power domain between the input registers and the
// synchronizer. The AND-plus-adder-tree structure follows the published iPE
// diagram; the adder tree is written as a sum and left to synthesis.
module ipe #(
  parameter int unsigned C      = gavina_pkg::C,
  parameter int unsigned S_BITS = $clog2(C + 1)
) (
  input  logic [C-1:0]      a,  // A[c][l] at one bit significance
  input  logic [C-1:0]      b,  // B[k][c] at one bit significance
  output logic [S_BITS-1:0] p   // number of c with a[c] & b[c]
);

  logic [C-1:0] prod;

  always_comb begin
    prod = a & b;
    p    = '0;
    for (int unsigned c = 0; c < C; c++) begin
      p = p + S_BITS'(prod[c]);
    end
  end

endmodule
