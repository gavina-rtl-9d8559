// parallel_array: the K x L grid of iPEs that multiplies two binary matrices.
//
// Every cycle it multiplies one activation bit plane A[C,L] by one weight bit
// plane B[K,C] and yields the [K,L] matrix of unsigned partial products, each
// clog2(C+1) bits wide. All three GEMM loops over l, k and c are unrolled;
// only the bit-significance loops run in time. Combinational.
//
// Plane packing (this design's choice): a_plane[l*C + c] = A[c][l],
// b_plane[k*C + c] = B[k][c]; output lane k*L + l holds P[k][l] at
// p[(k*L+l)*S_BITS +: S_BITS].
module parallel_array #(
  parameter int unsigned C      = gavina_pkg::C,
  parameter int unsigned L      = gavina_pkg::L,
  parameter int unsigned K      = gavina_pkg::K,
  parameter int unsigned S_BITS = $clog2(C + 1)
) (
  input  logic [C*L-1:0]        a_plane,
  input  logic [K*C-1:0]        b_plane,
  output logic [K*L*S_BITS-1:0] p
);

  for (genvar k = 0; k < K; k++) begin : g_k
    for (genvar l = 0; l < L; l++) begin : g_l
      ipe #(.C(C), .S_BITS(S_BITS)) u_ipe (
        .a (a_plane[l*C +: C]),
        .b (b_plane[k*C +: C]),
        .p (p[(k*L+l)*S_BITS +: S_BITS])
      );
    end
  end

endmodule
