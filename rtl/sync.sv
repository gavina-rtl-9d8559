// sync: multi-stage synchronizer on the Parallel Array outputs.
//
// Under undervolting the array outputs can still be switching at the clock
// edge, so the first flop that samples them may go metastable. A chain of
// STAGES flops per bit (two in the published design) in the protected domain
// keeps a metastable value from spreading into the accumulators. In RTL this
// is a plain delay line of STAGES cycles: q(t) = d(t-STAGES). Reset to zero
// is this design's choice.
module sync #(
  parameter int unsigned W      = gavina_pkg::K * gavina_pkg::L * gavina_pkg::S_BITS,
  parameter int unsigned STAGES = gavina_pkg::SYNC_STAGES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] stage [STAGES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < STAGES; i++) stage[i] <= '0;
    end else begin
      stage[0] <= d;
      for (int unsigned i = 1; i < STAGES; i++) stage[i] <= stage[i-1];
    end
  end

  assign q = stage[STAGES-1];

endmodule
