// gavina_pkg: sizes, widths and types shared by the GAVINA accelerator.
//
// The array shape [C,L,K] = [576,8,16] and the 2..8-bit precision range are
// the published configuration. Accumulator widths, memory depths and the
// command format are this design's own choices (see README).
package gavina_pkg;

  // Parallel Array shape: C input channels reduced per iPE, L activation
  // columns, K weight rows.
  localparam int unsigned C = 576;
  localparam int unsigned L = 8;
  localparam int unsigned K = 16;

  // Width of one iPE output: clog2(C+1).
  localparam int unsigned S_BITS = $clog2(C + 1);

  // Largest operand precision, and the field width that can hold it.
  localparam int unsigned MAX_BITS = 8;
  localparam int unsigned BITS_W   = $clog2(MAX_BITS + 1);
  localparam int unsigned BIDX_W   = $clog2(MAX_BITS);

  // A context runs A_bits*B_bits cycles; G counts guarded cycles.
  localparam int unsigned G_W = $clog2(MAX_BITS * MAX_BITS + 1);

  // Significance of one pair (bitA+bitB) ranges 0..2*MAX_BITS-2.
  localparam int unsigned SIG_W = $clog2(2 * MAX_BITS - 1);

  // L0 barrel shifter covers shifts 0..L0_SHIFT_MAX.
  localparam int unsigned L0_SHIFT_MAX = 3;
  localparam int unsigned L0_SHIFT_W   = $clog2(L0_SHIFT_MAX + 1);

  // Accumulator widths (signed).
  localparam int unsigned L0_W  = 20;
  localparam int unsigned ACC_W = 32;

  // Synchronizer depth in front of L0.
  localparam int unsigned SYNC_STAGES = 2;

  // Memory depths per bank (two banks each: double buffering).
  localparam int unsigned L1_LINES = 32;  // A1 / B1 bit planes per bank
  localparam int unsigned P_LINES  = 8;   // result matrices per bank

  // Host data word.
  localparam int unsigned HOST_DW = 32;

  // Line address widths including the bank bit.
  localparam int unsigned L1_ADDR_W = $clog2(2 * L1_LINES);
  localparam int unsigned P_ADDR_W  = $clog2(2 * P_LINES);

  // Host-visible memories.
  typedef enum logic [1:0] {
    MEM_A1 = 2'd0,
    MEM_B1 = 2'd1,
    MEM_P  = 2'd2
  } host_mem_e;

  // One context: multiply the A tile (a_bits planes from A1 line a1_line
  // upward, bit 0 first) with the B tile (b_bits planes from B1 line b1_line)
  // and write the [K,L] result to P line p_line, adding the value already
  // there when accumulate is set (tiling over C).
  typedef struct packed {
    logic [BITS_W-1:0]    a_bits;     // 1..MAX_BITS
    logic [BITS_W-1:0]    b_bits;     // 1..MAX_BITS
    logic [G_W-1:0]       g;          // guarded cycles at the end of the context
    logic [L1_ADDR_W-1:0] a1_line;
    logic [L1_ADDR_W-1:0] b1_line;
    logic [P_ADDR_W-1:0]  p_line;
    logic                 accumulate;
  } gav_cmd_t;

endpackage
