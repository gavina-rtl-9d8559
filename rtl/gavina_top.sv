// gavina_top: GAVINA bit-serial mixed-precision GEMM accelerator.
//
// Datapath, in the order data flows:
//   A1/B1 Mem (host-written bit planes, 2 banks)
//     -> A0/B0 Mem (planes of the current context, 2 banks)
//     -> input registers -> Parallel Array (K x L iPEs)     [approximate domain]
//     -> 2-stage synchronizer -> L0 shift/sign/accumulate
//     -> L1 shift/accumulate <-> P Mem (results, 2 banks)   [protected domain]
// The controller loads contexts, walks the (bitA, bitB) pairs and tells the
// external DVS converter, through vsel_guard, which supply the approximate
// domain needs for the pair being computed (1 = V_guard, 0 = V_aprox).
//
// Host side. In place of the AXI4 crossbar of the published system the top
// has a plain memory port: host_mem picks A1, B1 or P, host_line the line
// (its top bit is the bank), host_word the HOST_DW-bit word within the line.
// host_we writes A1/B1 at the clock edge; host_rdata is a combinational read.
// A1 line packing: bit l*C+c of plane b = bit b of A[c][l]. B1: bit k*C+c of
// plane b = bit b of B[k][c]. P: element (k*L+l) is ACC_W bits, signed.
// Contexts are issued with cmd_valid/cmd_ready (gav_cmd_t, see gavina_pkg);
// done pulses for one cycle when a context's result is written to P Mem.
//
// Latency of one context of a x b bits: the loader takes max(a,b) cycles,
// the pairs a*b cycles, and the result reaches P Mem SYNC_STAGES+2 cycles
// after the last pair. Loading and computing overlap, so back-to-back
// contexts issue one pair every cycle.
// Power domains and level translators have no logic function and are not
// represented; the DVS converter is outside this design.
module gavina_top
  import gavina_pkg::*;
#(
  parameter int unsigned C = gavina_pkg::C,
  parameter int unsigned L = gavina_pkg::L,
  parameter int unsigned K = gavina_pkg::K,
  localparam int unsigned SB     = $clog2(C + 1),
  localparam int unsigned LANES  = K * L,
  localparam int unsigned HWORDS = (K * C + HOST_DW - 1) / HOST_DW,
  localparam int unsigned HWORD_W = (HWORDS > 1) ? $clog2(HWORDS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host memory port
  input  logic                 host_we,
  input  host_mem_e            host_mem,
  input  logic [L1_ADDR_W-1:0] host_line,
  input  logic [HWORD_W-1:0]   host_word,
  input  logic [HOST_DW-1:0]   host_wdata,
  output logic [HOST_DW-1:0]   host_rdata,
  // context commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  gav_cmd_t             cmd,
  // to the DVS converter of the approximate domain
  output logic                 vsel_guard,
  // status
  output logic                 busy,
  output logic                 done
);

  localparam int unsigned AW_WORDS = (C * L + HOST_DW - 1) / HOST_DW;
  localparam int unsigned AW_W     = (AW_WORDS > 1) ? $clog2(AW_WORDS) : 1;
  localparam int unsigned PW_WORDS = (LANES * ACC_W + HOST_DW - 1) / HOST_DW;
  localparam int unsigned PW_W     = (PW_WORDS > 1) ? $clog2(PW_WORDS) : 1;

  // -------------------------------------------------------------- control
  logic [L1_ADDR_W-1:0]  a1_rd_line, b1_rd_line;
  logic                  a0_we, b0_we, l0m_wbank, step_valid, l0m_rbank;
  logic [BIDX_W-1:0]     l0m_waddr, a0_raddr, b0_raddr;
  logic                  l0_valid, l0_first, l0_neg;
  logic [L0_SHIFT_W-1:0] l0_shift;
  logic                  l1_valid, l1_first, l1_last, l1_init;
  logic [SIG_W-1:0]      l1_shift;
  logic [P_ADDR_W-1:0]   p_line;

  controller u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .a1_rd_line, .b1_rd_line,
    .a0_we, .b0_we, .l0m_wbank, .l0m_waddr,
    .step_valid, .l0m_rbank, .a0_raddr, .b0_raddr,
    .vsel_guard,
    .l0_valid, .l0_first, .l0_shift, .l0_neg,
    .l1_valid, .l1_first, .l1_last, .l1_shift, .l1_init, .p_line,
    .busy
  );

  // ------------------------------------------------------------- memories
  logic [C*L-1:0]     a1_line_data, a0_rdata;
  logic [K*C-1:0]     b1_line_data, b0_rdata;
  logic [HOST_DW-1:0] a1_host_rdata, b1_host_rdata, p_host_rdata;

  operand_l1_mem #(.WIDTH(C*L), .LINES(L1_LINES), .HOST_DW(HOST_DW)) u_a1 (
    .clk,
    .host_we    (host_we && host_mem == MEM_A1),
    .host_line,
    .host_word  (AW_W'(host_word)),
    .host_wdata,
    .host_rdata (a1_host_rdata),
    .rd_line    (a1_rd_line),
    .rd_data    (a1_line_data)
  );

  operand_l1_mem #(.WIDTH(K*C), .LINES(L1_LINES), .HOST_DW(HOST_DW)) u_b1 (
    .clk,
    .host_we    (host_we && host_mem == MEM_B1),
    .host_line,
    .host_word  (HWORD_W'(host_word)),
    .host_wdata,
    .host_rdata (b1_host_rdata),
    .rd_line    (b1_rd_line),
    .rd_data    (b1_line_data)
  );

  operand_l0_mem #(.WIDTH(C*L), .PLANES(MAX_BITS)) u_a0 (
    .clk,
    .we    (a0_we),
    .wbank (l0m_wbank),
    .waddr (l0m_waddr),
    .wdata (a1_line_data),
    .rbank (l0m_rbank),
    .raddr (a0_raddr),
    .rdata (a0_rdata)
  );

  operand_l0_mem #(.WIDTH(K*C), .PLANES(MAX_BITS)) u_b0 (
    .clk,
    .we    (b0_we),
    .wbank (l0m_wbank),
    .waddr (l0m_waddr),
    .wdata (b1_line_data),
    .rbank (l0m_rbank),
    .raddr (b0_raddr),
    .rdata (b0_rdata)
  );

  // -------------------------------------------------- approximate domain
  logic [C*L-1:0]        a_q;
  logic [K*C-1:0]        b_q;
  logic [LANES*SB-1:0]   pa_out, pa_sync;

  input_regs #(.C(C), .L(L), .K(K)) u_inregs (
    .clk, .rst_n,
    .en   (step_valid),
    .a_in (a0_rdata),
    .b_in (b0_rdata),
    .a_q, .b_q
  );

  parallel_array #(.C(C), .L(L), .K(K), .S_BITS(SB)) u_array (
    .a_plane (a_q),
    .b_plane (b_q),
    .p       (pa_out)
  );

  // ---------------------------------------------------- protected domain
  sync #(.W(LANES*SB), .STAGES(SYNC_STAGES)) u_sync (
    .clk, .rst_n,
    .d (pa_out),
    .q (pa_sync)
  );

  logic [LANES*L0_W-1:0]  l0_sums;
  logic [LANES*ACC_W-1:0] p_rdata, p_wdata;
  logic                   p_we;

  l0_acc #(.LANES(LANES), .S_BITS(SB), .SHIFT_W(L0_SHIFT_W), .L0_W(L0_W)) u_l0 (
    .clk, .rst_n,
    .valid (l0_valid),
    .first (l0_first),
    .shift (l0_shift),
    .neg   (l0_neg),
    .p     (pa_sync),
    .acc   (l0_sums)
  );

  l1_acc #(.LANES(LANES), .L0_W(L0_W), .ACC_W(ACC_W), .SHIFT_W(SIG_W)) u_l1 (
    .clk, .rst_n,
    .valid       (l1_valid),
    .first       (l1_first),
    .last        (l1_last),
    .shift       (l1_shift),
    .init_from_p (l1_init),
    .l0_acc      (l0_sums),
    .p_rdata,
    .p_we,
    .p_wdata
  );

  p_mem #(.LANES(LANES), .ACC_W(ACC_W), .LINES(P_LINES), .HOST_DW(HOST_DW)) u_p (
    .clk,
    .we         (p_we),
    .addr       (p_line),
    .wdata      (p_wdata),
    .rdata      (p_rdata),
    .host_line  (P_ADDR_W'(host_line)),
    .host_word  (PW_W'(host_word)),
    .host_rdata (p_host_rdata)
  );

  assign done = p_we;

  always_comb begin
    unique case (host_mem)
      MEM_A1:  host_rdata = a1_host_rdata;
      MEM_B1:  host_rdata = b1_host_rdata;
      MEM_P:   host_rdata = p_host_rdata;
      default: host_rdata = '0;
    endcase
  end

endmodule
