// controller: context loader, bit-serial sequencer and GAV voltage schedule.
//
// A context multiplies an A tile [C,L] of a_bits-bit integers by a B tile
// [K,C] of b_bits-bit integers, both two's complement and stored as bit
// planes (plane b holds bit b of every element). It runs in a_bits*b_bits
// cycles, one (bitA, bitB) pair per cycle.
//
// Loader. A command is accepted on cmd_valid & cmd_ready when the loader is
// idle and the first-level bank it points at is free. In that cycle and the
// following ones it copies one A plane and one B plane per cycle from the
// second-level memories (lines a1_line.., b1_line..) into planes 0.. of that
// first-level bank, then marks the bank full and moves to the other bank.
//
// Sequencer. While the bank it points at is full it issues one pair per
// cycle. Pairs are visited in ascending significance s = bitA + bitB and,
// within one significance, with bitB ascending. The pairs are grouped into L0
// windows: a window opens at significance s0 and keeps the following pairs
// while s - s0 <= L0_SHIFT_MAX. Each pair gets L0 shift s - s0 and a negative
// sign when exactly one of bitA, bitB is its operand's most significant
// (sign) bit; each window gets L1 shift s0. After the last pair it frees the
// bank and moves to the other one, so with both banks loaded contexts follow
// each other with no idle cycle.
//
// GAV. The last g pairs of a context (the most significant ones) run at the
// guarded voltage, the others at the approximate voltage: vsel_guard = 1
// selects V_guard. g = 0 undervolts the whole context, g >= a_bits*b_bits
// protects all of it. Idle cycles select V_guard.
//
// Timing, relative to the cycle t in which a pair's first-level read address
// is driven (step_valid): vsel_guard belongs to cycle t+1 (the input
// registers hold the planes and the array computes), the L0 controls to
// cycle t+1+SYNC_STAGES, the L1 controls of the window ending with that pair
// to cycle t+2+SYNC_STAGES.
//
// From the published design: the controller's duties (memory sequences, L0/L1
// shift and sign, voltage control), the sign rule, the two-level shift split,
// the 0..3 L0 shift range and the meaning of G as guarded significances. This
// design's choices: the pair order, the window rule, the command format and
// the loader.
module controller
  import gavina_pkg::*;
#(
  parameter int unsigned SYNC_ST = gavina_pkg::SYNC_STAGES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  gav_cmd_t              cmd,
  // second-level memory read lines
  output logic [L1_ADDR_W-1:0]  a1_rd_line,
  output logic [L1_ADDR_W-1:0]  b1_rd_line,
  // first-level memory write
  output logic                  a0_we,
  output logic                  b0_we,
  output logic                  l0m_wbank,
  output logic [BIDX_W-1:0]     l0m_waddr,
  // first-level memory read (one pair per cycle)
  output logic                  step_valid,
  output logic                  l0m_rbank,
  output logic [BIDX_W-1:0]     a0_raddr,
  output logic [BIDX_W-1:0]     b0_raddr,
  // approximate-region supply select (to the DVS module)
  output logic                  vsel_guard,
  // L0 accumulator controls
  output logic                  l0_valid,
  output logic                  l0_first,
  output logic [L0_SHIFT_W-1:0] l0_shift,
  output logic                  l0_neg,
  // L1 accumulator / result memory controls
  output logic                  l1_valid,
  output logic                  l1_first,
  output logic                  l1_last,
  output logic [SIG_W-1:0]      l1_shift,
  output logic                  l1_init,
  output logic [P_ADDR_W-1:0]   p_line,
  // status
  output logic                  busy
);

  // ---------------------------------------------------------------- loader
  logic                 ld_active;
  logic [BIDX_W-1:0]    ld_cnt;
  gav_cmd_t             ld_cmd;
  logic                 ld_bank;
  logic [1:0]           full;
  gav_cmd_t             bank_cmd [2];

  gav_cmd_t             ld_cur;
  logic [BIDX_W-1:0]    ld_idx;
  logic                 ld_go;
  logic                 ld_done;
  logic [BITS_W-1:0]    ld_len;

  assign cmd_ready = !ld_active && !full[ld_bank];

  always_comb begin
    ld_go   = ld_active || (cmd_valid && cmd_ready);
    ld_cur  = ld_active ? ld_cmd : cmd;
    ld_idx  = ld_active ? ld_cnt : '0;
    ld_len  = (ld_cur.a_bits > ld_cur.b_bits) ? ld_cur.a_bits : ld_cur.b_bits;
    ld_done = ld_go && (BITS_W'(ld_idx) + 1'b1 >= ld_len);
  end

  assign a1_rd_line = ld_cur.a1_line + L1_ADDR_W'(ld_idx);
  assign b1_rd_line = ld_cur.b1_line + L1_ADDR_W'(ld_idx);
  assign a0_we      = ld_go && (BITS_W'(ld_idx) < ld_cur.a_bits);
  assign b0_we      = ld_go && (BITS_W'(ld_idx) < ld_cur.b_bits);
  assign l0m_wbank  = ld_bank;
  assign l0m_waddr  = ld_idx;

  // ------------------------------------------------------------- sequencer
  logic                 cp_bank;
  logic [SIG_W-1:0]     s_q;      // significance of the current pair
  logic [BIDX_W-1:0]    bb_q;     // bitB of the current pair
  logic [G_W-1:0]       n_q;      // index of the current pair in the context
  logic [SIG_W-1:0]     s0_q;     // base significance of the open window

  gav_cmd_t             cc;
  logic [BIDX_W-1:0]    ba;
  logic [G_W-1:0]       total;
  logic                 last_step;
  logic                 new_win;
  logic [SIG_W-1:0]     win_base;
  logic [SIG_W-1:0]     s_nx;
  logic [BIDX_W-1:0]    bb_nx;
  logic                 win_last;
  logic                 guard;
  logic                 neg;

  always_comb begin
    cc        = bank_cmd[cp_bank];
    ba        = BIDX_W'(s_q - SIG_W'(bb_q));
    total     = G_W'(cc.a_bits * cc.b_bits);
    last_step = (n_q + 1'b1 == total);
    new_win   = (n_q == '0) || (s_q - s0_q > SIG_W'(L0_SHIFT_MAX));
    win_base  = new_win ? s_q : s0_q;
    // next pair: bitB up within the same significance, else next significance
    if ((BITS_W'(bb_q) + 1'b1 < cc.b_bits) && (SIG_W'(bb_q) + 1'b1 <= s_q)) begin
      s_nx  = s_q;
      bb_nx = bb_q + 1'b1;
    end else begin
      s_nx  = s_q + 1'b1;
      bb_nx = (s_q + 1'b1 > SIG_W'(cc.a_bits - 1'b1))
                ? BIDX_W'(s_q + 1'b1 - SIG_W'(cc.a_bits - 1'b1)) : '0;
    end
    win_last  = last_step || (s_nx - win_base > SIG_W'(L0_SHIFT_MAX));
    guard     = ({1'b0, n_q} + {1'b0, cc.g}) >= {1'b0, total};
    neg       = (BITS_W'(ba) == cc.a_bits - 1'b1) ^ (BITS_W'(bb_q) == cc.b_bits - 1'b1);
  end

  assign step_valid = full[cp_bank];
  assign l0m_rbank  = cp_bank;
  assign a0_raddr   = ba;
  assign b0_raddr   = bb_q;

  // ------------------------------------------------------ state registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ld_active <= 1'b0;
      ld_cnt    <= '0;
      ld_cmd    <= '0;
      ld_bank   <= 1'b0;
      full      <= '0;
      bank_cmd[0] <= '0;
      bank_cmd[1] <= '0;
      cp_bank   <= 1'b0;
      s_q       <= '0;
      bb_q      <= '0;
      n_q       <= '0;
      s0_q      <= '0;
    end else begin
      // loader
      if (cmd_valid && cmd_ready) begin
        ld_cmd            <= cmd;
        bank_cmd[ld_bank] <= cmd;
      end
      if (ld_go) begin
        if (ld_done) begin
          ld_active     <= 1'b0;
          ld_cnt        <= '0;
          full[ld_bank] <= 1'b1;
          ld_bank       <= !ld_bank;
        end else begin
          ld_active <= 1'b1;
          ld_cnt    <= ld_idx + 1'b1;
        end
      end
      // sequencer
      if (step_valid) begin
        if (last_step) begin
          full[cp_bank] <= 1'b0;
          cp_bank       <= !cp_bank;
          s_q           <= '0;
          bb_q          <= '0;
          n_q           <= '0;
          s0_q          <= '0;
        end else begin
          s_q  <= s_nx;
          bb_q <= bb_nx;
          n_q  <= n_q + 1'b1;
          s0_q <= win_base;
        end
      end
    end
  end

  // ----------------------------------------- control delay to L0 and L1
  typedef struct packed {
    logic                  valid;
    logic                  guard;
    logic                  first;
    logic [L0_SHIFT_W-1:0] l0_shift;
    logic                  neg;
    logic                  win_last;
    logic                  ctx_first;
    logic                  ctx_last;
    logic [SIG_W-1:0]      l1_shift;
    logic                  init;
    logic [P_ADDR_W-1:0]   p_line;
  } step_ctl_t;

  localparam int unsigned DEPTH = SYNC_ST + 2;
  step_ctl_t pipe [DEPTH];
  step_ctl_t ctl_in;

  always_comb begin
    ctl_in           = '0;
    ctl_in.valid     = step_valid;
    ctl_in.guard     = guard;
    ctl_in.first     = new_win;
    ctl_in.l0_shift  = L0_SHIFT_W'(s_q - win_base);
    ctl_in.neg       = neg;
    ctl_in.win_last  = win_last;
    ctl_in.ctx_first = (win_base == '0);
    ctl_in.ctx_last  = last_step;
    ctl_in.l1_shift  = win_base;
    ctl_in.init      = cc.accumulate;
    ctl_in.p_line    = cc.p_line;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DEPTH; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= ctl_in;
      for (int unsigned i = 1; i < DEPTH; i++) pipe[i] <= pipe[i-1];
    end
  end

  // stage t+1: approximate region computes
  assign vsel_guard = !pipe[0].valid || pipe[0].guard;

  // stage t+1+SYNC_ST: L0
  assign l0_valid = pipe[SYNC_ST].valid;
  assign l0_first = pipe[SYNC_ST].first;
  assign l0_shift = pipe[SYNC_ST].l0_shift;
  assign l0_neg   = pipe[SYNC_ST].neg;

  // stage t+2+SYNC_ST: L1 takes the finished window sum
  assign l1_valid = pipe[SYNC_ST+1].valid && pipe[SYNC_ST+1].win_last;
  assign l1_first = pipe[SYNC_ST+1].ctx_first;
  assign l1_last  = pipe[SYNC_ST+1].ctx_last;
  assign l1_shift = pipe[SYNC_ST+1].l1_shift;
  assign l1_init  = pipe[SYNC_ST+1].init;
  assign p_line   = pipe[SYNC_ST+1].p_line;

  always_comb begin
    busy = ld_active || (full != '0);
    for (int unsigned i = 0; i < DEPTH; i++) busy = busy || pipe[i].valid;
  end

  // a command must hold steady while it waits for cmd_ready
  property p_cmd_stable;
    @(posedge clk) disable iff (!rst_n)
      cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd);
  endproperty
  a_cmd_stable: assert property (p_cmd_stable);
  // precisions must lie in 1..MAX_BITS
  a_cmd_bits: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> (cmd.a_bits >= 1 && cmd.a_bits <= BITS_W'(MAX_BITS) &&
                   cmd.b_bits >= 1 && cmd.b_bits <= BITS_W'(MAX_BITS)));

endmodule
