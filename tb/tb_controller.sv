// tb_controller: checks the controller's loader, bit-serial sequence, L0/L1
// controls and GAV voltage schedule against a reference built here.
//
// The reference lists every (bitA, bitB) pair of a context sorted by
// significance, bitB ascending within a significance, groups them into L0
// windows of at most 4 significances, and marks the last G pairs guarded.
// Every issued pair, every L0 control (3 cycles later), every vsel_guard
// (1 cycle later) and every L1 control (4 cycles later) is compared with it.
// It also checks: each context takes a_bits*b_bits cycles; contexts follow
// each other without idle cycles; the loader copies the right lines; and for
// A_bits=6, B_bits=4 the guarded pairs for G = 1, 5, 12, 20 are the ones
// shown in the published GAV schedule figure.
module tb_controller;
  import gavina_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  gav_cmd_t cmd;
  logic [L1_ADDR_W-1:0] a1_rd_line, b1_rd_line;
  logic a0_we, b0_we, l0m_wbank, step_valid, l0m_rbank, vsel_guard;
  logic [BIDX_W-1:0] l0m_waddr, a0_raddr, b0_raddr;
  logic l0_valid, l0_first, l0_neg, l1_valid, l1_first, l1_last, l1_init, busy;
  logic [L0_SHIFT_W-1:0] l0_shift;
  logic [SIG_W-1:0] l1_shift;
  logic [P_ADDR_W-1:0] p_line;

  controller dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int ba, bb, first, l0s, neg, guard, wlast, base, cfirst, clast, init, pline, ctx;
  } step_t;

  step_t exp_q [$];
  gav_cmd_t cmds [$];
  int checks = 0, failures = 0;
  int cyc = 0;
  int step_at [int];   // cycle -> index into exp_q
  int issued = 0;
  int ctx_start [int], ctx_end [int];
  // Fig. 2: guarded dots per bitB row (bb=0..3), counted from bitA MSB
  int fig2_rows [int][4];
  int fig2_ctx [int];  // ctx index -> G

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL cyc=%0d %s", cyc, msg);
  endtask

  task automatic build_ref(gav_cmd_t c, int ctx);
    int a = int'(c.a_bits), b = int'(c.b_bits), g = int'(c.g);
    int total = a * b, n = 0, base = 0;
    step_t lst [$];
    for (int s = 0; s <= a + b - 2; s++) begin
      for (int bb = 0; bb < b; bb++) begin
        int ba = s - bb;
        step_t st;
        if (ba < 0 || ba >= a) continue;
        if (n == 0 || s - base > 3) begin base = s; st.first = 1; end else st.first = 0;
        st.ba = ba; st.bb = bb; st.l0s = s - base; st.base = base;
        st.neg = int'((ba == a - 1) != (bb == b - 1));
        st.guard = int'(n >= total - g);
        st.cfirst = int'(base == 0); st.clast = int'(n == total - 1);
        st.init = int'(c.accumulate); st.pline = int'(c.p_line); st.ctx = ctx;
        st.wlast = 0;
        lst.push_back(st);
        n++;
      end
    end
    for (int i = 0; i < lst.size(); i++) begin
      int s = lst[i].ba + lst[i].bb;
      if (i == lst.size() - 1) lst[i].wlast = 1;
      else if ((lst[i+1].ba + lst[i+1].bb) - lst[i].base > 3) lst[i].wlast = 1;
      exp_q.push_back(lst[i]);
    end
  endtask

  function automatic gav_cmd_t mk(int a, int b, int g, int acc);
    gav_cmd_t c;
    c.a_bits = BITS_W'(a); c.b_bits = BITS_W'(b); c.g = G_W'(g);
    c.a1_line = L1_ADDR_W'($urandom); c.b1_line = L1_ADDR_W'($urandom);
    c.p_line = P_ADDR_W'($urandom); c.accumulate = 1'(acc);
    return c;
  endfunction

  // monitor, sampled in the middle of each cycle
  int ld_ctx = 0, ld_pl = 0;
  int gaps = 0;
  always @(negedge clk) if (rst_n) begin
    // loader
    if (a0_we || b0_we) begin
      automatic gav_cmd_t c = cmds[ld_ctx];
      if (a0_we && (a1_rd_line != L1_ADDR_W'(int'(c.a1_line) + int'(l0m_waddr)))) fail("a1 line");
      if (b0_we && (b1_rd_line != L1_ADDR_W'(int'(c.b1_line) + int'(l0m_waddr)))) fail("b1 line");
      if (int'(l0m_waddr) != ld_pl) fail($sformatf("loader plane order %0d %0d", l0m_waddr, ld_pl));
      if (a0_we != (ld_pl < int'(c.a_bits)) || b0_we != (ld_pl < int'(c.b_bits))) fail("loader enables");
      checks++;
      ld_pl++;
      if (ld_pl == ((c.a_bits > c.b_bits) ? int'(c.a_bits) : int'(c.b_bits))) begin ld_ctx++; ld_pl = 0; end
    end
    // sequencer
    if (step_valid) begin
      automatic step_t e = exp_q[issued];
      checks++;
      if (int'(a0_raddr) != e.ba || int'(b0_raddr) != e.bb)
        fail($sformatf("pair got (%0d,%0d) exp (%0d,%0d)", a0_raddr, b0_raddr, e.ba, e.bb));
      if (!ctx_start.exists(e.ctx)) ctx_start[e.ctx] = cyc;
      ctx_end[e.ctx] = cyc;
      step_at[cyc] = issued;
      issued++;
    end
    // vsel one cycle later
    checks++;
    if (step_at.exists(cyc - 1)) begin
      if (int'(vsel_guard) != exp_q[step_at[cyc-1]].guard) fail("vsel_guard");
    end else if (!vsel_guard) fail("vsel_guard while idle");
    // L0 controls three cycles later
    checks++;
    if (step_at.exists(cyc - 3)) begin
      automatic step_t e = exp_q[step_at[cyc-3]];
      if (!l0_valid || int'(l0_first) != e.first || int'(l0_shift) != e.l0s || int'(l0_neg) != e.neg)
        fail($sformatf("L0 ctl v=%0d f=%0d s=%0d n=%0d exp f=%0d s=%0d n=%0d", l0_valid, l0_first, l0_shift, l0_neg, e.first, e.l0s, e.neg));
    end else if (l0_valid) fail("spurious l0_valid");
    // L1 controls four cycles later
    checks++;
    if (step_at.exists(cyc - 4) && exp_q[step_at[cyc-4]].wlast) begin
      automatic step_t e = exp_q[step_at[cyc-4]];
      if (!l1_valid || int'(l1_shift) != e.base || int'(l1_first) != e.cfirst ||
          int'(l1_last) != e.clast || int'(l1_init) != e.init || int'(p_line) != e.pline)
        fail("L1 ctl");
    end else if (l1_valid) fail("spurious l1_valid");
    cyc++;
  end

  initial begin
    int fig_g [4] = '{1, 5, 12, 20};
    cmd = '0;
    fig2_rows[1]  = '{0, 0, 0, 1};
    fig2_rows[5]  = '{0, 0, 2, 3};
    fig2_rows[12] = '{1, 2, 4, 5};
    fig2_rows[20] = '{3, 5, 6, 6};
    // the published example first, then the Fig. 2 G values, then random
    for (int i = 0; i < 4; i++) begin
      fig2_ctx[cmds.size()] = fig_g[i];
      cmds.push_back(mk(6, 4, fig_g[i], 0));
    end
    cmds.push_back(mk(8, 8, 64, 1));
    cmds.push_back(mk(8, 8, 0, 0));
    cmds.push_back(mk(2, 2, 2, 1));
    cmds.push_back(mk(1, 1, 0, 0));
    cmds.push_back(mk(1, 8, 3, 0));
    cmds.push_back(mk(8, 1, 70, 1));
    for (int i = 0; i < 30; i++) cmds.push_back(mk(1 + $urandom % 8, 1 + $urandom % 8, $urandom % 70, $urandom % 2));
    foreach (cmds[i]) build_ref(cmds[i], i);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (cmds[i]) begin
      cmd = cmds[i];
      cmd_valid = 1;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      #1;
    end
    cmd_valid = 0;
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
    // every pair issued, every context in a_bits*b_bits cycles
    checks++;
    if (issued != exp_q.size()) fail($sformatf("issued %0d of %0d", issued, exp_q.size()));
    foreach (cmds[i]) begin
      checks++;
      if (ctx_end[i] - ctx_start[i] + 1 != int'(cmds[i].a_bits) * int'(cmds[i].b_bits)) fail($sformatf("ctx %0d cycles", i));
    end
    // no idle cycle between the first six contexts (all loads shorter than the previous compute)
    for (int i = 1; i < 6; i++) begin
      checks++;
      if (ctx_start[i] != ctx_end[i-1] + 1) fail($sformatf("gap before ctx %0d", i));
    end
    // Fig. 2 guarded dots
    foreach (fig2_ctx[ci]) begin
      automatic int g = fig2_ctx[ci];
      foreach (exp_q[i]) if (exp_q[i].ctx == ci) begin
        automatic int want = int'(exp_q[i].ba >= 6 - fig2_rows[g][exp_q[i].bb]);
        checks++;
        if (exp_q[i].guard != want) fail($sformatf("Fig2 G=%0d pair (%0d,%0d)", g, exp_q[i].ba, exp_q[i].bb));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
