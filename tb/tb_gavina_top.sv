// tb_gavina_top: end-to-end test of the accelerator at its full size
// ([C,L,K] = [576,8,16], top parameters left at their defaults).
//
// Acting as the host, it writes random signed operand matrices as bit planes
// into A1/B1, issues five contexts back to back (a4w4, a8w8, a2w2, a4w4
// accumulated onto the first result as a second C tile, and mixed a3w5), and
// reads every result element back from P Mem, comparing with an integer GEMM
// computed here. It also checks:
//   - each context runs in a_bits*b_bits cycles and the next one follows
//     without an idle cycle (done pulses a_bits*b_bits apart);
//   - the number of approximate-voltage cycles equals the sum of
//     a_bits*b_bits - G;
// and it counts how often each mechanism happened (guarded and approximate
// cycles, voltage switches, negated partial products, several L0 windows per
// context, accumulation from P Mem, loading overlapped with computing),
// failing if one never did.
module tb_gavina_top;
  import gavina_pkg::*;

  localparam int unsigned CC = gavina_pkg::C;
  localparam int unsigned LL = gavina_pkg::L;
  localparam int unsigned KK = gavina_pkg::K;
  localparam int unsigned AWORDS = (CC * LL + HOST_DW - 1) / HOST_DW;
  localparam int unsigned BWORDS = (KK * CC + HOST_DW - 1) / HOST_DW;
  localparam int unsigned NCTX = 5;

  logic clk = 0, rst_n = 0;
  logic host_we = 0;
  host_mem_e host_mem = MEM_A1;
  logic [L1_ADDR_W-1:0] host_line = '0;
  logic [8:0] host_word = '0;
  logic [HOST_DW-1:0] host_wdata = '0, host_rdata;
  logic cmd_valid = 0, cmd_ready;
  gav_cmd_t cmd;
  logic vsel_guard, busy, done;

  gavina_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;

  // operands of each context and expected results
  int A [NCTX][CC][LL];
  int B [NCTX][KK][CC];
  longint P_exp [2*P_LINES][KK][LL];
  gav_cmd_t cmds [NCTX];

  // mechanism counters
  int n_guard = 0, n_aprox = 0, n_switch = 0, n_neg = 0, n_win = 0, n_acc = 0, n_overlap = 0;
  int done_cyc [$];
  logic vsel_prev = 1;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  function automatic gav_cmd_t mk(int a, int b, int g, int a1, int b1, int pl, int acc);
    gav_cmd_t c;
    c.a_bits = BITS_W'(a); c.b_bits = BITS_W'(b); c.g = G_W'(g);
    c.a1_line = L1_ADDR_W'(a1); c.b1_line = L1_ADDR_W'(b1);
    c.p_line = P_ADDR_W'(pl); c.accumulate = 1'(acc);
    return c;
  endfunction

  task automatic host_write(host_mem_e m, int line, int word, logic [31:0] data);
    host_we = 1; host_mem = m; host_line = L1_ADDR_W'(line); host_word = 9'(word); host_wdata = data;
    @(posedge clk); #1;
    host_we = 0;
  endtask

  // write context i's operands into A1/B1 as bit planes
  task automatic load_ctx(int i);
    gav_cmd_t c = cmds[i];
    for (int b = 0; b < int'(c.a_bits); b++) begin
      for (int w = 0; w < AWORDS; w++) begin
        logic [31:0] d = '0;
        for (int j = 0; j < 32; j++) begin
          int bit_i = w * 32 + j;
          if (bit_i < CC * LL) d[j] = 1'(A[i][bit_i % CC][bit_i / CC] >>> b);
        end
        host_write(MEM_A1, int'(c.a1_line) + b, w, d);
      end
    end
    for (int b = 0; b < int'(c.b_bits); b++) begin
      for (int w = 0; w < BWORDS; w++) begin
        logic [31:0] d = '0;
        for (int j = 0; j < 32; j++) begin
          int bit_i = w * 32 + j;
          if (bit_i < KK * CC) d[j] = 1'(B[i][bit_i / CC][bit_i % CC] >>> b);
        end
        host_write(MEM_B1, int'(c.b1_line) + b, w, d);
      end
    end
  endtask

  // monitor
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (vsel_guard != vsel_prev) n_switch++;
    vsel_prev = vsel_guard;
    if (dut.u_ctrl.pipe[0].valid) begin
      if (vsel_guard) n_guard++; else n_aprox++;
    end
    if (dut.u_ctrl.l0_valid && dut.u_ctrl.l0_neg) n_neg++;
    if (dut.u_ctrl.l1_valid && !dut.u_ctrl.l1_last) n_win++;
    if (dut.u_ctrl.l1_valid && dut.u_ctrl.l1_first && dut.u_ctrl.l1_init) n_acc++;
    if ((dut.u_ctrl.a0_we || dut.u_ctrl.b0_we) && dut.u_ctrl.step_valid) n_overlap++;
    if (done) done_cyc.push_back(cyc);
  end

  initial begin
    automatic int exp_aprox = 0;
    cmd = '0;
    // contexts: a, b, G, A1 line, B1 line, P line, accumulate
    cmds[0] = mk(4, 4, 8,  0,  0,  0, 0);
    cmds[1] = mk(8, 8, 20, 8,  8,  1, 0);
    cmds[2] = mk(2, 2, 0,  16, 16, 2, 0);
    cmds[3] = mk(4, 4, 10, 32, 32, 0, 1);   // second C tile onto P line 0
    cmds[4] = mk(3, 5, 15, 40, 40, 9, 0);   // P bank 1
    foreach (P_exp[p, k, l]) P_exp[p][k][l] = 0;
    for (int i = 0; i < NCTX; i++) begin
      automatic int a = int'(cmds[i].a_bits), b = int'(cmds[i].b_bits);
      automatic int pl = int'(cmds[i].p_line);
      automatic int total = a * b;
      exp_aprox += (int'(cmds[i].g) >= total) ? 0 : total - int'(cmds[i].g);
      for (int c = 0; c < CC; c++)
        for (int l = 0; l < LL; l++)
          A[i][c][l] = (i == 1 && c < 8) ? -(1 << (a - 1)) : int'($urandom % (1 << a)) - (1 << (a - 1));
      for (int k = 0; k < KK; k++)
        for (int c = 0; c < CC; c++)
          B[i][k][c] = (i == 1 && c < 8) ? -(1 << (b - 1)) : int'($urandom % (1 << b)) - (1 << (b - 1));
      for (int k = 0; k < KK; k++)
        for (int l = 0; l < LL; l++) begin
          automatic longint s = cmds[i].accumulate ? P_exp[pl][k][l] : 0;
          for (int c = 0; c < CC; c++) s += longint'(A[i][c][l]) * longint'(B[i][k][c]);
          P_exp[pl][k][l] = s;
        end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NCTX; i++) load_ctx(i);
    $display("operands loaded at cycle %0d", cyc);
    // issue all contexts back to back
    for (int i = 0; i < NCTX; i++) begin
      cmd = cmds[i];
      cmd_valid = 1;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      #1;
    end
    cmd_valid = 0;
    while (busy) @(posedge clk);
    #1;
    // results
    for (int i = 0; i < NCTX; i++) begin
      automatic int pl = int'(cmds[i].p_line);
      if (i == 0) continue;  // line 0 is overwritten by context 3
      for (int k = 0; k < KK; k++)
        for (int l = 0; l < LL; l++) begin
          host_mem = MEM_P; host_line = L1_ADDR_W'(pl); host_word = 9'(k * LL + l);
          #1;
          checks++;
          if (longint'(signed'(host_rdata)) != P_exp[pl][k][l]) begin
            fail($sformatf("ctx %0d P[%0d][%0d] got %0d exp %0d", i, k, l, signed'(host_rdata), P_exp[pl][k][l]));
          end
        end
    end
    // timing: done pulses a*b apart (back-to-back contexts)
    checks++;
    if (done_cyc.size() != NCTX) fail($sformatf("%0d done pulses", done_cyc.size()));
    else for (int i = 1; i < NCTX; i++) begin
      checks++;
      if (done_cyc[i] - done_cyc[i-1] != int'(cmds[i].a_bits) * int'(cmds[i].b_bits))
        fail($sformatf("ctx %0d took %0d cycles", i, done_cyc[i] - done_cyc[i-1]));
    end
    checks++;
    if (n_aprox != exp_aprox) fail($sformatf("approximate cycles %0d exp %0d", n_aprox, exp_aprox));
    $display("mechanisms: guarded=%0d approximate=%0d vswitch=%0d negated=%0d l0windows=%0d accumulate=%0d load_overlap=%0d",
             n_guard, n_aprox, n_switch, n_neg, n_win, n_acc, n_overlap);
    checks += 7;
    if (n_guard == 0)   fail("no guarded cycle");
    if (n_aprox == 0)   fail("no approximate cycle");
    if (n_switch == 0)  fail("no voltage switch");
    if (n_neg == 0)     fail("no negated product");
    if (n_win == 0)     fail("no multi-window context");
    if (n_acc == 0)     fail("no accumulation from P");
    if (n_overlap == 0) fail("no load/compute overlap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
