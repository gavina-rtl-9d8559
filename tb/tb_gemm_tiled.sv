// tb_gemm_tiled: one output tile of the 4608 x 64 x 64 random-matrix GEMM
// used to characterise undervolting errors, on the full-size accelerator.
//
// It computes P[16,8] = B[16,4608] x A[4608,8], i.e. one [K,L] tile of the
// full product with the whole C = 4608 reduction: 8 C-tiles of 576, each one
// context, the second to eighth with accumulate = 1 so the partial sums add
// up in P Mem. This is done at a8w8, a4w4 and a2w2 with different G. At
// 8 bits the 64 planes of each operand exceed one A1/B1 bank (32 planes), so
// the host streams them: it fills bank 1 while contexts run from bank 0,
// then refills bank 0 while bank 1 is computed. Results are compared with an
// integer GEMM, and the number of compute cycles (sum of a*b) is checked.
module tb_gemm_tiled;
  import gavina_pkg::*;

  localparam int unsigned CC = gavina_pkg::C;
  localparam int unsigned LL = gavina_pkg::L;
  localparam int unsigned KK = gavina_pkg::K;
  localparam int unsigned CT = 8;                 // C tiles: 8 x 576 = 4608
  localparam int unsigned AWORDS = (CC * LL + HOST_DW - 1) / HOST_DW;
  localparam int unsigned BWORDS = (KK * CC + HOST_DW - 1) / HOST_DW;

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
  int A [CT*CC][LL];
  int B [KK][CT*CC];
  int step_cycles = 0, overlap_cycles = 0, ndone = 0;

  always @(negedge clk) if (rst_n) begin
    if (dut.step_valid) step_cycles++;
    if (host_we && dut.step_valid) overlap_cycles++;
    if (done) ndone++;
  end

  task automatic host_write(host_mem_e m, int line, int word, logic [31:0] data);
    host_we = 1; host_mem = m; host_line = L1_ADDR_W'(line); host_word = 9'(word); host_wdata = data;
    @(posedge clk); #1;
    host_we = 0;
  endtask

  // planes of C-tile t at `bits` precision into A1/B1 lines line0..
  task automatic load_tile(int t, int bits, int line0);
    for (int b = 0; b < bits; b++) begin
      for (int w = 0; w < AWORDS; w++) begin
        logic [31:0] d = '0;
        for (int j = 0; j < 32; j++) begin
          int bi = w * 32 + j;
          d[j] = 1'(A[t*CC + bi % CC][bi / CC] >>> b);
        end
        host_write(MEM_A1, line0 + b, w, d);
      end
      for (int w = 0; w < BWORDS; w++) begin
        logic [31:0] d = '0;
        for (int j = 0; j < 32; j++) begin
          int bi = w * 32 + j;
          d[j] = 1'(B[bi / CC][t*CC + bi % CC] >>> b);
        end
        host_write(MEM_B1, line0 + b, w, d);
      end
    end
  endtask

  task automatic issue(int bits, int g, int line0, int pl, bit acc);
    cmd.a_bits = BITS_W'(bits); cmd.b_bits = BITS_W'(bits); cmd.g = G_W'(g);
    cmd.a1_line = L1_ADDR_W'(line0); cmd.b1_line = L1_ADDR_W'(line0);
    cmd.p_line = P_ADDR_W'(pl); cmd.accumulate = acc;
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic run_gemm(int bits, int g, int pl);
    int per_bank = 32 / bits;           // C tiles per A1/B1 bank
    int exp_steps = step_cycles + CT * bits * bits;
    for (int c = 0; c < CT*CC; c++)
      for (int l = 0; l < LL; l++) A[c][l] = int'($urandom % (1 << bits)) - (1 << (bits - 1));
    for (int k = 0; k < KK; k++)
      for (int c = 0; c < CT*CC; c++) B[k][c] = int'($urandom % (1 << bits)) - (1 << (bits - 1));
    // fill bank 0, then alternate: issue a bank's contexts, fill the other bank
    for (int t = 0; t < per_bank && t < CT; t++) load_tile(t, bits, t * bits);
    for (int t0 = 0; t0 < CT; t0 += per_bank) begin
      int bank = (t0 / per_bank) % 2;
      for (int t = t0; t < t0 + per_bank && t < CT; t++)
        issue(bits, g, bank * 32 + (t - t0) * bits, pl, t != 0);
      // refill the other bank while this one computes
      for (int t = t0 + per_bank; t < t0 + 2 * per_bank && t < CT; t++)
        load_tile(t, bits, (1 - bank) * 32 + (t - t0 - per_bank) * bits);
      while (busy) @(posedge clk);
      #1;
    end
    for (int k = 0; k < KK; k++)
      for (int l = 0; l < LL; l++) begin
        longint s = 0;
        for (int c = 0; c < CT*CC; c++) s += longint'(A[c][l]) * longint'(B[k][c]);
        host_mem = MEM_P; host_line = L1_ADDR_W'(pl); host_word = 9'(k * LL + l);
        #1;
        checks++;
        if (longint'(signed'(host_rdata)) != s) begin
          failures++;
          if (failures < 10) $display("FAIL a%0dw%0d P[%0d][%0d] got %0d exp %0d", bits, bits, k, l, signed'(host_rdata), s);
        end
      end
    checks++;
    if (step_cycles != exp_steps) begin
      failures++;
      $display("FAIL a%0dw%0d compute cycles %0d exp %0d", bits, bits, step_cycles, exp_steps);
    end
    $display("a%0dw%0d G=%0d: C=%0d reduction in %0d contexts done", bits, bits, g, CT*CC, CT);
  endtask

  initial begin
    cmd = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_gemm(8, 32, 0);
    run_gemm(4, 8, 1);
    run_gemm(2, 0, 8);
    checks++;
    if (ndone != 3 * CT) begin failures++; $display("FAIL %0d contexts finished", ndone); end
    checks++;
    if (overlap_cycles == 0) begin failures++; $display("FAIL host loading never overlapped computing"); end
    $display("host writes overlapped with computing in %0d cycles", overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
