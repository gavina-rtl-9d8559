// tb_l1_acc: drives random window sums with random L1 shifts through
// contexts of random length, starting from zero or from a P value, and checks
// every lane's write-back value and the write strobe against a reference.
module tb_l1_acc;
  localparam int unsigned LANES = 128, L0W = 20, AW = 32, SW = 4;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0, init = 0;
  logic [SW-1:0] shift = '0;
  logic [LANES*L0W-1:0] l0;
  logic [LANES*AW-1:0]  prd, pwd;
  logic pwe;
  longint ref_acc [LANES];
  int checks = 0, failures = 0, writes = 0, inits = 0;

  l1_acc #(.LANES(LANES), .L0_W(L0W), .ACC_W(AW), .SHIFT_W(SW)) dut (
    .clk, .rst_n, .valid, .first, .last, .shift, .init_from_p(init),
    .l0_acc(l0), .p_rdata(prd), .p_we(pwe), .p_wdata(pwd));

  always #5 clk = ~clk;

  initial begin
    int nwin, w;
    l0 = '0; prd = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int ctx = 0; ctx < 30; ctx++) begin
      nwin = 1 + ($urandom % 4);
      init = 1'($urandom);
      for (int i = 0; i < LANES; i++) prd[i*AW +: AW] = AW'(int'($urandom % 2000000) - 1000000);
      w = 0;
      while (w < nwin) begin
        valid = ($urandom % 4) != 0;
        first = (w == 0);
        last  = (w == nwin - 1);
        shift = SW'(w == 0 ? 0 : 2 + 3 * w);
        for (int i = 0; i < LANES; i++) l0[i*L0W +: L0W] = L0W'(int'($urandom % 300000) - 150000);
        #1;
        if (valid) begin
          for (int i = 0; i < LANES; i++) begin
            automatic longint base = first ? (init ? longint'(signed'(prd[i*AW +: AW])) : 0) : ref_acc[i];
            ref_acc[i] = base + (longint'(signed'(l0[i*L0W +: L0W])) <<< shift);
            ref_acc[i] = longint'(signed'(AW'(ref_acc[i])));
          end
          checks++;
          if (pwe !== last) begin failures++; $display("FAIL p_we ctx=%0d", ctx); end
          if (last) begin
            writes++;
            if (init) inits++;
            for (int i = 0; i < LANES; i++) begin
              checks++;
              if (longint'(signed'(pwd[i*AW +: AW])) != ref_acc[i]) begin
                failures++;
                if (failures < 10) $display("FAIL ctx=%0d lane=%0d got %0d exp %0d", ctx, i, signed'(pwd[i*AW +: AW]), ref_acc[i]);
              end
            end
          end
          w++;
        end else begin
          checks++;
          if (pwe !== 1'b0) begin failures++; $display("FAIL p_we while idle"); end
        end
        @(posedge clk);
        #1;
      end
    end
    valid = 0;
    checks++;
    if (writes != 30 || inits == 0) begin failures++; $display("FAIL writes=%0d inits=%0d", writes, inits); end
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
