// tb_ipe: self-checking test of one iPE at the full channel count (C=576).
// Drives random bit vectors with different densities plus the all-ones and
// all-zeros corners and compares with a bit-by-bit count of a AND b.
module tb_ipe;
  localparam int unsigned C = 576;
  localparam int unsigned SB = $clog2(C + 1);
  logic [C-1:0]  a, b;
  logic [SB-1:0] p;
  int checks = 0, failures = 0;

  ipe #(.C(C)) dut (.a, .b, .p);

  function automatic int unsigned ref_count(logic [C-1:0] x, logic [C-1:0] y);
    int unsigned n = 0;
    for (int i = 0; i < C; i++) if (x[i] == 1'b1 && y[i] == 1'b1) n++;
    return n;
  endfunction

  task automatic check();
    #1;
    checks++;
    if (int'(p) != int'(ref_count(a, b))) begin
      failures++;
      $display("FAIL ipe: got %0d expected %0d", p, ref_count(a, b));
    end
  endtask

  initial begin
    a = '1; b = '1; check();
    a = '0; b = '1; check();
    a = '1; b = '0; check();
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < C; i++) begin
        a[i] = ($urandom % 8) < (t % 9);
        b[i] = ($urandom % 8) < ((t / 9) % 9);
      end
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
