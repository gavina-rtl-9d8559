// tb_l0_acc: drives random windows of iPE outputs with random L0 shifts and
// signs into all 128 lanes and compares each lane's sum with a reference
// computed in the testbench (sum of +/- p*2^shift, restarted on first).
// Also checks that the sum holds while valid is low.
module tb_l0_acc;
  localparam int unsigned LANES = 128, SB = 10, SW = 2, W = 20;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, neg = 0;
  logic [SW-1:0] shift = '0;
  logic [LANES*SB-1:0] p;
  logic [LANES*W-1:0] acc;
  int ref_acc [LANES];
  int checks = 0, failures = 0;

  l0_acc #(.LANES(LANES), .S_BITS(SB), .SHIFT_W(SW), .L0_W(W)) dut (
    .clk, .rst_n, .valid, .first, .shift, .neg, .p, .acc);

  always #5 clk = ~clk;

  initial begin
    p = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (ref_acc[i]) ref_acc[i] = 0;
    for (int t = 0; t < 200; t++) begin
      valid = ($urandom % 5) != 0;
      first = (t == 0) || (($urandom % 6) == 0);
      shift = SW'($urandom);
      neg   = 1'($urandom);
      for (int i = 0; i < LANES; i++) p[i*SB +: SB] = SB'($urandom % 577);
      if (t == 7) begin valid = 1; first = 1; neg = 1; shift = 3; p = {LANES{SB'(576)}}; end
      @(posedge clk);
      if (valid) begin
        for (int i = 0; i < LANES; i++) begin
          automatic int v = int'(p[i*SB +: SB]) << shift;
          if (neg) v = -v;
          ref_acc[i] = (first ? 0 : ref_acc[i]) + v;
        end
      end
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (int'(signed'(acc[i*W +: W])) != ref_acc[i]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane=%0d got %0d exp %0d", t, i, signed'(acc[i*W +: W]), ref_acc[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
