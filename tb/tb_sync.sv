// tb_sync: checks that the synchronizer delays every bit by exactly two
// cycles and resets to zero.
module tb_sync;
  localparam int unsigned W = 1280;
  localparam int unsigned ST = 2;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] d, q;
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  sync #(.W(W), .STAGES(ST)) dut (.clk, .rst_n, .d, .q);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < W; i++) d[i] = 1'($urandom);
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (q != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    hist.push_back('0);
    hist.push_back('0);
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < W; i++) d[i] = 1'($urandom);
      @(posedge clk);
      hist.push_back(d);
      #1;
      // after this edge q holds the value presented ST edges ago
      checks++;
      if (q != hist[hist.size() - ST]) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
