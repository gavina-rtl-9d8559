// tb_input_regs: checks that the operand registers reset to zero, load on
// enable one cycle later and hold their value while the enable is low.
module tb_input_regs;
  localparam int unsigned C = 576, L = 8, K = 16;
  logic clk = 0, rst_n = 0, en = 0;
  logic [C*L-1:0] a_in, a_q, a_exp;
  logic [K*C-1:0] b_in, b_q, b_exp;
  int checks = 0, failures = 0;

  input_regs #(.C(C), .L(L), .K(K)) dut (.clk, .rst_n, .en, .a_in, .b_in, .a_q, .b_q);

  always #5 clk = ~clk;

  task automatic randomize_in();
    for (int i = 0; i < C*L; i++) a_in[i] = 1'($urandom);
    for (int i = 0; i < K*C; i++) b_in[i] = 1'($urandom);
  endtask

  initial begin
    randomize_in();
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (a_q != '0 || b_q != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    a_exp = '0; b_exp = '0;
    for (int t = 0; t < 40; t++) begin
      randomize_in();
      en = 1'($urandom);
      @(posedge clk);
      if (en) begin a_exp = a_in; b_exp = b_in; end
      #1;
      checks++;
      if (a_q != a_exp || b_q != b_exp) begin failures++; $display("FAIL t=%0d en=%0d", t, en); end
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
