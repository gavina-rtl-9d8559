// tb_operand_l1_mem: writes random 32-bit words into random lines of both
// banks of a B1-sized memory (K*C = 9216 bits per line) through the host
// port and checks host read-back and whole-line reads against a shadow copy.
module tb_operand_l1_mem;
  localparam int unsigned WIDTH = 9216, LINES = 32, DW = 32;
  localparam int unsigned WORDS = WIDTH / DW;
  localparam int unsigned AW = $clog2(2 * LINES), WW = $clog2(WORDS);
  logic clk = 0, we = 0;
  logic [AW-1:0] hline = '0, rline = '0;
  logic [WW-1:0] hword = '0;
  logic [DW-1:0] wdata = '0, hrdata;
  logic [WIDTH-1:0] rdata;
  logic [WIDTH-1:0] shadow [2*LINES];
  bit written [2*LINES];
  int checks = 0, failures = 0;

  operand_l1_mem #(.WIDTH(WIDTH), .LINES(LINES), .HOST_DW(DW)) dut (
    .clk, .host_we(we), .host_line(hline), .host_word(hword), .host_wdata(wdata),
    .host_rdata(hrdata), .rd_line(rline), .rd_data(rdata));

  always #5 clk = ~clk;

  initial begin
    // fill four lines completely (two per bank), then scatter writes
    foreach (shadow[i]) shadow[i] = '0;
    for (int ln = 0; ln < 4; ln++) begin
      automatic int line = (ln < 2) ? ln : LINES + ln;
      written[line] = 1;
      for (int w = 0; w < WORDS; w++) begin
        we = 1; hline = AW'(line); hword = WW'(w); wdata = $urandom;
        shadow[line][w*DW +: DW] = wdata;
        @(posedge clk); #1;
      end
    end
    for (int t = 0; t < 200; t++) begin
      automatic int line = (($urandom % 2) == 0) ? ($urandom % 2) : LINES + 2 + ($urandom % 2);
      we = 1; hline = AW'(line); hword = WW'($urandom % WORDS); wdata = $urandom;
      shadow[line][hword*DW +: DW] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    foreach (written[line]) begin
      if (!written[line]) continue;
      rline = AW'(line);
      #1;
      checks++;
      if (rdata != shadow[line]) begin failures++; $display("FAIL line read %0d", line); end
      for (int w = 0; w < WORDS; w += 37) begin
        hline = AW'(line); hword = WW'(w);
        #1;
        checks++;
        if (hrdata != shadow[line][w*DW +: DW]) begin failures++; $display("FAIL host read %0d/%0d", line, w); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
