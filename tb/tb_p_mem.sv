// tb_p_mem: writes random result lines (128 x 32 bits) into both banks
// through the accumulator port and checks the accumulator read-back and the
// host word reads.
module tb_p_mem;
  localparam int unsigned LANES = 128, AW = 32, LINES = 8, DW = 32;
  localparam int unsigned WIDTH = LANES * AW, WORDS = WIDTH / DW;
  localparam int unsigned ADW = $clog2(2 * LINES), WW = $clog2(WORDS);
  logic clk = 0, we = 0;
  logic [ADW-1:0] addr = '0, hline = '0;
  logic [WW-1:0] hword = '0;
  logic [WIDTH-1:0] wdata, rdata;
  logic [DW-1:0] hrdata;
  logic [WIDTH-1:0] shadow [2*LINES];
  int checks = 0, failures = 0;

  p_mem #(.LANES(LANES), .ACC_W(AW), .LINES(LINES), .HOST_DW(DW)) dut (
    .clk, .we, .addr, .wdata, .rdata, .host_line(hline), .host_word(hword), .host_rdata(hrdata));

  always #5 clk = ~clk;

  initial begin
    for (int ln = 0; ln < 2*LINES; ln++) begin
      for (int i = 0; i < WIDTH/32; i++) wdata[i*32 +: 32] = $urandom;
      we = 1; addr = ADW'(ln); shadow[ln] = wdata;
      @(posedge clk); #1;
    end
    // overwrite a few lines
    for (int t = 0; t < 6; t++) begin
      automatic int ln = $urandom % (2*LINES);
      for (int i = 0; i < WIDTH/32; i++) wdata[i*32 +: 32] = $urandom;
      we = 1; addr = ADW'(ln); shadow[ln] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int ln = 0; ln < 2*LINES; ln++) begin
      addr = ADW'(ln);
      #1;
      checks++;
      if (rdata != shadow[ln]) begin failures++; $display("FAIL line %0d", ln); end
      for (int w = 0; w < WORDS; w += 13) begin
        hline = ADW'(ln); hword = WW'(w);
        #1;
        checks++;
        if (hrdata != shadow[ln][w*DW +: DW]) begin failures++; $display("FAIL host %0d/%0d", ln, w); end
      end
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
