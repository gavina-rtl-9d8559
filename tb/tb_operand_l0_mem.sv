// tb_operand_l0_mem: writes random A-sized planes (C*L = 4608 bits) into
// both banks and checks that reads of one bank return its own planes while
// the other bank is being written.
module tb_operand_l0_mem;
  localparam int unsigned WIDTH = 4608, PLANES = 8, AW = 3;
  logic clk = 0, we = 0, wbank = 0, rbank = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] shadow [2][PLANES];
  int checks = 0, failures = 0;

  operand_l0_mem #(.WIDTH(WIDTH), .PLANES(PLANES)) dut (
    .clk, .we, .wbank, .waddr, .wdata, .rbank, .raddr, .rdata);

  always #5 clk = ~clk;

  task automatic rnd_plane();
    for (int i = 0; i < WIDTH; i++) wdata[i] = 1'($urandom);
  endtask

  initial begin
    // fill bank 0
    for (int b = 0; b < PLANES; b++) begin
      rnd_plane();
      we = 1; wbank = 0; waddr = AW'(b);
      shadow[0][b] = wdata;
      @(posedge clk); #1;
    end
    // write bank 1 while reading bank 0
    for (int b = 0; b < PLANES; b++) begin
      rnd_plane();
      we = 1; wbank = 1; waddr = AW'(b);
      shadow[1][b] = wdata;
      rbank = 0; raddr = AW'(PLANES - 1 - b);
      #1;
      checks++;
      if (rdata != shadow[0][PLANES-1-b]) begin failures++; $display("FAIL bank0 plane %0d", PLANES-1-b); end
      @(posedge clk); #1;
    end
    we = 0;
    for (int b = 0; b < PLANES; b++) begin
      rbank = 1; raddr = AW'(b);
      #1;
      checks++;
      if (rdata != shadow[1][b]) begin failures++; $display("FAIL bank1 plane %0d", b); end
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
