// tb_conv_layer: 3x3 convolutions with ResNet-18 (CIFAR-10) layer shapes on
// the full-size accelerator, lowered to GEMM contexts by im2col.
//
// A convolution output pixel is a dot product over input channel x 3 x 3
// taps, so with reduction index c = ci*9 + ky*3 + kx the activations of 8
// output pixels form the [C,L] operand A and 16 filters form the [K,C]
// operand B; unused reduction positions are zero. Two layer shapes are run,
// each on a 4x4 output patch (2 contexts of 8 pixels) for 16 output
// channels, stride 1, zero padding 1:
//   conv1:  3 input channels, C = 27, zero-padded to 576;
//   layer1: 64 input channels, C = 576, exactly one array reduction.
// Each is run at a4w4 (G = 4) and a2w2 (G = 2). Every output is compared with
// a direct convolution computed here.
module tb_conv_layer;
  import gavina_pkg::*;

  localparam int unsigned CC = gavina_pkg::C;
  localparam int unsigned LL = gavina_pkg::L;
  localparam int unsigned KK = gavina_pkg::K;
  localparam int unsigned OH = 4, OW = 4;       // output patch
  localparam int unsigned MAXCI = 64;
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
  int x [MAXCI][OH+2][OW+2];                    // input with zero border
  int w [KK][MAXCI][3][3];
  int A [CC][LL];
  int B [KK][CC];

  task automatic host_write(host_mem_e m, int line, int word, logic [31:0] data);
    host_we = 1; host_mem = m; host_line = L1_ADDR_W'(line); host_word = 9'(word); host_wdata = data;
    @(posedge clk); #1;
    host_we = 0;
  endtask

  task automatic load_planes(int bits, int line0);
    for (int b = 0; b < bits; b++) begin
      for (int wd = 0; wd < AWORDS; wd++) begin
        logic [31:0] d = '0;
        for (int j = 0; j < 32; j++) begin
          int bi = wd * 32 + j;
          d[j] = 1'(A[bi % CC][bi / CC] >>> b);
        end
        host_write(MEM_A1, line0 + b, wd, d);
      end
      for (int wd = 0; wd < BWORDS; wd++) begin
        logic [31:0] d = '0;
        for (int j = 0; j < 32; j++) begin
          int bi = wd * 32 + j;
          d[j] = 1'(B[bi / CC][bi % CC] >>> b);
        end
        host_write(MEM_B1, line0 + b, wd, d);
      end
    end
  endtask

  task automatic run_layer(string name, int ci_n, int bits, int g);
    int lo = -(1 << (bits - 1)), span = 1 << bits;
    for (int ci = 0; ci < MAXCI; ci++)
      for (int y = 0; y < OH + 2; y++)
        for (int xx = 0; xx < OW + 2; xx++)
          x[ci][y][xx] = (ci < ci_n && y > 0 && y <= OH && xx > 0 && xx <= OW)
                         ? lo + int'($urandom % span) : 0;
    for (int k = 0; k < KK; k++)
      for (int ci = 0; ci < MAXCI; ci++)
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++)
            w[k][ci][ky][kx] = (ci < ci_n) ? lo + int'($urandom % span) : 0;
    // im2col: two contexts of 8 output pixels each
    for (int t = 0; t < 2; t++) begin
      for (int c = 0; c < CC; c++) begin
        int ci = c / 9, ky = (c % 9) / 3, kx = c % 3;
        for (int l = 0; l < LL; l++) begin
          int pix = t * LL + l;
          A[c][l] = (ci < ci_n) ? x[ci][pix / OW + ky][pix % OW + kx] : 0;
        end
        for (int k = 0; k < KK; k++) B[k][c] = (ci < ci_n) ? w[k][ci][ky][kx] : 0;
      end
      load_planes(bits, t * bits);
    end
    for (int t = 0; t < 2; t++) begin
      cmd.a_bits = BITS_W'(bits); cmd.b_bits = BITS_W'(bits); cmd.g = G_W'(g);
      cmd.a1_line = L1_ADDR_W'(t * bits); cmd.b1_line = L1_ADDR_W'(t * bits);
      cmd.p_line = P_ADDR_W'(t); cmd.accumulate = 1'b0;
      cmd_valid = 1;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      #1 cmd_valid = 0;
    end
    while (busy) @(posedge clk);
    #1;
    // direct convolution reference
    for (int k = 0; k < KK; k++)
      for (int pix = 0; pix < OH * OW; pix++) begin
        int s = 0;
        for (int ci = 0; ci < ci_n; ci++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              s += w[k][ci][ky][kx] * x[ci][pix / OW + ky][pix % OW + kx];
        host_mem = MEM_P; host_line = L1_ADDR_W'(pix / LL); host_word = 9'(k * LL + pix % LL);
        #1;
        checks++;
        if (signed'(host_rdata) != s) begin
          failures++;
          if (failures < 10) $display("FAIL %s a%0dw%0d out[%0d][%0d] got %0d exp %0d",
                                      name, bits, bits, k, pix, signed'(host_rdata), s);
        end
      end
    $display("%s (%0d input channels, C=%0d) a%0dw%0d G=%0d checked", name, ci_n, ci_n * 9, bits, bits, g);
  endtask

  initial begin
    cmd = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_layer("conv1", 3, 4, 4);
    run_layer("layer1", 64, 4, 4);
    run_layer("conv1", 3, 2, 2);
    run_layer("layer1", 64, 2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
