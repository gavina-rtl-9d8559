// tb_parallel_array: checks the K x L binary GEMM at the full array shape
// [C,L,K] = [576,8,16]. Random bit planes; every output lane is compared with
// a reference count of A[c][l] & B[k][c] over c.
module tb_parallel_array;
  localparam int unsigned C = 576, L = 8, K = 16;
  localparam int unsigned SB = $clog2(C + 1);
  logic [C*L-1:0]    a;
  logic [K*C-1:0]    b;
  logic [K*L*SB-1:0] p;
  int checks = 0, failures = 0;

  parallel_array #(.C(C), .L(L), .K(K)) dut (.a_plane(a), .b_plane(b), .p);

  initial begin
    for (int t = 0; t < 12; t++) begin
      for (int i = 0; i < C*L; i++) a[i] = ($urandom % 4) <= (t % 4);
      for (int i = 0; i < K*C; i++) b[i] = ($urandom % 4) <= ((t + 1) % 4);
      if (t == 0) begin a = '1; b = '1; end
      #1;
      for (int k = 0; k < K; k++) begin
        for (int l = 0; l < L; l++) begin
          automatic int unsigned n = 0;
          for (int c = 0; c < C; c++) if (a[l*C+c] && b[k*C+c]) n++;
          checks++;
          if (int'(p[(k*L+l)*SB +: SB]) != int'(n)) begin
            failures++;
            $display("FAIL k=%0d l=%0d got %0d exp %0d", k, l, p[(k*L+l)*SB +: SB], n);
          end
        end
      end
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
