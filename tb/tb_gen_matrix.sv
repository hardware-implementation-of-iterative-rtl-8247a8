// tb_gen_matrix: exhaustive check against x*G(m,1), with G(m,1) built by the
// recursion G(m,1) = [G(m-1,1) G(m-1,1); 0 G(m-1,0)], G(1,1) = [1 1; 0 1].
module tb_gen_matrix;
  localparam int M = 4, N = 16;
  int checks = 0, failures = 0;
  logic [M-1:0] z;
  logic s;
  logic [N-1:0] c;
  bit G [M+1][N];  // rows: 0 = all ones, k = message bit k

  gen_matrix #(.M(M)) u_dut (.z(z), .s(s), .c(c));

  initial begin
    bit exp [N];
    // build G(m,1) row by row from the recursion
    G[0][0] = 1; G[0][1] = 1; G[1][0] = 0; G[1][1] = 1;
    for (int mm = 2; mm <= M; mm++) begin
      int h;
      h = 1 << (mm - 1);
      for (int k = 0; k < mm; k++)
        for (int p = 0; p < h; p++) G[k][p + h] = G[k][p];
      for (int p = 0; p < h; p++) begin
        G[mm][p]     = 0;
        G[mm][p + h] = 1;  // G(m-1,0) is the all-ones row
      end
    end
    for (int v = 0; v < (1 << (M + 1)); v++) begin
      s = v[0];
      z = M'(v >> 1);
      #1;
      for (int p = 0; p < N; p++) begin
        exp[p] = s & G[0][p];
        for (int k = 1; k <= M; k++) exp[p] ^= z[k-1] & G[k][p];
        checks++;
        if (c[p] != exp[p]) begin
          failures++;
          $display("FAIL s=%0b z=%0d p=%0d", s, z, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
