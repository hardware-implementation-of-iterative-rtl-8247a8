// tb_fht: exhaustive check of the 16-point Hadamard transform against the
// definition l(z) = sum_p (1-2y_p)(-1)^{<p,z>}.
module tb_fht;
  localparam int M = 4, N = 16, W = M + 2;
  int checks = 0, failures = 0;
  logic [N-1:0] y;
  logic [N-1:0][W-1:0] l;

  fht #(.M(M)) u_dut (.y(y), .l(l));

  initial begin
    int exp;
    for (int v = 0; v < (1 << N); v++) begin
      y = N'(v);
      #1;
      for (int z = 0; z < N; z++) begin
        exp = 0;
        for (int p = 0; p < N; p++)
          exp += ((y[p] ^ (^(p & z))) != 0) ? -1 : 1;
        checks++;
        if (int'($signed(l[z])) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL y=%h z=%0d got %0d exp %0d", y, z, $signed(l[z]), exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
