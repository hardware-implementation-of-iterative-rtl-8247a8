// tb_argmax: random signed inputs, with many forced ties; checks the index of
// the largest magnitude (lowest index on a tie) and its sign.
module tb_argmax;
  localparam int M = 4, N = 16, W = 6;
  int checks = 0, failures = 0;
  logic [N-1:0][W-1:0] l;
  logic [M-1:0] z;
  logic neg;

  argmax #(.M(M), .W(W)) u_dut (.l(l), .z(z), .neg(neg));

  initial begin
    int v, best, bz, a;
    for (int n = 0; n < 20000; n++) begin
      best = -1;
      bz   = 0;
      for (int k = 0; k < N; k++) begin
        // small range on half of the tests makes ties frequent
        v    = (n % 2) ? $urandom_range(0, 6) - 3 : $urandom_range(0, 32) - 16;
        l[k] = W'(v);
        a    = v < 0 ? -v : v;
        if (a > best) begin
          best = a;
          bz   = k;
        end
      end
      #1;
      checks++;
      if (int'(z) != bz || neg != l[bz][W-1]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got z=%0d neg=%0b exp z=%0d", n, z, neg, bz);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
