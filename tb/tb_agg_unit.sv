// tb_agg_unit: AGG units of length 64 and 32 against the reference
// aggregation (recursive index search, vote, flip). The decoded children are
// the projected children with sparse random corrections, so that votes land
// on both sides of the threshold; checked two cycles later.
module tb_agg_unit;
  import ipa_ref_pkg::*;
  int checks = 0, failures = 0, flips = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [63:0] yin6, yout6;
  logic [62:0][31:0] yc6, yhc6;
  logic [31:0] yin5, yout5;
  logic [30:0][15:0] yc5, yhc5;

  agg_unit #(.M(6)) u_a (.clk(clk), .y_in(yin6), .yc(yc6), .yhc(yhc6), .y_out(yout6));
  agg_unit #(.M(5)) u_b (.clk(clk), .y_in(yin5), .yc(yc5), .yhc(yhc5), .y_out(yout5));

  initial begin
    vec_t ys [64], yhs [64], ys5 [64], yhs5 [64], e6, e5, base, err;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      base = {$urandom, $urandom};
      err  = err_pattern(6, $urandom_range(0, 4));
      yin6 = base ^ err;
      yin5 = 32'(base ^ err);
      ys[0] = '0; yhs[0] = '0; ys5[0] = '0; yhs5[0] = '0;
      for (int i = 1; i < 64; i++) begin
        ys[i]  = ref_proj(yin6, i, 6);
        // correct the projections of the error: decoded = projection of base,
        // with random extra disturbance
        yhs[i] = ref_proj(base, i, 6) ^ (($urandom_range(0, 3) == 0) ? err_pattern(5, 1) : 64'd0);
        yc6[i-1]  = 32'(ys[i]);
        yhc6[i-1] = 32'(yhs[i]);
      end
      for (int i = 1; i < 32; i++) begin
        ys5[i]  = ref_proj(64'(yin5), i, 5);
        yhs5[i] = ref_proj(64'(base & mask(32)), i, 5) ^ (($urandom_range(0, 3) == 0) ? err_pattern(4, 1) : 64'd0);
        yc5[i-1]  = 16'(ys5[i]);
        yhc5[i-1] = 16'(yhs5[i]);
      end
      e6 = ref_agg(6, yin6, ys, yhs);
      e5 = ref_agg(5, 64'(yin5), ys5, yhs5);
      if (e6 != yin6) flips++;
      repeat (2) @(negedge clk);
      checks += 2;
      if (64'(yout6) !== e6) begin failures++; $display("FAIL m=6 got %h exp %h", yout6, e6); end
      if (64'(yout5) !== e5) begin failures++; $display("FAIL m=5 got %h exp %h", yout5, e5); end
    end
    checks++;
    if (flips == 0) begin failures++; $display("FAIL no test flipped a bit"); end
    $display("flips=%0d", flips);
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
