// tb_aggregation: both aggregation levels of the default RM(6,3) component.
// Inputs are a received word with errors, its exact projections and, as
// decodings, the projections of the error-free word with a few disturbed
// branches; the output, four cycles later, is checked against two levels of
// the reference aggregation.
module tb_aggregation;
  import ipa_ref_pkg::*;
  localparam int N1 = 63, N2 = 31;
  int checks = 0, failures = 0, corrected = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [63:0] y0, yh0;
  logic [N1-1:0][31:0] y1;
  logic [N1*N2-1:0][15:0] y2, yh2;

  aggregation u_dut (.clk(clk), .y0(y0), .y1(y1), .y2(y2), .yh2(yh2), .yh0(yh0));

  initial begin
    vec_t cw, yv, ys1 [64], yh1 [64], ys2 [64], yhs2 [64], exp;
    for (int n = 0; n < 8; n++) begin
      @(negedge clk);
      cw = rm_codeword(6);
      yv = cw ^ err_pattern(6, n % 4);
      y0 = yv;
      ys1[0] = '0; yh1[0] = '0;
      for (int p = 1; p < 64; p++) begin
        ys1[p] = ref_proj(yv, p, 6);
        y1[p-1] = 32'(ys1[p]);
        ys2[0] = '0; yhs2[0] = '0;
        for (int q = 1; q < 32; q++) begin
          ys2[q]  = ref_proj(ys1[p], q, 5);
          yhs2[q] = ref_proj(ref_proj(cw, p, 6), q, 5)
                    ^ (($urandom_range(0, 7) == 0) ? err_pattern(4, 1) : 64'd0);
          y2[(p-1)*N2 + q - 1]  = 16'(ys2[q]);
          yh2[(p-1)*N2 + q - 1] = 16'(yhs2[q]);
        end
        yh1[p] = ref_agg(5, ys1[p], ys2, yhs2);
      end
      exp = ref_agg(6, yv, ys1, yh1);
      repeat (4) @(negedge clk);
      checks++;
      if (64'(yh0) !== exp) begin failures++; $display("FAIL got %h exp %h", yh0, exp); end
      if (yh0 == cw && yv != cw) corrected++;
    end
    checks++;
    if (corrected == 0) begin failures++; $display("FAIL nothing corrected"); end
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
