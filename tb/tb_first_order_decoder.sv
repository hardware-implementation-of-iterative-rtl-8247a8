// tb_first_order_decoder: all 465 RM(3,1) decoders of an RM(5,3) decoder,
// fed random vectors, checked three cycles later.
module tb_first_order_decoder;
  import ipa_ref_pkg::*;
  localparam int M = 5, NF = 31 * 15, L = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NF-1:0][L-1:0] y2, yh2;
  logic [L-1:0] saved [NF];

  first_order_decoder #(.M(M)) u_dut (.clk(clk), .y2(y2), .yh2(yh2));

  initial begin
    for (int n = 0; n < 4; n++) begin
      @(negedge clk);
      for (int k = 0; k < NF; k++) begin
        saved[k] = L'($urandom);
        y2[k]    = saved[k];
      end
      repeat (3) @(negedge clk);
      for (int k = 0; k < NF; k++) begin
        checks++;
        if (64'(yh2[k]) !== ref_fod(64'(saved[k]), M - 2)) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d", k);
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
