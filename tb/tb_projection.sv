// tb_projection: checks both projection levels of the default RM(6,3)
// component against the reference projection, including the one- and
// two-cycle register delays.
module tb_projection;
  import ipa_ref_pkg::*;
  localparam int M = 6, N1 = 63, N2 = 31;
  int checks = 0, failures = 0;
  int cyc = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic [63:0] y;
  logic [N1-1:0][31:0] y1;
  logic [N1*N2-1:0][15:0] y2;

  projection u_dut (.clk(clk), .y(y), .y1(y1), .y2(y2));

  initial begin
    vec_t yv, e1;
    for (int n = 0; n < 6; n++) begin
      @(negedge clk);
      yv = {$urandom, $urandom};
      y  = yv;
      @(negedge clk);  // one register
      for (int p = 0; p < N1; p++) begin
        checks++;
        if (64'(y1[p]) !== ref_proj(yv, p + 1, M)) begin
          failures++;
          $display("FAIL y1[%0d]", p);
        end
      end
      @(negedge clk);  // two registers
      for (int p = 0; p < N1; p++) begin
        e1 = ref_proj(yv, p + 1, M);
        for (int q = 1; q <= N2; q++) begin
          checks++;
          if (64'(y2[p*N2+q-1]) !== ref_proj(e1, q, M - 1)) begin
            failures++;
            if (failures < 10) $display("FAIL y2[%0d][%0d]", p, q);
          end
        end
      end
      // y changes: y1 must still show the old value until the next edge
      y = ~yv;
      #1;
      checks++;
      if (64'(y1[0]) !== ref_proj(yv, 1, M)) begin
        failures++;
        $display("FAIL y1 changed without a clock edge");
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
