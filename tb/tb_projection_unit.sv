// tb_projection_unit: checks projection units of several lengths and indices
// against the recursive reference projection, on random inputs.
module tb_projection_unit;
  import ipa_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [63:0] y6;
  logic [31:0] y5;
  logic [31:0] yp_a, yp_b, yp_c, yp_d;
  logic [15:0] yp_e, yp_f;

  projection_unit #(.M(6), .I(1))  u_a (.y(y6), .yp(yp_a));
  projection_unit #(.M(6), .I(13)) u_b (.y(y6), .yp(yp_b));
  projection_unit #(.M(6), .I(32)) u_c (.y(y6), .yp(yp_c));
  projection_unit #(.M(6), .I(63)) u_d (.y(y6), .yp(yp_d));
  projection_unit #(.M(5), .I(6))  u_e (.y(y5), .yp(yp_e));
  projection_unit #(.M(5), .I(31)) u_f (.y(y5), .yp(yp_f));

  task automatic chk(vec_t got, vec_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      y6 = {$urandom, $urandom};
      y5 = $urandom;
      #1;
      chk(64'(yp_a), ref_proj(y6, 1, 6), "m6 i1");
      chk(64'(yp_b), ref_proj(y6, 13, 6), "m6 i13");
      chk(64'(yp_c), ref_proj(y6, 32, 6), "m6 i32");
      chk(64'(yp_d), ref_proj(y6, 63, 6), "m6 i63");
      chk(64'(yp_e), ref_proj(64'(y5), 6, 5), "m5 i6");
      chk(64'(yp_f), ref_proj(64'(y5), 31, 5), "m5 i31");
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
