// tb_majority_voter: 63-vote and 31-vote voters with random votes of varying
// density (including counts right at the threshold), checked one cycle later.
module tb_majority_voter;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [63:0][62:0] va;
  logic [31:0][30:0] vb;
  logic [63:0] fa;
  logic [31:0] fb;

  majority_voter #(.K(63), .Z(64)) u_a (.clk(clk), .v(va), .flip(fa));
  majority_voter #(.K(31), .Z(32)) u_b (.clk(clk), .v(vb), .flip(fb));

  initial begin
    logic [63:0] ea;
    logic [31:0] eb;
    int c, target;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int z = 0; z < 64; z++) begin
        // choose a count near the threshold 31/32, then scatter it
        target = (n % 3 == 0) ? $urandom_range(0, 63) : $urandom_range(29, 34);
        va[z] = '0;
        while ($countones(va[z]) < target) va[z][$urandom_range(0, 62)] = 1'b1;
        ea[z] = $countones(va[z]) > 31;
      end
      for (int z = 0; z < 32; z++) begin
        target = $urandom_range(13, 18);
        vb[z] = '0;
        while ($countones(vb[z]) < target) vb[z][$urandom_range(0, 30)] = 1'b1;
        eb[z] = $countones(vb[z]) > 15;
      end
      @(negedge clk);
      checks += 2;
      if (fa !== ea) begin failures++; $display("FAIL K=63 got %h exp %h", fa, ea); end
      if (fb !== eb) begin failures++; $display("FAIL K=31 got %h exp %h", fb, eb); end
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
