// tb_fod: RM(4,1) first-order decoder. Streams a new input every cycle and
// checks each output three cycles later against an exhaustive-correlation
// reference. Codewords with up to 3 errors must come back error free.
module tb_fod;
  import ipa_ref_pkg::*;
  localparam int M = 4, N = 16, LAT = 3;
  int checks = 0, failures = 0, corrected = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0] y, yhat;
  vec_t hist_in [$], hist_cw [$];
  bit   hist_ok [$];

  fod #(.M(M)) u_dut (.clk(clk), .y(y), .yhat(yhat));

  initial begin
    vec_t cw, e, exp;
    int w;
    for (int n = 0; n < 3000 + LAT; n++) begin
      @(negedge clk);
      if (hist_in.size() == LAT) begin
        exp = ref_fod(hist_in[0], M);
        checks++;
        if (64'(yhat) !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL in=%h got %h exp %h", hist_in[0], yhat, exp);
        end
        if (hist_ok[0]) begin
          checks++;
          if (64'(yhat) !== hist_cw[0]) failures++;
          else corrected++;
        end
        void'(hist_in.pop_front());
        void'(hist_cw.pop_front());
        void'(hist_ok.pop_front());
      end
      // random RM(4,1) codeword: s ^ <p,z>
      cw = '0;
      begin
        int zz = $urandom_range(0, N - 1);
        bit ss = $urandom_range(0, 1);
        for (int p = 0; p < N; p++) cw[p] = ss ^ parity(p & zz);
      end
      w = $urandom_range(0, 6);
      e = err_pattern(M, w);
      y = N'(cw ^ e);
      hist_in.push_back(64'(y));
      hist_cw.push_back(cw);
      hist_ok.push_back(w <= 3);
    end
    if (corrected == 0) failures++;
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
