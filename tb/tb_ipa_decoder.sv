// tb_ipa_decoder: end-to-end test of the IPA decoder, built for RM(5,3)
// (n = 32, minimum distance 4) to keep the build time short. Two decoders
// get the same word stream: decoder A with N_max = 3, where decoding stops at
// a fixed point after one or more iterations, and decoder B with N_max = 1,
// where every word that is not already a fixed point stops at the iteration
// limit. The words are random codewords with 0..4 random errors, plus some
// random words, sent through the valid/ready interface with random gaps. A
// word is offered to both decoders and taken by both in the same cycle. Each
// output is checked against the reference IPA decoder (word, iteration
// count, fixed-point flag) and against the latency of N_iter * 10 cycles. On
// decoder A, words with at most one error must decode to the sent codeword.
// The bench counts fixed-point stops, limit stops, multi-iteration decodings,
// back-to-back acceptance and input stalls, and fails if any of them never
// happened.
module tb_ipa_decoder;
  import ipa_ref_pkg::*;
  localparam int M = 5, N = 32, CYC = 10, WORDS = 60, TCORR = 1;
  localparam int NMAX_A = 3, NMAX_B = 1;
  int checks = 0, failures = 0, cyc = 0;
  int n_conv = 0, n_limit = 0, n_multi = 0, n_b2b = 0, n_stall = 0, n_fixed = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic in_valid;
  logic [N-1:0] in_y;
  logic rdy [2], ov [2], oc [2];
  logic [N-1:0] oword [2];
  logic [1:0] oit [2];
  logic [0:0] oit_b;

  ipa_decoder #(.M(M), .NMAX(NMAX_A)) u_a (.clk, .rst_n, .in_valid(in_valid && rdy[0] && rdy[1]),
    .in_ready(rdy[0]), .in_y, .out_valid(ov[0]), .out_c(oword[0]), .out_iters(oit[0]), .out_conv(oc[0]));
  ipa_decoder #(.M(M), .NMAX(NMAX_B)) u_b (.clk, .rst_n, .in_valid(in_valid && rdy[0] && rdy[1]),
    .in_ready(rdy[1]), .in_y, .out_valid(ov[1]), .out_c(oword[1]), .out_iters(oit_b), .out_conv(oc[1]));
  assign oit[1] = {1'b0, oit_b};

  vec_t q_y [2][$], q_cw [2][$];
  int   q_t [2][$], q_w [2][$];

  initial begin
    vec_t cw, w;
    int ne;
    in_valid = 0;
    in_y = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < WORDS; n++) begin
      cw = rm_codeword(M);
      ne = (n % 6 == 5) ? 99 : $urandom_range(0, 4);
      w  = (ne == 99) ? 64'($urandom) : (cw ^ err_pattern(M, ne));
      if (n % 5 == 0) repeat ($urandom_range(1, 15)) @(negedge clk);
      in_valid = 1;
      in_y = N'(w);
      #1;
      while (!(rdy[0] && rdy[1])) @(negedge clk);
      @(posedge clk);
      if (u_a.u_ctrl.busy || u_b.u_ctrl.busy) n_b2b++;
      @(negedge clk);
      for (int d = 0; d < 2; d++) begin
        q_y[d].push_back(w);
        q_cw[d].push_back(cw);
        q_w[d].push_back(ne);
        q_t[d].push_back(cyc);
      end
      in_valid = 0;
    end
    repeat (4 * NMAX_A * CYC) @(negedge clk);
    checks += 6;
    if (n_conv == 0)  begin failures++; $display("FAIL no fixed-point stop"); end
    if (n_limit == 0) begin failures++; $display("FAIL no stop at the iteration limit"); end
    if (n_multi == 0) begin failures++; $display("FAIL no multi-iteration decoding"); end
    if (n_b2b == 0)   begin failures++; $display("FAIL no back-to-back acceptance"); end
    if (n_stall == 0) begin failures++; $display("FAIL no input stall"); end
    if (n_fixed == 0) begin failures++; $display("FAIL no error corrected"); end
    checks++;
    if (q_y[0].size() + q_y[1].size() != 0) begin failures++; $display("FAIL words lost"); end
    $display("fixed_point_stops=%0d limit_stops=%0d multi_iteration=%0d back_to_back=%0d stall_cycles=%0d corrected_words=%0d",
             n_conv, n_limit, n_multi, n_b2b, n_stall, n_fixed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid && !(rdy[0] && rdy[1])) n_stall++;

  task automatic check_out(int d);
    vec_t w, cw, e;
    int t0, ne, it;
    bit cv;
    w  = q_y[d].pop_front();
    cw = q_cw[d].pop_front();
    ne = q_w[d].pop_front();
    t0 = q_t[d].pop_front();
    e  = ref_ipa(w, M, d == 0 ? NMAX_A : NMAX_B, it, cv);
    checks += 4;
    if (64'(oword[d]) !== e) begin failures++; $display("FAIL dut%0d word %h got %h exp %h", d, w, oword[d], e); end
    if (int'(oit[d]) != it) begin failures++; $display("FAIL dut%0d iters %0d exp %0d", d, oit[d], it); end
    if (oc[d] !== cv) begin failures++; $display("FAIL dut%0d conv %0b exp %0b", d, oc[d], cv); end
    if (cyc - t0 != it * CYC) begin failures++; $display("FAIL dut%0d latency %0d exp %0d", d, cyc - t0, it * CYC); end
    if (d == 0 && ne <= TCORR) begin
      checks++;
      if (64'(oword[d]) !== cw) begin failures++; $display("FAIL %0d errors not corrected", ne); end
    end
    if (d == 0 && ne > 0 && ne < 99 && 64'(oword[d]) == cw) n_fixed++;
    if (d == 0 && it > 1) n_multi++;
    if (cv) n_conv++; else n_limit++;
  endtask

  always @(negedge clk) begin
    if (ov[0]) check_out(0);
    if (ov[1]) check_out(1);
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
