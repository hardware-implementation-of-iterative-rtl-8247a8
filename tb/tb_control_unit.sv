// tb_control_unit: the control unit with a stand-in datapath. The stand-in
// returns yhat = y with its lowest set bit cleared, which reaches a fixed
// point after popcount(y)+1 iterations. The bench checks the delivered
// word, the iteration count, the convergence flag, the exact latency of
// N_iter * 10 cycles, the input stall while busy and back-to-back acceptance.
module tb_control_unit;
  localparam int N = 64, NMAX = 3, CYC = 10;
  int checks = 0, failures = 0, cyc = 0;
  int n_conv = 0, n_limit = 0, n_b2b = 0, n_stall = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic in_valid, in_ready, out_valid, out_conv;
  logic [N-1:0] in_y, y_cur, yhat, out_c;
  logic [1:0] out_iters;

  assign yhat = y_cur & (y_cur - 1);

  control_unit #(.N(N), .NMAX(NMAX), .CYC(CYC)) u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_y, .y_cur, .yhat,
    .out_valid, .out_c, .out_iters, .out_conv);

  logic [N-1:0] q_y [$];
  int q_t [$];

  // source: random gaps, random words with 0..4 set bits
  initial begin
    logic [N-1:0] w;
    in_valid = 0;
    in_y = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      w = '0;
      repeat ($urandom_range(0, 4)) w[$urandom_range(0, N - 1)] = 1'b1;
      if (n % 4 == 0) repeat ($urandom_range(1, 25)) @(negedge clk);
      in_valid = 1;
      in_y = w;
      #1;
      while (!in_ready) begin
        @(negedge clk);
      end
      // in_ready is sampled at the coming edge
      @(posedge clk);
      q_y.push_back(w);
      if (u_dut.busy) n_b2b++;
      @(negedge clk);
      q_t.push_back(cyc);
      in_valid = 0;
    end
    repeat (40) @(negedge clk);
    checks += 4;
    if (n_conv == 0) failures++;
    if (n_limit == 0) failures++;
    if (n_b2b == 0) failures++;
    if (n_stall == 0) failures++;
    checks++;
    if (q_y.size() != 0) failures++;
    $display("converged=%0d limit=%0d back_to_back=%0d stalls=%0d", n_conv, n_limit, n_b2b, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid && !in_ready) n_stall++;

  // checker
  always @(negedge clk) begin
    if (out_valid) begin
      logic [N-1:0] w, e;
      int k, it, t0;
      bit cv;
      w  = q_y.pop_front();
      t0 = q_t.pop_front();
      k  = $countones(w);
      it = (k + 1 < NMAX) ? k + 1 : NMAX;
      cv = (k + 1 <= NMAX);
      e  = w;
      for (int j = 0; j < it; j++) e = e & (e - 1);
      checks += 4;
      if (out_c !== e) begin failures++; $display("FAIL word %h got %h exp %h", w, out_c, e); end
      if (int'(out_iters) != it) begin failures++; $display("FAIL iters %0d exp %0d", out_iters, it); end
      if (out_conv !== cv) begin failures++; $display("FAIL conv"); end
      if (cyc - t0 != it * CYC) begin failures++; $display("FAIL latency %0d exp %0d", cyc - t0, it * CYC); end
      if (cv) n_conv++; else n_limit++;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
