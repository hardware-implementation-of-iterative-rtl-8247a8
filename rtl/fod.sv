// fod: first-order decoder for RM(M,1) with hard-decision input.
//
// The decoder computes the Hadamard spectrum l = (1-2y)H of the input (fht)
// and finds the index z of the spectral peak with the peak's sign (argmax).
// It then re-encodes x = [neg, z] with the RM(M,1) generator matrix
// (gen_matrix), which gives the nearest first-order codeword. A register
// follows each of the three sub-units, so yhat is valid three clocks after y.
// The registers have no enable and no reset.
//
// The sub-units, their order and the three registers follow the decoder
// description.
//
// Parameters: M  log2 of the code length.
// Ports:      clk; y  received vector; yhat  decoded codeword (3 cycles later).
module fod #(
  parameter int unsigned M = 4
) (
  input  logic            clk,
  input  logic [2**M-1:0] y,
  output logic [2**M-1:0] yhat
);
  localparam int unsigned N = 2 ** M;
  localparam int unsigned W = M + 2;

  logic [N-1:0][W-1:0] l_d, l_q;
  logic [M-1:0]        z_d, z_q;
  logic                neg_d, neg_q;
  logic [N-1:0]        c_d;

  fht        #(.M(M), .W(W)) u_fht (.y(y), .l(l_d));
  always_ff @(posedge clk) l_q <= l_d;

  argmax     #(.M(M), .W(W)) u_argmax (.l(l_q), .z(z_d), .neg(neg_d));
  always_ff @(posedge clk) begin
    z_q   <= z_d;
    neg_q <= neg_d;
  end

  gen_matrix #(.M(M)) u_gen (.z(z_q), .s(neg_q), .c(c_d));
  always_ff @(posedge clk) yhat <= c_d;

endmodule
