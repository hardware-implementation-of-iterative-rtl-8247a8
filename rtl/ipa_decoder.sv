// ipa_decoder: fully parallel hard-decision IPA (iterative
// projection-aggregation) decoder for the Reed-Muller code RM(M,3). The
// default is RM(6,3): n = 64, k = 42.
//
// Dataflow of one iteration (10 clocks):
//   control_unit        holds the current estimate y (clock 0)
//   projection          2^M-1 projections of y, then 2^(M-1)-1 projections
//                       of each, registered after each level (clocks 1, 2)
//   first_order_decoder (2^M-1)(2^(M-1)-1) parallel RM(M-2,1) decoders,
//                       registered after FHT, argmax and re-encoding (3..5)
//   aggregation         2^M-1 AGG units of length 2^(M-1), then one of
//                       length 2^M, two registers each (clocks 6..9)
//   control_unit        fixed-point/limit check, register (clock 10)
// The loop runs at most NMAX = ceil(M/2) times per codeword, so a codeword
// takes N_iter * 10 clocks and the decoder accepts the next codeword in its
// final cycle.
//
// Ports: clk; rst_n (asynchronous, active low); in_valid/in_ready/in_y the
// received hard-decision word; out_valid/out_c the decoded codeword (one
// cycle pulse); out_iters iterations used; out_conv 1 if the decoder stopped
// at a fixed point, 0 if it hit NMAX.
//
// The structure, the iteration count and the 3(r-1)+4 cycles per iteration
// follow the decoder description. The fixed order r = 3 is that of the
// architecture example, and the handshake is this design's own.
module ipa_decoder #(
  parameter int unsigned M    = 6,
  parameter int unsigned NMAX = (M + 1) / 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [2**M-1:0]           in_y,
  output logic                      out_valid,
  output logic [2**M-1:0]           out_c,
  output logic [$clog2(NMAX+1)-1:0] out_iters,
  output logic                      out_conv
);
  import ipa_pkg::*;

  localparam int unsigned N  = 2 ** M;
  localparam int unsigned N1 = 2 ** M - 1;
  localparam int unsigned N2 = 2 ** (M - 1) - 1;

  // registers in the datapath: 2 projection + 3 FOD + 4 aggregation
  localparam int unsigned DATAPATH_REGS = (R - 1) + 3 + 2 * (R - 1);
  initial assert (DATAPATH_REGS + 1 == CYC_PER_ITER) else $error("cycle budget mismatch");
  initial assert (M >= 3) else $error("RM(m,3) needs m >= 3");

  logic [N-1:0]                  y_cur, yh0;
  logic [N1-1:0][N/2-1:0]        y1;
  logic [N1*N2-1:0][N/4-1:0]     y2, yh2;

  control_unit #(.N(N), .NMAX(NMAX), .CYC(CYC_PER_ITER)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .in_y,
    .y_cur, .yhat(yh0),
    .out_valid, .out_c, .out_iters, .out_conv
  );

  projection #(.M(M)) u_proj (.clk, .y(y_cur), .y1, .y2);

  first_order_decoder #(.M(M)) u_fod (.clk, .y2, .yh2);

  aggregation #(.M(M)) u_agg (.clk, .y0(y_cur), .y1, .y2, .yh2, .yh0);

endmodule
