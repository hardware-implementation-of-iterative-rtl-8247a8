// first_order_decoder: the first-order decoding component of the IPA decoder
// for RM(m,3).
//
// One fod instance per innermost projected vector. There are
// (2^M-1)(2^(M-1)-1) of them (1953 for m = 6), and each decodes RM(M-2,1)
// from a 2^(M-2)-bit vector. All of them work in parallel, and every output is
// valid three clocks after its input.
//
// Parameters: M  log2 of the length of the code the decoder serves.
// Ports:      clk; y2  level-2 projections; yh2  their first-order decodings.
module first_order_decoder #(
  parameter int unsigned M = 6
) (
  input  logic                                           clk,
  input  logic [(2**M-1)*(2**(M-1)-1)-1:0][2**(M-2)-1:0] y2,
  output logic [(2**M-1)*(2**(M-1)-1)-1:0][2**(M-2)-1:0] yh2
);
  localparam int unsigned NF = (2 ** M - 1) * (2 ** (M - 1) - 1);

  for (genvar k = 0; k < NF; k++) begin : g_fod
    fod #(.M(M - 2)) u_fod (.clk(clk), .y(y2[k]), .yhat(yh2[k]));
  end

endmodule
