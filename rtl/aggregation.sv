// aggregation: the aggregation component of the IPA decoder for RM(m,3).
//
// Level 1 has 2^M-1 AGG units of length 2^(M-1). Unit p merges the decodings
// yh2 of the 2^(M-1)-1 children of level-1 node p into yh1[p], using that
// node's projection y1[p] and its children's projections y2. Level 2 is one
// AGG unit of length 2^M. It merges yh1 into yh0, the new estimate of the
// whole codeword, with y0 = y as the vector that gets flipped. Each AGG unit
// has two registers, so yh0 is valid four clocks after yh2.
//
// The unit counts per level (2^M-1, then 1) follow the decoder description.
//
// Parameters: M  log2 of the code length.
// Ports:      clk; y0, y1, y2  current estimate and its projections;
//             yh2  first-order decodings; yh0  aggregated estimate.
module aggregation #(
  parameter int unsigned M = 6
) (
  input  logic                                           clk,
  input  logic [2**M-1:0]                                y0,
  input  logic [2**M-2:0][2**(M-1)-1:0]                  y1,
  input  logic [(2**M-1)*(2**(M-1)-1)-1:0][2**(M-2)-1:0] y2,
  input  logic [(2**M-1)*(2**(M-1)-1)-1:0][2**(M-2)-1:0] yh2,
  output logic [2**M-1:0]                                yh0
);
  localparam int unsigned N1 = 2 ** M - 1;
  localparam int unsigned N2 = 2 ** (M - 1) - 1;

  logic [N1-1:0][2**(M-1)-1:0] yh1;

  for (genvar p = 0; p < N1; p++) begin : g_l1
    agg_unit #(.M(M - 1)) u_agg (
      .clk  (clk),
      .y_in (y1[p]),
      .yc   (y2[p*N2 +: N2]),
      .yhc  (yh2[p*N2 +: N2]),
      .y_out(yh1[p])
    );
  end

  agg_unit #(.M(M)) u_agg_top (
    .clk  (clk),
    .y_in (y0),
    .yc   (y1),
    .yhc  (yh1),
    .y_out(yh0)
  );

endmodule
