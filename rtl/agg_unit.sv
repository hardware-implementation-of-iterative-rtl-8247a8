// agg_unit: one AGG unit, aggregating K = 2^M-1 decoded projections back into
// a vector of length 2^M.
//
// For each branch i = 1..K, an RRUM first XORs the branch's projected vector
// yc[i-1] with its decoded vector yhc[i-1]. A 1 marks a pair of coordinates
// whose sum the decoder corrected. The RRUM then routes that bit to every
// coordinate z of the pair, at position FindIndex(z,i) of the half-length
// vector. The majority voter counts these K votes per coordinate, and
// coordinate z of y_in is flipped where the votes exceed K/2. The result is
// registered.
//
// Timing: the counts are registered inside the voter and the flipped vector
// in this unit, so y_out is valid two clocks after the inputs. y_in must stay
// stable over those two clocks, as it does in the decoder.
//
// The RRUM/majority-voter/XOR structure follows the decoder description, and
// so does the index rule, the recursive FindIndex written in closed form
// (ipa_pkg::find_index). The register placement is this design's reading of
// the "two registers per aggregation level" rule.
//
// Parameters: M  log2 of the output length.
// Ports:      clk; y_in  vector being aggregated into; yc/yhc  children's
//             projected and decoded vectors; y_out  aggregated vector.
module agg_unit #(
  parameter int unsigned M = 6
) (
  input  logic                               clk,
  input  logic [2**M-1:0]                    y_in,
  input  logic [2**M-2:0][2**(M-1)-1:0]      yc,
  input  logic [2**M-2:0][2**(M-1)-1:0]      yhc,
  output logic [2**M-1:0]                    y_out
);
  import ipa_pkg::*;

  localparam int unsigned N = 2 ** M;
  localparam int unsigned K = N - 1;

  logic [K-1:0][N/2-1:0] e;      // disagreement of each branch
  logic [N-1:0][K-1:0]   votes;  // RRUM outputs, one vote per branch and coordinate
  logic [N-1:0]          flip;

  always_comb begin
    for (int unsigned k = 0; k < K; k++)
      e[k] = yc[k] ^ yhc[k];
    for (int unsigned z = 0; z < N; z++)
      for (int unsigned k = 0; k < K; k++)
        votes[z][k] = e[k][find_index(z, k + 1)];
  end

  majority_voter #(.K(K), .Z(N)) u_mv (.clk(clk), .v(votes), .flip(flip));

  always_ff @(posedge clk) y_out <= y_in ^ flip;

endmodule
