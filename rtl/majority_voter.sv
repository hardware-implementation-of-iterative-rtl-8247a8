// majority_voter: per-coordinate majority vote of the aggregation step.
//
// For each of Z coordinates the voter counts the K incoming votes. A vote is
// 1 when a branch reports a disagreement between its projected and decoded
// bits. The counts are registered. One clock later, flip[z] is 1 when the
// registered count exceeds K/2, i.e. vote(z) > (2^m-1)/2 for K = 2^m-1.
//
// The decision rule follows the decoder description. The population count,
// the register on the counts (the first of the two registers of an
// aggregation level) and the compare against a constant are this design's
// choices.
//
// Parameters: K  votes per coordinate (odd); Z  number of coordinates.
// Ports:      clk; v[z][k]  votes; flip[z]  majority decision, 1 cycle later.
module majority_voter #(
  parameter int unsigned K = 63,
  parameter int unsigned Z = 64
) (
  input  logic                clk,
  input  logic [Z-1:0][K-1:0] v,
  output logic [Z-1:0]        flip
);
  localparam int unsigned CW = $clog2(K + 1);

  logic [CW-1:0] cnt_d [Z];
  logic [CW-1:0] cnt_q [Z];

  always_comb begin
    for (int unsigned z = 0; z < Z; z++) begin
      cnt_d[z] = '0;
      for (int unsigned k = 0; k < K; k++)
        cnt_d[z] = cnt_d[z] + CW'(v[z][k]);
    end
  end

  always_ff @(posedge clk) cnt_q <= cnt_d;

  always_comb begin
    for (int unsigned z = 0; z < Z; z++)
      flip[z] = (cnt_q[z] > CW'(K / 2));
  end

endmodule
