// argmax: index of the largest magnitude among 2^M signed values, and the
// sign of the value found there.
//
// A binary tree of M levels. Each node compares the magnitudes that its two
// halves delivered ('>' comparator) and passes on the index and sign of the
// winner (multiplexer). The upper half wins only when its magnitude is
// strictly greater, so the lowest index wins a tie. The unit is combinational.
//
// The tree of two Argmax(t-1), a comparator and a multiplexer follows the
// decoder description. Taking the magnitude and the lowest-index tie rule are
// this design's choices: the decoder needs the sign of the peak, which is only
// useful if a negative peak can win.
//
// Parameters: M  log2 of the number of values; W  width of each value.
// Ports:      l  values; z  winning index; neg  1 if l[z] < 0.
module argmax #(
  parameter int unsigned M = 4,
  parameter int unsigned W = M + 2
) (
  input  logic [2**M-1:0][W-1:0] l,
  output logic [M-1:0]           z,
  output logic                   neg
);
  localparam int unsigned N = 2 ** M;

  logic [W-1:0] mag [M+1][N];
  logic [M-1:0] idx [M+1][N];
  logic         sgn [M+1][N];

  always_comb begin
    for (int unsigned k = 0; k < N; k++) begin
      sgn[0][k] = l[k][W-1];
      mag[0][k] = l[k][W-1] ? (~l[k] + W'(1)) : l[k];
      idx[0][k] = M'(k);
    end
    for (int unsigned s = 0; s < M; s++) begin
      for (int unsigned k = 0; k < N; k++) begin
        if (k < (N >> (s + 1))) begin
          if (mag[s][2*k+1] > mag[s][2*k]) begin
            mag[s+1][k] = mag[s][2*k+1];
            idx[s+1][k] = idx[s][2*k+1];
            sgn[s+1][k] = sgn[s][2*k+1];
          end else begin
            mag[s+1][k] = mag[s][2*k];
            idx[s+1][k] = idx[s][2*k];
            sgn[s+1][k] = sgn[s][2*k];
          end
        end else begin
          mag[s+1][k] = '0;
          idx[s+1][k] = '0;
          sgn[s+1][k] = 1'b0;
        end
      end
    end
    z   = idx[M][0];
    neg = sgn[M][0];
  end

endmodule
