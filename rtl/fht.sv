// fht: fast Hadamard transform of a binary vector, l = (1 - 2y) H_{2^M}.
//
// The input bits become +1 (bit 0) or -1 (bit 1). M butterfly stages then
// follow. At every stage each block of the vector is split into an upper
// and a lower half. The upper half becomes the sums of the two halves and the
// lower half their differences, and each half goes on as a transform of half
// the size. This is the recursive FHT(t) built from two FHT(t-1), unrolled,
// and the result comes out in natural (Sylvester) order: l[z] is the
// correlation of (1-2y) with column z of H. The unit is combinational. The
// first-order decoder registers its output.
//
// Parameters: M  log2 of the length; W  word width of l (M+2 holds -2^M..2^M).
// Ports:      y  binary input (2^M bits); l  signed results, l[z].
module fht #(
  parameter int unsigned M = 4,
  parameter int unsigned W = M + 2
) (
  input  logic [2**M-1:0]        y,
  output logic [2**M-1:0][W-1:0] l
);
  localparam int unsigned N = 2 ** M;

  logic signed [W-1:0] v [M+1][N];

  always_comb begin
    for (int unsigned k = 0; k < N; k++)
      v[0][k] = y[k] ? -W'(1) : W'(1);
    for (int unsigned s = 0; s < M; s++) begin
      for (int unsigned k = 0; k < N; k++) begin
        // block size at this stage is N >> s; half of it is hb
        if ((k & (N >> (s + 1))) == 0)
          v[s+1][k] = v[s][k] + v[s][k + (N >> (s + 1))];
        else
          v[s+1][k] = v[s][k - (N >> (s + 1))] - v[s][k];
      end
    end
    for (int unsigned k = 0; k < N; k++)
      l[k] = v[M][k];
  end

endmodule
