// gen_matrix: re-encoding with the generator matrix of RM(M,1).
//
// The message is x = [s, z_0, ..., z_{M-1}]. Row 0 of G(M,1) is all ones, and
// row k (k >= 1) is bit k-1 of the column index. Output bit p is therefore
// s ^ parity(p & z). The circuit is built as in the recursive structure
// G(t) = [G(t-1), G(t-1) + z_{t-1}]: the upper half of the output repeats the
// lower half with message bit t-1 added. The unit is combinational.
//
// Parameters: M  log2 of the length.
// Ports:      z  argmax index (its bits are the message bits x_1..x_M);
//             s  complement bit x_0; c  codeword (2^M bits).
module gen_matrix #(
  parameter int unsigned M = 4
) (
  input  logic [M-1:0]    z,
  input  logic            s,
  output logic [2**M-1:0] c
);

  always_comb begin
    c    = '0;
    c[0] = s;
    for (int unsigned t = 0; t < M; t++)
      for (int unsigned p = 0; p < (32'd1 << t); p++)
        c[p + (32'd1 << t)] = c[p] ^ z[t];
  end

endmodule
