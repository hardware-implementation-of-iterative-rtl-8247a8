// projection_unit: one projection branch, a re-ordering unit ROU(m,i)
// followed by an XOR unit.
//
// The ROU puts each coordinate t of the projected vector next to its partner,
// tmp(2t) = y(z_t) and tmp(2t+1) = y(z_t ^ I). Here z_t is t with a 0
// inserted at bit msb(I), which is the ordering the recursive projection
// procedure produces. The XOR unit then forms yp(t) = tmp(2t) ^ tmp(2t+1).
// The unit is purely combinational: the projection level that holds the unit
// supplies the register.
//
// Parameters: M  log2 of the input length; I  the projection index, 1..2^M-1.
// Ports:      y  input vector (2^M bits); yp  projected vector (2^(M-1) bits).
//
// The ROU/XOR split and the pairing rule follow the decoder description. The
// closed-form index expression is this design's own, and it is equivalent to
// the recursive procedure.
module projection_unit #(
  parameter int unsigned M = 6,
  parameter int unsigned I = 1
) (
  input  logic [2**M-1:0]     y,
  output logic [2**(M-1)-1:0] yp
);
  import ipa_pkg::*;

  localparam int unsigned N = 2 ** M;
  localparam int unsigned H = msb_pos(I);

  logic [N-1:0] tmp;  // ROU output: pairs at (2t, 2t+1)

  initial assert (I >= 1 && I < N) else $error("projection index out of range");

  always_comb begin
    for (int unsigned t = 0; t < N / 2; t++) begin
      tmp[2*t]   = y[ins0(t, H)];
      tmp[2*t+1] = y[ins0(t, H) ^ I];
    end
  end

  always_comb begin
    for (int unsigned t = 0; t < N / 2; t++)
      yp[t] = tmp[2*t] ^ tmp[2*t+1];
  end

endmodule
