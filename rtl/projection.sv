// projection: the projection component of the IPA decoder for RM(m,3).
//
// Level 1 applies all 2^M-1 projection units to the current estimate y
// (length 2^M), which gives y1[p] = Proj(y, p+1), each 2^(M-1) bits long.
// Level 2 applies all 2^(M-1)-1 projection units to each y1[p], which gives
// y2[p*(2^(M-1)-1) + q-1] = Proj(y1[p], q), each 2^(M-2) bits long. Each level
// ends in a register, so y1 is valid one clock after y and y2 two clocks
// after y. The registers have no enable and no reset. The decoder holds one
// codeword at a time and keeps y stable for a whole iteration, and the control
// unit counts the cycles.
//
// The two levels and the register after each follow the decoder description.
// The flat child numbering (child q of node p uses projection index q) is
// this design's reading of the iterative algorithm.
module projection #(
  parameter int unsigned M = 6
) (
  input  logic                                  clk,
  input  logic [2**M-1:0]                       y,
  output logic [2**M-2:0][2**(M-1)-1:0]          y1,
  output logic [(2**M-1)*(2**(M-1)-1)-1:0][2**(M-2)-1:0] y2
);
  localparam int unsigned N1 = 2 ** M - 1;        // level-1 branches
  localparam int unsigned N2 = 2 ** (M - 1) - 1;  // level-2 branches per node

  logic [N1-1:0][2**(M-1)-1:0]    y1_d;
  logic [N1*N2-1:0][2**(M-2)-1:0] y2_d;

  for (genvar p = 0; p < N1; p++) begin : g_l1
    projection_unit #(.M(M), .I(p + 1)) u_pu (.y(y), .yp(y1_d[p]));
    for (genvar q = 1; q <= N2; q++) begin : g_l2
      projection_unit #(.M(M - 1), .I(q)) u_pu2 (.y(y1[p]), .yp(y2_d[p*N2 + q - 1]));
    end
  end

  always_ff @(posedge clk) begin
    y1 <= y1_d;
    y2 <= y2_d;
  end

endmodule
