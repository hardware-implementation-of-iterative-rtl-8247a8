// control_unit: iteration control and termination check of the IPA decoder.
//
// The unit holds the current estimate y (the loop register at the projection
// input) and counts the cycles of each iteration. An iteration lasts
// CYC = 3(r-1)+4 = 10 clocks. The projected, decoded and aggregated estimate
// yhat is ready in the last cycle of the iteration. In that cycle the unit
// compares yhat with y. If they are equal (a fixed point) or NMAX iterations
// have run, yhat is delivered on out_c, with out_valid high for one cycle.
// Otherwise y is replaced by yhat and the next iteration starts. The compare
// result goes into a register together with y, which is the decoder's "one
// register for the termination condition".
//
// Interface: a valid/ready input. in_ready is high when the decoder is idle,
// and also in the final cycle of a decoding, so that codewords can follow
// each other with no gap. One codeword then takes exactly N_iter * CYC clocks.
// in_y must stay stable while in_valid is high and in_ready is low. out_iters
// reports the iterations used, and out_conv reports whether decoding stopped
// at a fixed point (1) or at the NMAX limit (0). rst_n is an asynchronous
// active-low reset.
//
// The iteration count, the fixed-point test and the cycle budget follow the
// decoder description. The handshake, the reset and the output register are
// this design's choices.
module control_unit #(
  parameter int unsigned N    = 64,
  parameter int unsigned NMAX = 3,
  parameter int unsigned CYC  = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [N-1:0]              in_y,
  output logic [N-1:0]              y_cur,
  input  logic [N-1:0]              yhat,
  output logic                      out_valid,
  output logic [N-1:0]              out_c,
  output logic [$clog2(NMAX+1)-1:0] out_iters,
  output logic                      out_conv
);
  localparam int unsigned IW = $clog2(NMAX + 1);
  localparam int unsigned PW = $clog2(CYC);

  logic          busy;
  logic [PW-1:0] phase;
  logic [IW-1:0] iter;
  logic [N-1:0]  y_q;
  logic          last_phase, conv, finish, accept;

  assign last_phase = busy && (phase == PW'(CYC - 1));
  assign conv       = (yhat == y_q);
  assign finish     = last_phase && (conv || iter == IW'(NMAX));
  assign in_ready   = !busy || finish;
  assign accept     = in_valid && in_ready;
  assign y_cur      = y_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      phase <= '0;
      iter  <= '0;
      y_q   <= '0;
    end else if (accept) begin
      busy  <= 1'b1;
      phase <= '0;
      iter  <= IW'(1);
      y_q   <= in_y;
    end else if (finish) begin
      busy  <= 1'b0;
      phase <= '0;
    end else if (last_phase) begin
      phase <= '0;
      iter  <= iter + IW'(1);
      y_q   <= yhat;
    end else if (busy) begin
      phase <= phase + PW'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_c     <= '0;
      out_iters <= '0;
      out_conv  <= 1'b0;
    end else begin
      out_valid <= finish;
      if (finish) begin
        out_c     <= yhat;
        out_iters <= iter;
        out_conv  <= conv;
      end
    end
  end

  // Input handshake: a pending word must not change or be withdrawn.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_y));
  a_iter_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> iter >= 1 && iter <= IW'(NMAX));

endmodule
