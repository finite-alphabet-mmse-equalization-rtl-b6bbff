// fa_equalizer: one finite-alphabet spatial equalizer instance for the uplink
// of a B-antenna, U-user massive MU-MIMO base station.
//
// The equalizer computes s = diag(beta^*) X^H y for every received vector y,
// where X^H is a U x B matrix whose entries come from a small finite alphabet
// (R bits per real and imaginary part, R = 1 by default: entries +-1 +- j) and
// beta holds one high-resolution scaling factor per UE. X^H and beta are
// computed elsewhere (for example by FAME-FBS) once per channel realisation.
// The expensive part, the matrix-vector product, thus needs only
// low-resolution multipliers; the U scalings use one 9 x 10-bit multiplier.
//
// Structure: a column counter feeds column b of X^H and sample y_b to a linear
// array of U MAC units (fa_mac_array), one column per cycle, so one vector
// takes B cycles. One cycle after the last column the U results are handed to
// the scaling stage (fa_scaler), which emits s_0 .. s_{U-1} on consecutive
// cycles while the array already accumulates the next vector.
//
// Interface:
//   in_valid/in_y/in_x_re/in_x_im  one column per cycle with in_valid = 1; the
//                                  caller presents the column col_idx. A cycle
//                                  with in_valid = 0 stalls the array.
//   beta_we/beta_ue/beta           write beta_u (stored, conjugated in use).
//   out_valid/out_ue/out_s         s_u; out_sat marks a saturated estimate.
//   vec_done                       pulses one cycle after each last column.
// There is no back-pressure: the stream runs at up to one vector per B cycles.
//
// Timing: if the last column of a vector is accepted at edge k, s_u appears
// after edge k+2+u. Back-to-back vectors give one vector every B cycles, the
// rate of the reference design (5.18 M vectors/s at 1.33 GHz for B = 256).
// Reset: rst_n is synchronous and active low; beta is cleared to 0.
//
// Own choices beyond the reference: the valid-only handshake, the code
// encoding of the alphabet, the accumulator slice, the binary point of beta,
// the output saturation and the serial output order.
module fa_equalizer
  import fa_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT,
  parameter int unsigned U = U_DEFAULT,
  parameter int unsigned R = R_DEFAULT,
  localparam int unsigned COL_W = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned UE_W  = (U > 1) ? $clog2(U) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // received samples and finite-alphabet matrix, one column per cycle
  input  logic                in_valid,
  input  y_t                  in_y,
  input  logic [U-1:0][R-1:0] in_x_re,
  input  logic [U-1:0][R-1:0] in_x_im,
  output logic [COL_W-1:0]    col_idx,
  // scaling factors
  input  logic                beta_we,
  input  logic [UE_W-1:0]     beta_ue,
  input  beta_t               beta,
  // equalized estimates
  output logic                out_valid,
  output logic [UE_W-1:0]     out_ue,
  output s_t                  out_s,
  output logic                out_sat,
  output logic                vec_done
);

  if (U > B) begin : g_check
    $error("fa_equalizer: the shared scaler needs U <= B");
  end

  logic          last_col;
  logic          first_col;
  z_t [U-1:0]    z;

  assign first_col = (col_idx == '0);
  assign last_col  = (col_idx == COL_W'(B - 1));

  // Column counter and end-of-vector flag.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_idx  <= '0;
      vec_done <= 1'b0;
    end else begin
      vec_done <= in_valid && last_col;
      if (in_valid) begin
        col_idx <= last_col ? '0 : col_idx + 1'b1;
      end
    end
  end

  fa_mac_array #(
    .U (U),
    .R (R)
  ) u_array (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (in_valid),
    .first (first_col),
    .x_re  (in_x_re),
    .x_im  (in_x_im),
    .y     (in_y),
    .z     (z)
  );

  fa_scaler #(
    .U (U)
  ) u_scaler (
    .clk       (clk),
    .rst_n     (rst_n),
    .beta_we   (beta_we),
    .beta_ue   (beta_ue),
    .beta      (beta),
    .load      (vec_done),
    .z         (z),
    .out_valid (out_valid),
    .out_ue    (out_ue),
    .out_s     (out_s),
    .out_sat   (out_sat)
  );

  // The output stream of UE indices runs 0 .. U-1 without gaps.
  a_ue_order : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out_ue != UE_W'(U - 1) |=> out_valid && out_ue == $past(out_ue) + 1'b1);
  a_ue_range : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> out_ue <= UE_W'(U - 1));

endmodule
