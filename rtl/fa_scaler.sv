// fa_scaler: post-equalization scaling s_u = beta_u^* z_u for the U UEs.
//
// Finite-alphabet equalization splits the equalizer into a low-resolution
// product z = X^H y and a per-UE scaling by the conjugated high-resolution
// factor beta_u. This block holds the U factors beta_u (written through the
// beta_* port whenever a new equalization matrix is installed), captures the U
// values z_u when the MAC array has finished a vector (load = 1) and then
// scales them one UE per cycle in a single shared complex multiplier of
// 9 x 10 bits, as the reference design uses one high-resolution multiplier
// for this step. Because the MAC array needs B >= U cycles for the next
// vector, the captured copy is always consumed before it is overwritten.
//
// Arithmetic: (zr + j zi)(br - j bi) = (zr br + zi bi) + j (zi br - zr bi),
// exact in 2*(Z_W+BETA_W) bits, then shifted right arithmetically by SHIFT
// bits (beta_u read as a fraction with SHIFT fractional bits) and saturated to
// S_W = 9 bits. The binary point of beta and the choice of output bits are
// this design's own; the word lengths 9, 10 and 9 are the reference's.
//
// Timing: load at edge k makes s_0 appear at out_valid after edge k+1, s_1
// after edge k+2, ..., s_{U-1} after edge k+U. out_sat flags a saturated
// result. A load while a vector is still being scaled restarts the scan.
module fa_scaler
  import fa_pkg::*;
#(
  parameter int unsigned U     = U_DEFAULT,
  parameter int unsigned SHIFT = BETA_W - 1,
  localparam int unsigned UE_W = (U > 1) ? $clog2(U) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // scaling-factor write port
  input  logic            beta_we,
  input  logic [UE_W-1:0] beta_ue,
  input  beta_t           beta,
  // vector completed by the MAC array
  input  logic            load,
  input  z_t   [U-1:0]    z,
  // equalized estimates, one UE per cycle
  output logic            out_valid,
  output logic [UE_W-1:0] out_ue,
  output s_t              out_s,
  output logic            out_sat
);

  localparam int unsigned M_W = Z_W + BETA_W + 1;   // sum of two products
  localparam logic signed [M_W-1:0] S_MAX = M_W'((1 << (S_W - 1)) - 1);
  localparam logic signed [M_W-1:0] S_MIN = -M_W'(1 << (S_W - 1));

  beta_t [U-1:0]   beta_q;
  z_t    [U-1:0]   z_q;
  logic            busy;
  logic [UE_W-1:0] idx;

  // Scaling-factor registers.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beta_q <= '0;
    end else if (beta_we) begin
      beta_q[beta_ue] <= beta;
    end
  end

  // Snapshot of z and the UE sequencer.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      z_q  <= '0;
      busy <= 1'b0;
      idx  <= '0;
    end else if (load) begin
      z_q  <= z;
      busy <= 1'b1;
      idx  <= '0;
    end else if (busy) begin
      if (idx == UE_W'(U - 1)) begin
        busy <= 1'b0;
        idx  <= '0;
      end else begin
        idx <= idx + 1'b1;
      end
    end
  end

  // Shared high-resolution complex multiplier: z * conj(beta).
  z_t                     zs;
  beta_t                  bs;
  logic signed [M_W-1:0]  m_re, m_im, sh_re, sh_im;
  s_t                     s_next;
  logic                   sat_re, sat_im;

  always_comb begin
    zs    = z_q[idx];
    bs    = beta_q[idx];
    m_re  = M_W'(zs.re * bs.re) + M_W'(zs.im * bs.im);
    m_im  = M_W'(zs.im * bs.re) - M_W'(zs.re * bs.im);
    sh_re = m_re >>> SHIFT;
    sh_im = m_im >>> SHIFT;
    sat_re = (sh_re > S_MAX) || (sh_re < S_MIN);
    sat_im = (sh_im > S_MAX) || (sh_im < S_MIN);
    s_next.re = (sh_re > S_MAX) ? S_MAX[S_W-1:0] :
                (sh_re < S_MIN) ? S_MIN[S_W-1:0] : sh_re[S_W-1:0];
    s_next.im = (sh_im > S_MAX) ? S_MAX[S_W-1:0] :
                (sh_im < S_MIN) ? S_MIN[S_W-1:0] : sh_im[S_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ue    <= '0;
      out_s     <= '0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= busy;
      out_ue    <= idx;
      out_s     <= s_next;
      out_sat   <= busy && (sat_re || sat_im);
    end
  end

endmodule
