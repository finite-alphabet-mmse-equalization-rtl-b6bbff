// fa_pkg: word lengths and complex sample types shared by the finite-alphabet
// equalizer (fa_mac, fa_mac_array, fa_scaler, fa_equalizer).
//
// The fixed word lengths are those of the reference design: 7-bit real and
// imaginary parts for the received samples y_b, 9-bit outputs of the
// low-resolution matrix-vector product x_u^H y, 10-bit scaling factors beta_u
// and 9-bit equalized estimates s_u. The resolution r of the finite-alphabet
// entries is a module parameter (R); the accumulator width follows from it
// through acc_width(): 13 bits for r = 1 and r + 13 bits otherwise.
package fa_pkg;

  localparam int unsigned Y_W    = 7;   // received sample, per real/imag part
  localparam int unsigned Z_W    = 9;   // x_u^H y as passed to the scaler
  localparam int unsigned BETA_W = 10;  // scaling factor beta_u
  localparam int unsigned S_W    = 9;   // equalized estimate s_u

  // Default system size and resolution of the reference design.
  localparam int unsigned B_DEFAULT = 256;  // base-station antennas
  localparam int unsigned U_DEFAULT = 16;   // user equipments
  localparam int unsigned R_DEFAULT = 1;    // bits per real/imag part of X^H

  typedef struct packed {
    logic signed [Y_W-1:0] re;
    logic signed [Y_W-1:0] im;
  } y_t;

  typedef struct packed {
    logic signed [Z_W-1:0] re;
    logic signed [Z_W-1:0] im;
  } z_t;

  typedef struct packed {
    logic signed [BETA_W-1:0] re;
    logic signed [BETA_W-1:0] im;
  } beta_t;

  typedef struct packed {
    logic signed [S_W-1:0] re;
    logic signed [S_W-1:0] im;
  } s_t;

  // Accumulator width of a MAC unit for r-bit equalizer entries.
  function automatic int unsigned acc_width(int unsigned r);
    return (r == 1) ? 13 : r + 13;
  endfunction

endpackage
