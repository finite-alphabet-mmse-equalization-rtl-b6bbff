// fa_mac: one low-resolution complex multiply-accumulate unit.
//
// A unit owns one row u of the finite-alphabet matrix X^H. In every cycle with
// en = 1 it multiplies the entry [X^H]_{u,b} with the received sample y_b and
// adds the complex product to its accumulator; with first = 1 the accumulator
// is loaded with the product instead, which starts a new vector without a
// bubble cycle. After the B columns of a vector the accumulator holds
// x_u^H y.
//
// Entry encoding: each real and imaginary part is an R-bit two's-complement
// code c standing for the odd integer 2c + 1. For R = 1 the alphabet is
// {-1, +1} per part (products are then additions and subtractions), for R = 2
// it is {-3, -1, +1, +3}, and so on: the uniformly spaced levels scaled so that
// the smallest magnitude is 1. The multiplier is therefore (R+1) x 7 bits.
//
// Word lengths follow the reference design: 7-bit samples, an accumulator of
// ACC_W bits (13 for R = 1, R + 13 otherwise) and a 9-bit output z. Which 9
// bits form z and what happens on overflow the reference leaves open; here z
// is the slice acc[Z_LSB +: 9] (default: the 9 MSBs, plain truncation) and the
// accumulator wraps around in two's complement.
//
// Timing: acc and z are registered; they reflect the columns accepted up to
// the previous clock edge. Reset (rst_n low, synchronous) clears acc.
module fa_mac
  import fa_pkg::*;
#(
  parameter int unsigned R     = R_DEFAULT,
  parameter int unsigned ACC_W = acc_width(R),
  parameter int unsigned Z_LSB = ACC_W - Z_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [R-1:0]     x_re,
  input  logic signed [R-1:0]     x_im,
  input  y_t                      y,
  output logic signed [ACC_W-1:0] acc_re,
  output logic signed [ACC_W-1:0] acc_im,
  output z_t                      z
);

  localparam int unsigned XV_W = R + 1;          // odd level 2c+1
  localparam int unsigned P_W  = XV_W + Y_W;     // one real product
  localparam int unsigned CP_W = P_W + 1;        // sum of two products

  logic signed [XV_W-1:0] xv_re, xv_im;
  logic signed [CP_W-1:0] prod_re, prod_im;
  logic signed [ACC_W-1:0] prod_re_w, prod_im_w;

  // Odd level 2c + 1: shift the code left and set the LSB.
  assign xv_re = {x_re, 1'b1};
  assign xv_im = {x_im, 1'b1};

  // Complex product (xr + j xi)(yr + j yi), four low-resolution multipliers.
  always_comb begin
    prod_re = CP_W'(xv_re * y.re) - CP_W'(xv_im * y.im);
    prod_im = CP_W'(xv_re * y.im) + CP_W'(xv_im * y.re);
  end

  // Bring the product to the accumulator width (sign-extend or wrap).
  assign prod_re_w = ACC_W'(prod_re);
  assign prod_im_w = ACC_W'(prod_im);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_re <= '0;
      acc_im <= '0;
    end else if (en) begin
      acc_re <= first ? prod_re_w : acc_re + prod_re_w;
      acc_im <= first ? prod_im_w : acc_im + prod_im_w;
    end
  end

  assign z.re = acc_re[Z_LSB +: Z_W];
  assign z.im = acc_im[Z_LSB +: Z_W];

endmodule
