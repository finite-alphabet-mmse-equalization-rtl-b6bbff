// fa_mac_array: linear array of U low-resolution MAC units that forms the
// matrix-vector product z = X^H y column by column.
//
// In each cycle with en = 1 the array takes one column b of X^H (one R-bit
// real and one R-bit imaginary code per UE) and the received sample y_b,
// which is broadcast to all U units (fa_mac). After B such cycles, the first
// of them marked with first = 1, unit u holds z_u = x_u^H y. This is the
// column-by-column schedule of the reference design: B cycles per vector, U
// multiply-accumulates in parallel. The column counter that drives en/first
// lives in fa_equalizer.
//
// Interface: x_re[u], x_im[u] are the codes of UE u (see fa_mac for the
// encoding); z[u] is the 9-bit slice of unit u's accumulator. Timing: z is
// registered and shows the sum of all columns accepted up to the last edge.
module fa_mac_array
  import fa_pkg::*;
#(
  parameter int unsigned U     = U_DEFAULT,
  parameter int unsigned R     = R_DEFAULT,
  parameter int unsigned ACC_W = acc_width(R)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                first,
  input  logic [U-1:0][R-1:0] x_re,
  input  logic [U-1:0][R-1:0] x_im,
  input  y_t                  y,
  output z_t   [U-1:0]        z
);

  for (genvar u = 0; u < U; u++) begin : g_mac
    fa_mac #(
      .R     (R),
      .ACC_W (ACC_W)
    ) u_mac (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (en),
      .first  (first),
      .x_re   (x_re[u]),
      .x_im   (x_im[u]),
      .y      (y),
      .acc_re (),
      .acc_im (),
      .z      (z[u])
    );
  end

endmodule
