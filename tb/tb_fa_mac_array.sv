// tb_fa_mac_array: self-checking test of the array of U MAC units.
//
// Runs the default array (U = 16, 1-bit entries) and a second one with U = 5
// and 2-bit entries on the same stream of broadcast samples. For vectors of
// NCOL columns (with random idle cycles) an integer reference computes
// z_u = x_u^H y, wrapped to the accumulator width and cut to the 9 MSBs, and
// compares it with every unit's output after the last column. This checks
// that each unit gets its own entry and that all see the same sample.
module tb_fa_mac_array;
  import fa_pkg::*;

  localparam int unsigned NCOL = 64;
  localparam int unsigned NVEC = 10;
  localparam int unsigned UA = U_DEFAULT, RA = R_DEFAULT, AA = acc_width(RA);
  localparam int unsigned UB = 5,         RB = 2,         AB = acc_width(RB);

  logic clk = 1'b0;
  logic rst_n, en, first;
  logic [UA-1:0][RA-1:0] xa_re, xa_im;
  logic [UB-1:0][RB-1:0] xb_re, xb_im;
  y_t y;
  z_t [UA-1:0] za;
  z_t [UB-1:0] zb;
  int checks = 0, failures = 0;
  longint ra_re[UA], ra_im[UA], rb_re[UB], rb_im[UB];

  always #5 clk = ~clk;

  fa_mac_array dut_a (.clk, .rst_n, .en, .first, .x_re(xa_re), .x_im(xa_im), .y, .z(za));
  fa_mac_array #(.U(UB), .R(RB)) dut_b (.clk, .rst_n, .en, .first, .x_re(xb_re), .x_im(xb_im),
                                        .y, .z(zb));

  function automatic longint wrap(longint v, int unsigned w);
    longint m = longint'(1) << w;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return r;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; en = 1'b0; first = 1'b0; y = '0;
    xa_re = '0; xa_im = '0; xb_re = '0; xb_im = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < NVEC; v++) begin
      automatic int col = 0;
      while (col < NCOL) begin
        en = ($urandom_range(0, 4) != 0);
        first = (col == 0);
        y.re = Y_W'($urandom);
        y.im = Y_W'($urandom);
        for (int u = 0; u < UA; u++) begin
          xa_re[u] = RA'($urandom); xa_im[u] = RA'($urandom);
        end
        for (int u = 0; u < UB; u++) begin
          xb_re[u] = RB'($urandom); xb_im[u] = RB'($urandom);
        end
        if (en) begin
          for (int u = 0; u < UA; u++) begin
            automatic longint xr = 2 * longint'($signed(xa_re[u])) + 1;
            automatic longint xi = 2 * longint'($signed(xa_im[u])) + 1;
            if (col == 0) begin ra_re[u] = 0; ra_im[u] = 0; end
            ra_re[u] += xr * y.re - xi * y.im;
            ra_im[u] += xr * y.im + xi * y.re;
          end
          for (int u = 0; u < UB; u++) begin
            automatic longint xr = 2 * longint'($signed(xb_re[u])) + 1;
            automatic longint xi = 2 * longint'($signed(xb_im[u])) + 1;
            if (col == 0) begin rb_re[u] = 0; rb_im[u] = 0; end
            rb_re[u] += xr * y.re - xi * y.im;
            rb_im[u] += xr * y.im + xi * y.re;
          end
          col++;
        end
        @(negedge clk);
      end
      en = 1'b0;
      for (int u = 0; u < UA; u++) begin
        check($sformatf("za[%0d].re", u), za[u].re, wrap(ra_re[u], AA) >>> (AA - Z_W));
        check($sformatf("za[%0d].im", u), za[u].im, wrap(ra_im[u], AA) >>> (AA - Z_W));
      end
      for (int u = 0; u < UB; u++) begin
        check($sformatf("zb[%0d].re", u), zb[u].re, wrap(rb_re[u], AB) >>> (AB - Z_W));
        check($sformatf("zb[%0d].im", u), zb[u].im, wrap(rb_im[u], AB) >>> (AB - Z_W));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
