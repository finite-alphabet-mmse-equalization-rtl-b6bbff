// tb_fa_scaler: self-checking test of the post-equalization scaling stage.
//
// Writes U scaling factors in a shuffled order, then loads random and extreme
// vectors z (full-scale values and the most negative beta code, which must
// saturate) with gaps of U to U+3 cycles. An integer reference computes
// s_u = z_u * conj(beta_u), shifted right by 9 and saturated to 9 bits. Every
// output is compared, including that s_u appears exactly u+1 cycles after the
// load and that out_valid stays low when nothing is being scaled.
module tb_fa_scaler;
  import fa_pkg::*;

  localparam int unsigned U    = U_DEFAULT;
  localparam int unsigned UE_W = $clog2(U);
  localparam int unsigned NVEC = 40;

  logic clk = 1'b0;
  logic rst_n, beta_we, load;
  logic [UE_W-1:0] beta_ue;
  beta_t beta;
  z_t [U-1:0] z;
  logic out_valid, out_sat;
  logic [UE_W-1:0] out_ue;
  s_t out_s;

  int checks = 0, failures = 0, n_sat = 0;
  longint br[U], bi[U];
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  fa_scaler dut (.clk, .rst_n, .beta_we, .beta_ue, .beta, .load, .z,
                 .out_valid, .out_ue, .out_s, .out_sat);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint sat9(longint v);
    return (v > 255) ? 255 : (v < -256) ? -256 : v;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[U];
    longint zr[U], zi[U];
    rst_n = 1'b0; beta_we = 1'b0; beta_ue = '0; beta = '0; load = 1'b0; z = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // shuffled write order
    for (int u = 0; u < U; u++) order[u] = u;
    order.shuffle();
    for (int i = 0; i < U; i++) begin
      automatic int u = order[i];
      beta_we = 1'b1;
      beta_ue = UE_W'(u);
      if (u == 3) begin
        beta.re = -10'sd512; beta.im = -10'sd512;
      end else begin
        beta.re = BETA_W'($urandom); beta.im = BETA_W'($urandom);
      end
      br[u] = beta.re; bi[u] = beta.im;
      @(negedge clk);
    end
    beta_we = 1'b0;
    @(negedge clk);
    check("idle out_valid", out_valid, 0);
    for (int v = 0; v < NVEC; v++) begin
      for (int u = 0; u < U; u++) begin
        if (v % 4 == 1) begin
          z[u].re = (u % 2) ? 9'sd255 : -9'sd256;
          z[u].im = (u % 3) ? -9'sd256 : 9'sd255;
        end else begin
          z[u].re = Z_W'($urandom); z[u].im = Z_W'($urandom);
        end
        zr[u] = z[u].re; zi[u] = z[u].im;
      end
      load = 1'b1;
      @(negedge clk);           // load taken at this edge
      load = 1'b0;
      z = '0;                   // the snapshot must hold the old values
      for (int u = 0; u < U; u++) begin
        automatic longint er = sat9((zr[u] * br[u] + zi[u] * bi[u]) >>> 9);
        automatic longint ei = sat9((zi[u] * br[u] - zr[u] * bi[u]) >>> 9);
        automatic bit es = (er != ((zr[u] * br[u] + zi[u] * bi[u]) >>> 9)) ||
                 (ei != ((zi[u] * br[u] - zr[u] * bi[u]) >>> 9));
        if (es) n_sat++;
        @(negedge clk);
        check("out_valid", out_valid, 1);
        check("out_ue", out_ue, u);
        check("out_s.re", out_s.re, er);
        check("out_s.im", out_s.im, ei);
        check("out_sat", out_sat, es);
      end
      // idle gap of 0..3 cycles before the next load
      for (int g = $urandom_range(0, 3); g > 0; g--) begin
        @(negedge clk);
        check("gap out_valid", out_valid, 0);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
