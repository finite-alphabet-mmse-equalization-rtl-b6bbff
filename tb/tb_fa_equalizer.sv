// tb_fa_equalizer: end-to-end test of the finite-alphabet equalizer at its
// default size (B = 256 antennas, U = 16 UEs, 1-bit entries).
//
// Random finite-alphabet matrices and received vectors are streamed one
// column per cycle. A reference model written here with integer arithmetic
// (odd levels 2c+1, exact complex sums, wrap to the accumulator width, the 9
// MSBs, multiplication by conj(beta), shift by 9 and saturation to 9 bits)
// predicts every estimate s_u, which is compared with the output stream.
// Also checked: the column index, one vector per B cycles for back-to-back
// vectors, s_0 two cycles after the last column, and that each mechanism
// (input stall, back-to-back vectors, accumulator wrap-around, output
// saturation, reloading beta) occurred at least once.
module tb_fa_equalizer;
  localparam int unsigned B = fa_pkg::B_DEFAULT;
  localparam int unsigned U = fa_pkg::U_DEFAULT;
  localparam int unsigned R = fa_pkg::R_DEFAULT;
  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  import fa_pkg::*;

  localparam int unsigned ACC   = acc_width(R);
  localparam int unsigned UE_W  = (U > 1) ? $clog2(U) : 1;
  localparam int unsigned COL_W = (B > 1) ? $clog2(B) : 1;
  localparam int unsigned NVEC  = 8;   // vectors per run: two phases of four
  // A matched vector (mean |y.re| + |y.im| of 64 per column) surely exceeds
  // the accumulator range only if its expected sum is twice that range.
  localparam bit WRAP_POSSIBLE = (longint'(B) * 64 * ((1 << R) - 1)) >= (longint'(1) << ACC);
  // Columns of a near-full-scale vector: about 56 (2^R - 1) per column and
  // part, up to three quarters of the accumulator range.
  localparam int unsigned K_RAW  = ((1 << (ACC - 1)) * 3 / 4) / (56 * ((1 << R) - 1));
  localparam int unsigned K_NEAR = (K_RAW < B) ? K_RAW : B;
  // Saturation needs |z| above about 128, i.e. sums above a quarter of the range.
  localparam bit SAT_POSSIBLE = (longint'(K_NEAR) * 48 * ((1 << R) - 1)) >= (longint'(1) << (ACC - 2));

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  y_t   in_y;
  logic [U-1:0][R-1:0] in_x_re, in_x_im;
  logic [COL_W-1:0] col_idx;
  logic beta_we;
  logic [UE_W-1:0] beta_ue;
  beta_t beta;
  logic out_valid;
  logic [UE_W-1:0] out_ue;
  s_t   out_s;
  logic out_sat;
  logic vec_done;

  always #5 clk = ~clk;

  fa_equalizer dut (
    .clk, .rst_n, .in_valid, .in_y, .in_x_re, .in_x_im, .col_idx,
    .beta_we, .beta_ue, .beta, .out_valid, .out_ue, .out_s, .out_sat, .vec_done
  );

  typedef struct {
    int unsigned ue;
    longint      re;
    longint      im;
    bit          sat;
  } exp_t;

  exp_t   exp_q[$];
  longint last_edge_q[$];
  longint cycle = 0;
  longint beta_ref_re[U], beta_ref_im[U];
  longint acc_re[U], acc_im[U];
  int     n_stall = 0, n_back_to_back = 0, n_wrap = 0, n_sat = 0, n_beta_reload = 0;
  int     n_out = 0, n_lat = 0;
  longint prev_done = -1;
  bit     stream_done = 1'b0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint wrap(longint v, int unsigned w);
    longint m = longint'(1) << w;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return r;
  endfunction

  function automatic longint sat9(longint v, output bit s);
    s = (v > 255) || (v < -256);
    return (v > 255) ? 255 : (v < -256) ? -256 : v;
  endfunction

  // Expected s_u for the finished accumulators.
  task automatic push_expected();
    for (int u = 0; u < U; u++) begin
      exp_t   e;
      longint zr, zi, mr, mi;
      bit     sr, si;
      if (wrap(acc_re[u], ACC) != acc_re[u] || wrap(acc_im[u], ACC) != acc_im[u]) n_wrap++;
      zr = wrap(acc_re[u], ACC) >>> (ACC - Z_W);
      zi = wrap(acc_im[u], ACC) >>> (ACC - Z_W);
      // s = z * conj(beta)
      mr = zr * beta_ref_re[u] + zi * beta_ref_im[u];
      mi = zi * beta_ref_re[u] - zr * beta_ref_im[u];
      e.ue  = u;
      e.re  = sat9(mr >>> (BETA_W - 1), sr);
      e.im  = sat9(mi >>> (BETA_W - 1), si);
      e.sat = sr || si;
      if (e.sat) n_sat++;
      exp_q.push_back(e);
    end
  endtask

  task automatic write_betas(int kind);
    for (int u = 0; u < U; u++) begin
      @(negedge clk);
      beta_we = 1'b1;
      beta_ue = UE_W'(u);
      if (kind == 0) begin
        beta.re = BETA_W'($urandom);
        beta.im = BETA_W'($urandom);
      end else begin
        // extreme factors, including the most negative code
        beta.re = (u % 2 == 0) ? -10'sd512 : 10'sd511;
        beta.im = BETA_W'($urandom);
      end
      beta_ref_re[u] = beta.re;
      beta_ref_im[u] = beta.im;
    end
    @(negedge clk);
    beta_we = 1'b0;
  endtask

  // mode 0: random, 1: random with stalls, 2: matched (x follows the sign of
  // y, so the sum grows and the accumulators wrap), 3: real samples near full
  // scale times the largest level (1 + j) sign(y) on the first K_NEAR columns
  // and silent (y = 0) on the rest, which drives both parts of z close to
  // their limit without wrapping, so that large factors saturate
  task automatic send_vector(int mode);
    for (int b = 0; b < B; b++) begin
      if (mode == 1 && ($urandom_range(0, 7) == 0)) begin
        in_valid = 1'b0;
        n_stall++;
        @(negedge clk);
        in_valid = 1'b0;
      end
      check("col_idx", col_idx, b);
      in_valid = 1'b1;
      in_y.re  = Y_W'($urandom);
      in_y.im  = Y_W'($urandom);
      if (mode == 3) begin
        if (b < K_NEAR) begin
          in_y.re = Y_W'($urandom_range(48, 63)) * (($urandom_range(0, 1) != 0) ? 1 : -1);
          in_y.im = '0;
        end else begin
          in_y = '0;
        end
      end
      for (int u = 0; u < U; u++) begin
        if (mode == 3) begin
          in_x_re[u] = in_y.re[Y_W-1] ? R'(1) << (R - 1) : ~(R'(1) << (R - 1));
          in_x_im[u] = in_x_re[u];
        end else if (mode == 2) begin
          // largest level with the sign of y.re, and minus the sign of y.im
          in_x_re[u] = in_y.re[Y_W-1] ? R'(1) << (R - 1) : ~(R'(1) << (R - 1));
          in_x_im[u] = in_y.im[Y_W-1] ? ~(R'(1) << (R - 1)) : R'(1) << (R - 1);
        end else begin
          in_x_re[u] = R'($urandom);
          in_x_im[u] = R'($urandom);
        end
      end
      for (int u = 0; u < U; u++) begin
        longint xr = 2 * longint'($signed(in_x_re[u])) + 1;
        longint xi = 2 * longint'($signed(in_x_im[u])) + 1;
        if (b == 0) begin
          acc_re[u] = 0;
          acc_im[u] = 0;
        end
        acc_re[u] += xr * in_y.re - xi * in_y.im;
        acc_im[u] += xr * in_y.im + xi * in_y.re;
      end
      if (b == B - 1) begin
        push_expected();
        last_edge_q.push_back(cycle + 1);
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
  endtask

  task automatic drain();
    while (exp_q.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  // Output monitor (outputs are stable at the falling edge).
  always @(negedge clk) begin
    if (rst_n && vec_done) begin
      if (prev_done >= 0 && cycle - prev_done == B) n_back_to_back++;
      if (prev_done >= 0) begin
        checks++;
        if (cycle - prev_done < B) begin
          failures++;
          $display("FAIL vector spacing %0d < B", cycle - prev_done);
        end
      end
      prev_done = cycle;
    end
    if (rst_n && out_valid) begin
      exp_t e;
      n_out++;
      if (exp_q.size() == 0) begin
        checks++;
        failures++;
        $display("FAIL unexpected output ue=%0d", out_ue);
      end else begin
        e = exp_q.pop_front();
        check("out_ue", out_ue, e.ue);
        check("out_s.re", out_s.re, e.re);
        check("out_s.im", out_s.im, e.im);
        check("out_sat", out_sat, e.sat);
        if (e.ue == 0) begin
          // latency: s_0 two edges after the last column
          n_lat++;
          check("latency", cycle - last_edge_q.pop_front(), 2);
        end
      end
    end
  end

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0; in_y = '0; in_x_re = '0; in_x_im = '0;
    beta_we = 1'b0; beta_ue = '0; beta = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: random factors, back-to-back vectors, one with stalls
    write_betas(0);
    send_vector(0);
    send_vector(1);
    send_vector(2);
    send_vector(0);
    drain();
    // phase 2: new factors, extreme values that saturate the output
    write_betas(1);
    n_beta_reload++;
    send_vector(2);
    send_vector(3);
    send_vector(3);
    send_vector(1);
    drain();
    check("outputs", n_out, NVEC * U);
    check("latency samples", n_lat, NVEC);
    // every mechanism happened at least once
    checks += 5;
    if (n_stall == 0)        begin failures++; $display("FAIL no input stall");   end
    if (n_back_to_back == 0) begin failures++; $display("FAIL no back-to-back vector"); end
    if (n_wrap == 0 && WRAP_POSSIBLE) begin failures++; $display("FAIL no accumulator wrap"); end
    if (n_sat == 0 && SAT_POSSIBLE) begin failures++; $display("FAIL no output saturation"); end
    if (n_beta_reload == 0)  begin failures++; $display("FAIL no beta reload"); end
    $display("B=%0d U=%0d R=%0d: stalls=%0d back_to_back=%0d wraps=%0d saturations=%0d beta_reloads=%0d",
             B, U, R, n_stall, n_back_to_back, n_wrap, n_sat, n_beta_reload);
    stream_done = 1'b1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
