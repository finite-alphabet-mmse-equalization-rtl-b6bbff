// tb_fa_mac: self-checking test of the low-resolution MAC unit.
//
// Two units are tested side by side, one with 1-bit and one with 3-bit
// alphabet entries. Random columns are fed with random stall cycles; a
// reference accumulator computed here with plain integers (level 2c+1 times
// the sample, wrapped to the accumulator width) is compared with acc and with
// the 9-bit slice z after every cycle. Each new vector starts with first = 1
// directly after the previous one, so the load-instead-of-add path is checked.
module tb_fa_mac;
  import fa_pkg::*;

  localparam int unsigned NCOL = 256;
  localparam int unsigned NVEC = 6;
  localparam int unsigned R1 = 1, R3 = 3;
  localparam int unsigned A1 = acc_width(R1), A3 = acc_width(R3);

  logic clk = 1'b0;
  logic rst_n;
  logic en, first;
  logic signed [R1-1:0] x1_re, x1_im;
  logic signed [R3-1:0] x3_re, x3_im;
  y_t   y;
  logic signed [A1-1:0] acc1_re, acc1_im;
  logic signed [A3-1:0] acc3_re, acc3_im;
  z_t   z1, z3;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fa_mac #(.R(R1)) dut1 (.clk, .rst_n, .en, .first, .x_re(x1_re), .x_im(x1_im), .y,
                         .acc_re(acc1_re), .acc_im(acc1_im), .z(z1));
  fa_mac #(.R(R3)) dut3 (.clk, .rst_n, .en, .first, .x_re(x3_re), .x_im(x3_im), .y,
                         .acc_re(acc3_re), .acc_im(acc3_im), .z(z3));

  // Reference accumulators (unbounded integers).
  longint ref1_re, ref1_im, ref3_re, ref3_im;

  function automatic longint level(longint c);
    return 2 * c + 1;
  endfunction

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

  task automatic compare();
    check("acc1.re", acc1_re, wrap(ref1_re, A1));
    check("acc1.im", acc1_im, wrap(ref1_im, A1));
    check("acc3.re", acc3_re, wrap(ref3_re, A3));
    check("acc3.im", acc3_im, wrap(ref3_im, A3));
    check("z1.re", z1.re, wrap(ref1_re, A1) >>> (A1 - Z_W));
    check("z1.im", z1.im, wrap(ref1_im, A1) >>> (A1 - Z_W));
    check("z3.re", z3.re, wrap(ref3_re, A3) >>> (A3 - Z_W));
    check("z3.im", z3.im, wrap(ref3_im, A3) >>> (A3 - Z_W));
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint c1r, c1i, c3r, c3i, yr, yi;
    int col;
    rst_n = 1'b0; en = 1'b0; first = 1'b0;
    x1_re = '0; x1_im = '0; x3_re = '0; x3_im = '0; y = '0;
    repeat (3) @(posedge clk);
    #1;
    check("reset acc1", acc1_re, 0);
    check("reset acc3", acc3_im, 0);
    rst_n = 1'b1;
    ref1_re = 0; ref1_im = 0; ref3_re = 0; ref3_im = 0;
    for (int v = 0; v < NVEC; v++) begin
      col = 0;
      while (col < NCOL) begin
        // Vector 0 uses full-scale samples to exercise wrap-around.
        if (v == 0) begin
          y.re = 7'sh3f;  y.im = -7'sd64;
          x1_re = 1'b0;   x1_im = 1'b1;     // +1, -1
          x3_re = 3'sd3;  x3_im = -3'sd4;   // +7, -7
        end else begin
          y.re  = Y_W'($urandom);
          y.im  = Y_W'($urandom);
          x1_re = R1'($urandom); x1_im = R1'($urandom);
          x3_re = R3'($urandom); x3_im = R3'($urandom);
        end
        en    = ($urandom_range(0, 3) != 0);
        first = (col == 0);
        @(posedge clk);
        #1;
        if (en) begin
          yr = y.re; yi = y.im;
          c1r = level(x1_re); c1i = level(x1_im);
          c3r = level(x3_re); c3i = level(x3_im);
          if (col == 0) begin
            ref1_re = 0; ref1_im = 0; ref3_re = 0; ref3_im = 0;
          end
          ref1_re += c1r * yr - c1i * yi;
          ref1_im += c1r * yi + c1i * yr;
          ref3_re += c3r * yr - c3i * yi;
          ref3_im += c3r * yi + c3i * yr;
          col++;
        end
        compare();
      end
    end
    // A held unit keeps its value while en = 0.
    en = 1'b0;
    repeat (4) @(posedge clk);
    #1;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
