// tb_fa_workloads: the equalizer at the system sizes evaluated for it.
//
// Runs side by side: B = 8 / U = 2 and B = 64 / U = 4 with 1-bit entries (the
// small systems of the error-rate study), and B = 256 / U = 16 with 1- to 5-bit
// entries (the sizes whose implementation results are reported). Each instance
// is driven and checked by fa_eq_harness against an integer reference model.
module tb_fa_workloads;
  int c[7], f[7];
  bit d[7];

  fa_eq_harness #(.B(8),   .U(2),  .R(1)) h0 (.checks(c[0]), .failures(f[0]), .done(d[0]));
  fa_eq_harness #(.B(64),  .U(4),  .R(1)) h1 (.checks(c[1]), .failures(f[1]), .done(d[1]));
  fa_eq_harness #(.B(256), .U(16), .R(1)) h2 (.checks(c[2]), .failures(f[2]), .done(d[2]));
  fa_eq_harness #(.B(256), .U(16), .R(2)) h3 (.checks(c[3]), .failures(f[3]), .done(d[3]));
  fa_eq_harness #(.B(256), .U(16), .R(3)) h4 (.checks(c[4]), .failures(f[4]), .done(d[4]));
  fa_eq_harness #(.B(256), .U(16), .R(4)) h5 (.checks(c[5]), .failures(f[5]), .done(d[5]));
  fa_eq_harness #(.B(256), .U(16), .R(5)) h6 (.checks(c[6]), .failures(f[6]), .done(d[6]));

  initial begin : run
    int checks, failures;
    fork
      begin
        wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5] && d[6]);
        #1;
      end
      begin
        #500000;
        $display("FAIL watchdog expired");
      end
    join_any
    checks = 0;
    failures = 0;
    for (int i = 0; i < 7; i++) begin
      checks += c[i];
      failures += f[i];
      if (!d[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
