// tb_table_configs: runs one TD-DBP stage in each configuration of the
// published power/area table (32 lanes instead of 96): learned 15-tap filters
// with 5- and 6-bit coefficients and 25-tap least-squares filters with 8- and
// 9-bit coefficients, each with an 8- and a 9-bit signal.  Every run is
// compared bit for bit with the reference model (tb_step_config_run).
// The runs proceed in parallel; the event counts they print are totals of the
// reference model over all runs.
module tb_table_configs;
  localparam int N = 8;
  bit done[N];
  int c[N], f[N];

  tb_step_config_run #(.TAPS(15), .COEF_W(5), .SIG_W(8)) r0 (.done(done[0]), .checks(c[0]), .failures(f[0]));
  tb_step_config_run #(.TAPS(15), .COEF_W(5), .SIG_W(9)) r1 (.done(done[1]), .checks(c[1]), .failures(f[1]));
  tb_step_config_run #(.TAPS(15), .COEF_W(6), .SIG_W(8)) r2 (.done(done[2]), .checks(c[2]), .failures(f[2]));
  tb_step_config_run #(.TAPS(15), .COEF_W(6), .SIG_W(9)) r3 (.done(done[3]), .checks(c[3]), .failures(f[3]));
  tb_step_config_run #(.TAPS(25), .COEF_W(8), .SIG_W(8)) r4 (.done(done[4]), .checks(c[4]), .failures(f[4]));
  tb_step_config_run #(.TAPS(25), .COEF_W(8), .SIG_W(9)) r5 (.done(done[5]), .checks(c[5]), .failures(f[5]));
  tb_step_config_run #(.TAPS(25), .COEF_W(9), .SIG_W(8)) r6 (.done(done[6]), .checks(c[6]), .failures(f[6]));
  tb_step_config_run #(.TAPS(25), .COEF_W(9), .SIG_W(9)) r7 (.done(done[7]), .checks(c[7]), .failures(f[7]));

  function automatic bit all_done();
    foreach (done[i]) if (!done[i]) return 0;
    return 1;
  endfunction

  int checks, failures;

  initial begin
    fork
      begin
        while (!all_done()) #10;
      end
      begin
        #200000;
        $display("watchdog expired");
      end
    join_any
    checks = 0;
    failures = all_done() ? 0 : 1;
    foreach (c[i]) begin
      checks += c[i];
      failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
