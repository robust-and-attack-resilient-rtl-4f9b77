// tb_sat_attack_iterations: runs sat_dip_runner on the SAS configurations the
// SAS configurations evaluated for SAT resilience (m = 1, 2, 4 critical
// minterms with l = 1, 2 blocks, plus m = 8 for the critical-minterm sweep),
// scaled to n = 4 locked bits so that every key can be enumerated, and checks
// the input error rates and the expected SAT iteration count
// E = (l*2^n + m)/(l + 1).  l = 4 would need 2^32 keys and is left out.
module tb_sat_attack_iterations;
  int checks, failures;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bit d [7];
  int c [7], f [7];

  sat_dip_runner #(.M(1), .L(1), .CRIT({4'd9}))                      r0 (.done(d[0]), .checks(c[0]), .failures(f[0]));
  sat_dip_runner #(.M(2), .L(1), .CRIT({4'd9, 4'd1}))                r1 (.done(d[1]), .checks(c[1]), .failures(f[1]));
  sat_dip_runner #(.M(2), .L(2), .CRIT({4'd9, 4'd1}))                r2 (.done(d[2]), .checks(c[2]), .failures(f[2]));
  sat_dip_runner #(.M(4), .L(1), .CRIT({4'd14, 4'd9, 4'd6, 4'd1}))   r3 (.done(d[3]), .checks(c[3]), .failures(f[3]));
  sat_dip_runner #(.M(4), .L(2), .CRIT({4'd14, 4'd6, 4'd9, 4'd1}))   r4 (.done(d[4]), .checks(c[4]), .failures(f[4]));
  sat_dip_runner #(.M(8), .L(1), .CRIT({4'd14, 4'd13, 4'd10, 4'd9, 4'd6, 4'd5, 4'd2, 4'd1}))
                                                                     r5 (.done(d[5]), .checks(c[5]), .failures(f[5]));
  sat_dip_runner #(.M(8), .L(2), .CRIT({4'd14, 4'd10, 4'd6, 4'd2, 4'd13, 4'd9, 4'd5, 4'd1}))
                                                                     r6 (.done(d[6]), .checks(c[6]), .failures(f[6]));

  initial begin
    #1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5] && d[6]);
    checks = 0; failures = 0;
    for (int i = 0; i < 7; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 100000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
