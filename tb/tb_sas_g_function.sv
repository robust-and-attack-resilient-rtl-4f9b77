// tb_sas_g_function: checks the on-set-of-one point function g and g_bar.
// Drives the on-set point, its single-bit neighbours and random vectors into
// the default 32-bit instance and a 6-bit instance (checked exhaustively),
// and compares with the expected point 32'h5A5A_C3C3 / 6'h2D written out.
module tb_sas_g_function;
  int checks = 0, failures = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] v32; logic g32, gb32;
  logic [5:0]  v6;  logic g6, gb6;

  sas_g_function dut32 (.v(v32), .g(g32), .g_bar(gb32));
  sas_g_function #(.N(6), .XG(6'h2D)) dut6 (.v(v6), .g(g6), .g_bar(gb6));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int ones;
    v32 = 32'h5A5A_C3C3; #1;
    chk(g32 == 1 && gb32 == 0, "on-set point");
    for (int b = 0; b < 32; b++) begin
      v32 = 32'h5A5A_C3C3 ^ (32'd1 << b); #1;
      chk(g32 == 0 && gb32 == 1, $sformatf("neighbour bit %0d", b));
    end
    for (int r = 0; r < 2000; r++) begin
      v32 = $urandom; #1;
      chk(g32 == (v32 == 32'h5A5A_C3C3) && gb32 == ~g32, "random");
    end
    ones = 0;
    for (int i = 0; i < 64; i++) begin
      v6 = 6'(i); #1;
      ones += int'(g6);
      chk(gb6 == ~g6, "g_bar complement");
    end
    chk(ones == 1, "on-set size is one");
    v6 = 6'h2D; #1;
    chk(g6 == 1, "6-bit on-set point");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
