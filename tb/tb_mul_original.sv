// tb_mul_original: checks the unprotected 32x32 -> 64-bit multiplier against
// a 64-bit software product for corner and random operands, and an 8-bit
// instance exhaustively.
module tb_mul_original;
  int checks = 0, failures = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] a, b; logic [63:0] p;
  logic [7:0] a8, b8; logic [15:0] p8;
  mul_original dut (.a(a), .b(b), .p(p));
  mul_original #(.OPW(8)) dut8 (.a(a8), .b(b8), .p(p8));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] corner [6] = '{32'd0, 32'd1, 32'd2, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF};
    foreach (corner[i]) foreach (corner[j]) begin
      a = corner[i]; b = corner[j]; #1;
      chk(p == longint'({32'd0, a}) * longint'({32'd0, b}), $sformatf("%h*%h=%h", a, b, p));
    end
    for (int r = 0; r < 5000; r++) begin
      a = $urandom; b = $urandom; #1;
      chk(p == longint'({32'd0, a}) * longint'({32'd0, b}), $sformatf("%h*%h=%h", a, b, p));
    end
    for (int i = 0; i < 256; i++) for (int j = 0; j < 256; j++) begin
      a8 = 8'(i); b8 = 8'(j); #1;
      chk(int'(p8) == i * j, "8-bit product");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 1000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
