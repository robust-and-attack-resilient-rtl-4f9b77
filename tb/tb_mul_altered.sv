// tb_mul_altered: checks the altered multiplier of an RSAS-locked design at
// its default configuration: operand b values 1 and 32'hFFFF_FFFF (block 0)
// must flip product bit 31, values 2 and 32'hFFFF_FFFE (block 1) bit 30,
// every other operand must give the true product.
module tb_mul_altered;
  int checks = 0, failures = 0;
  int flips0 = 0, flips1 = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] a, b; logic [63:0] p; logic [1:0] inv;
  mul_altered dut (.a(a), .b(b), .p(p), .inv(inv));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] expect_p(logic [31:0] av, logic [31:0] bv);
    logic [63:0] e = longint'({32'd0, av}) * longint'({32'd0, bv});
    if (bv == 32'd1 || bv == 32'hFFFF_FFFF) e[31] = ~e[31];
    if (bv == 32'd2 || bv == 32'hFFFF_FFFE) e[30] = ~e[30];
    return e;
  endfunction

  initial begin
    logic [31:0] crit [4] = '{32'd1, 32'hFFFF_FFFF, 32'd2, 32'hFFFF_FFFE};
    for (int r = 0; r < 4000; r++) begin
      a = $urandom;
      b = (r % 4 == 0) ? crit[(r / 4) % 4] : $urandom;
      #1;
      chk(p == expect_p(a, b), $sformatf("%h*%h=%h", a, b, p));
      chk(inv == {b == 32'd2 || b == 32'hFFFF_FFFE, b == 32'd1 || b == 32'hFFFF_FFFF}, "inv flags");
      if (inv[0]) flips0++;
      if (inv[1]) flips1++;
    end
    chk(flips0 > 0 && flips1 > 0, "both wires inverted at least once");
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
