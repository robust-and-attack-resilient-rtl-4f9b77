// tb_sas_rsas_equivalence: checks that the RSAS form of the locked multiplier
// (altered host circuit plus RSAS blocks) computes exactly what the SAS form
// (unchanged host circuit plus SAS blocks) computes, for correct and wrong
// keys, in Configuration 2 (default: M = 4, L = 2) and Configuration 1
// (M = 2, L = 1), at 32-bit size.  Half of the operands are critical
// minterms and half of the keys steer one of them, so both inversions (in
// the host circuit and in the block) are exercised.
module tb_sas_rsas_equivalence;
  int checks = 0, failures = 0, n_diff_from_true = 0, n_inv = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] a, b;
  logic [1:0][63:0] key2;
  logic [0:0][63:0] key1;
  logic [63:0] p_r2, p_s2, p_r1, p_s1;
  logic [1:0] y_r2, y_s2;
  logic [0:0] y_r1, y_s1;

  locked_multiplier                 r2 (.a(a), .b(b), .key(key2), .p(p_r2), .y_lock(y_r2));
  locked_multiplier #(.ROBUST(0))   s2 (.a(a), .b(b), .key(key2), .p(p_s2), .y_lock(y_s2));

  localparam logic [1:0][31:0] CRIT1 = {32'hFFFF_FFFF, 32'h0000_0001};
  localparam logic [0:0][31:0] XG1   = {32'h5A5A_C3C3};
  localparam int unsigned      WB1 [1] = '{31};
  locked_multiplier #(.M(2), .L(1), .CRIT(CRIT1), .XG(XG1), .WIRE_BIT(WB1))
    r1 (.a(a), .b(b), .key(key1), .p(p_r1), .y_lock(y_r1));
  locked_multiplier #(.M(2), .L(1), .ROBUST(0), .CRIT(CRIT1), .XG(XG1), .WIRE_BIT(WB1))
    s1 (.a(a), .b(b), .key(key1), .p(p_s1), .y_lock(y_s1));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] crit [4] = '{32'd1, 32'hFFFF_FFFF, 32'd2, 32'hFFFF_FFFE};
    for (int r = 0; r < 20000; r++) begin
      a = $urandom;
      b = (r % 2 == 0) ? crit[$urandom_range(3)] : $urandom;
      key2 = {{32'($urandom), 32'($urandom)}, {32'($urandom), 32'($urandom)}};
      key1 = {32'($urandom), 32'($urandom)};
      if (r % 3 == 0) begin key2[0][63:32] = key2[0][31:0]; key1[0][63:32] = key1[0][31:0]; end
      if (r % 3 == 1) key2[1][63:32] = key2[1][31:0];
      #1;
      chk(p_r2 == p_s2, $sformatf("config 2: a=%h b=%h RSAS %h SAS %h", a, b, p_r2, p_s2));
      chk(p_r1 == p_s1, $sformatf("config 1: a=%h b=%h RSAS %h SAS %h", a, b, p_r1, p_s1));
      if (p_s2 != longint'({32'd0, a}) * longint'({32'd0, b})) n_diff_from_true++;
      if (y_r2 != y_s2) n_inv++;
    end
    $display("corrupted products: %0d, RSAS/SAS block outputs differing: %0d", n_diff_from_true, n_inv);
    chk(n_diff_from_true > 0, "wrong keys corrupted some products");
    chk(n_inv > 0, "RSAS inversion exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 10000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
