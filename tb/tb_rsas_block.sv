// tb_rsas_block: checks an RSAS block exhaustively at N = 5 with four
// critical minterms.  Expected output: the SAS reference (K1 != K2 and K1 in
// the slice of X, i.e. top bits of K1 ^ X_g equal those of X, or
// K1 == X ^ X_g) inverted on the critical minterms.
// Also counts, per critical minterm, the share of wrong keys with
// Y_RSAS = 1, which must be (MJ-1)/MJ of the K1 rows (Table 4 of the paper),
// and checks that the correct key raises Y_RSAS exactly on critical minterms.
module tb_rsas_block;
  int checks = 0, failures = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam logic [4:0] XG = 5'h0B;
  localparam logic [3:0][4:0] CRIT = {5'd31, 5'd20, 5'd9, 5'd6};

  logic [4:0] x, k1, k2;
  logic y;
  rsas_block #(.N(5), .MJ(4), .CRIT(CRIT), .XG(XG))
    dut (.x(x), .k1(k1), .k2(k2), .y(y));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int cidx(logic [4:0] v);
    for (int i = 0; i < 4; i++) if (v == CRIT[i]) return i;
    return -1;
  endfunction

  initial begin
    int cnt, exp_cnt, i;
    bit sas;
    for (int xi = 0; xi < 32; xi++) begin
      cnt = 0;
      i = cidx(5'(xi));
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 32; b++) begin
          x = 5'(xi); k1 = 5'(a); k2 = 5'(b); #1;
          sas = (a != b) && (((i >= 0) && ((5'(a) ^ XG) >> 3) == (5'(xi) >> 3)) || (5'(a) == (5'(xi) ^ XG)));
          chk(y == (sas ^ (i >= 0)), $sformatf("x=%0d k1=%0d k2=%0d y=%0b", xi, a, b, y));
          if (a != b && y) cnt++;
          if (a == b) chk(y == (i >= 0), "correct key restores critical minterms only");
        end
      if (i < 0) exp_cnt = 31;
      else begin
        // the 24 K1 rows outside the minterm's own slice of 8
        exp_cnt = 31 * 24;
      end
      chk(cnt == exp_cnt, $sformatf("x=%0d wrong keys with Y=1: %0d, expected %0d", xi, cnt, exp_cnt));
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
