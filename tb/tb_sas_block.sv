// tb_sas_block: checks a SAS block exhaustively at N = 5 with four critical
// minterms and an XNOR mask, plus directed cases on the default 32-bit block.
// Reference: a key corrupts X iff K1 != K2 and either K1 lies in the slice
// of X (X critical: top bits of K1 ^ X_g ^ mask equal those of X) or
// K1 == X ^ X_g ^ mask.  The counts per minterm are compared with the input
// error rates the paper derives: 2^N - 1 corrupting keys for a non-critical
// minterm (IER = 2^-N) and (2^N/MJ)(2^N - 1) for a critical one (IER 1/MJ).
module tb_sas_block;
  int checks = 0, failures = 0;
  logic clk = 0;
  int unsigned cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam logic [4:0] XG   = 5'h13;
  localparam logic [4:0] MASK = 5'b01100;
  localparam logic [3:0][4:0] CRIT = {5'd30, 5'd10, 5'd17, 5'd5};

  logic [4:0] x, k1, k2;
  logic y, crit;
  sas_block #(.N(5), .MJ(4), .CRIT(CRIT), .XG(XG), .XNOR_MASK(MASK))
    dut (.x(x), .k1(k1), .k2(k2), .y(y), .crit(crit));

  // default 32-bit block: critical minterms 1 and 32'hFFFF_FFFF, X_g =
  // 32'h5A5A_C3C3; minterm 1 owns K1[31] = 0, minterm -1 owns K1[31] = 1
  logic [31:0] X, K1, K2;
  logic Y, C;
  sas_block dutd (.x(X), .k1(K1), .k2(K2), .y(Y), .crit(C));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int cidx(logic [4:0] v);
    for (int i = 0; i < 4; i++) if (v == CRIT[i]) return i;
    return -1;
  endfunction

  function automatic bit ref_y(logic [4:0] xv, logic [4:0] a, logic [4:0] b);
    int i = cidx(xv);
    bit in_slice = (i >= 0) && ((a ^ XG ^ MASK) >> 3) == (xv >> 3);
    return (a != b) && (in_slice || (a == (xv ^ XG ^ MASK)));
  endfunction

  initial begin
    int cnt, exp_cnt;
    for (int xi = 0; xi < 32; xi++) begin
      cnt = 0;
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 32; b++) begin
          x = 5'(xi); k1 = 5'(a); k2 = 5'(b); #1;
          if (y) cnt++;
          chk(y == ref_y(x, k1, k2), $sformatf("x=%0d k1=%0d k2=%0d y=%0b", xi, a, b, y));
        end
      checks++;
      if (cidx(5'(xi)) < 0) exp_cnt = 31;
      else exp_cnt = 31 * 8;
      if (cnt != exp_cnt) begin
        failures++; $display("FAIL: x=%0d corrupting keys %0d, expected %0d", xi, cnt, exp_cnt);
      end
      chk(crit == (cidx(5'(xi)) >= 0), "crit flag");
    end
    // directed checks on the default block
    X = 32'd1; K1 = 32'h1234_5678; K2 = 32'h0000_0001; #1;
    chk(Y == 1 && C == 1, "critical minterm 1, K1 in slice 0: fault");
    K2 = K1; #1;
    chk(Y == 0, "correct key: no fault");
    K1 = 32'h9234_5678; K2 = 32'h0; #1;
    chk(Y == 0, "critical minterm 1, K1 in slice 1: no fault");
    X = 32'hFFFF_FFFF; #1;
    chk(Y == 1, "critical minterm -1, K1 in slice 1: fault");
    X = 32'hDEAD_BEEF; K1 = 32'hDEAD_BEEF ^ 32'h5A5A_C3C3; K2 = 32'h7; #1;
    chk(Y == 1 && C == 0, "non-critical minterm, K1 = X ^ X_g: fault");
    K1 = K1 ^ 32'h100; #1;
    chk(Y == 0, "non-critical minterm, other K1: no fault");
    for (int r = 0; r < 1000; r++) begin
      X = $urandom; K1 = $urandom; K2 = K1; #1;
      chk(Y == 0, "random correct key");
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
